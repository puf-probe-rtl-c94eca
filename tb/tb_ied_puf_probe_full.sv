// tb_ied_puf_probe_full: the same end-to-end scenario as tb_ied_puf_probe with
// the probe at its default sizes: 115200 baud at 50 MHz (434 clocks per bit),
// 100 ms of filter settling per diode (5,000,000 clocks) and 10,000 MCU-ADC
// samples per Phase I. Each diode sweep is about 60 million clocks.
module tb_ied_puf_probe_full;
  import probe_pkg::*;
  import tb_ref_pkg::*;
  localparam int CPB = 434, SETTLE = 5_000_000, NSTAT = 10_000;

  ied_puf_probe dut (.*);

`include "tb_probe_body.svh"
endmodule
