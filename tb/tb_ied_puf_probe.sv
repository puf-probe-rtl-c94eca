// tb_ied_puf_probe: end-to-end test of the probe at reduced sizes (8 clocks
// per serial bit, 60-clock filter settling, 500 MCU-ADC samples per Phase I);
// the scenario is described in tb_probe_body.svh.
module tb_ied_puf_probe;
  import probe_pkg::*;
  import tb_ref_pkg::*;
  localparam int CPB = 8, SETTLE = 60, NSTAT = 500;

  ied_puf_probe #(.CLKS_PER_BIT(CPB), .SETTLE_CYCLES(SETTLE), .N_STAT_SAMPLES(NSTAT)) dut (.*);

`include "tb_probe_body.svh"
endmodule
