// uart_tx: 8N1 serial transmitter of the probe's serial terminal towards the CCS.
//
// A byte offered with `valid` while `ready` is high is sent as one start bit
// (0), eight data bits LSB first and one stop bit (1), each CLKS_PER_BIT
// clocks long, so one byte takes 10*CLKS_PER_BIT cycles. `ready` is high only
// when the line is idle. The paper says only that the CCS talks to the probe
// over a serial terminal; 8N1 framing and 115200 baud at a 50 MHz clock
// (CLKS_PER_BIT = 434) are this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);
  logic [9:0]  shreg;      // stop, data[7:0], start, shifted out LSB first
  logic [3:0]  bits_left;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT+1);
  localparam logic [CW-1:0] CNT_LAST = CW'(CLKS_PER_BIT - 1);
  logic [CW-1:0] cnt;

  assign ready = (bits_left == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      cnt       <= '0;
      txd       <= 1'b1;
    end else if (bits_left == 0) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data, 1'b0};
        bits_left <= 4'd10;
        cnt       <= '0;
      end
    end else begin
      txd <= shreg[0];
      if (cnt == CNT_LAST) begin
        cnt       <= '0;
        shreg     <= {1'b1, shreg[9:1]};
        bits_left <= bits_left - 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
