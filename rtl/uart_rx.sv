// uart_rx: 8N1 serial receiver of the probe's serial terminal from the CCS.
//
// The input is first synchronised through two flip-flops. A falling edge
// starts a frame; the start bit is re-checked half a bit later, then each of
// the eight data bits (LSB first) is sampled in the middle of its bit time,
// and the stop bit must read 1. A good frame raises `valid` for one clock with
// the byte on `data`; a frame whose stop bit is 0 is dropped and counted in
// `frame_err` (a one-cycle pulse). 8N1 framing and the default 115200 baud at
// 50 MHz are this design's choice; the paper only names a serial terminal.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);
  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;
  state_t state;
  logic [1:0] sync;
  logic [2:0] bit_idx;
  logic [7:0] shreg;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT+1);
  localparam logic [CW-1:0] CNT_LAST = CW'(CLKS_PER_BIT - 1);
  localparam logic [CW-1:0] CNT_HALF = CW'((CLKS_PER_BIT - 1) / 2);
  logic [CW-1:0] cnt;
  logic rx;

  assign rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= IDLE;
      bit_idx   <= '0;
      shreg     <= '0;
      cnt       <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        IDLE: if (!rx) begin
          state <= START;
          cnt   <= '0;
        end
        START: if (cnt == CNT_HALF) begin
          cnt     <= '0;
          bit_idx <= '0;
          state   <= rx ? IDLE : DATA;   // glitch, not a start bit
        end else cnt <= cnt + 1'b1;
        DATA: if (cnt == CNT_LAST) begin
          cnt   <= '0;
          shreg <= {rx, shreg[7:1]};
          if (bit_idx == 3'd7) state <= STOP;
          bit_idx <= bit_idx + 1'b1;
        end else cnt <= cnt + 1'b1;
        STOP: if (cnt == CNT_LAST) begin
          cnt   <= '0;
          state <= IDLE;
          if (rx) begin
            data  <= shreg;
            valid <= 1'b1;
          end else begin
            frame_err <= 1'b1;
          end
        end else cnt <= cnt + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
