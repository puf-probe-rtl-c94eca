// diode_scan: drives the measurement of the twelve IED protection diodes.
//
// In the probe's front end a constant current source feeds MUX1, whose
// channel A_i forward-biases diode D_i; MUX2, whose selector pins S0..S3 are
// tied to MUX1's, picks up the same diode's voltage through a high-impedance
// op-amp follower, a ~15 Hz second-order low-pass filter and a delta-sigma
// ADC. This module is the digital side of that sweep: for channel 0..N-1 it
// drives `mux_sel` (the shared S3..S0), waits SETTLE_CYCLES for the filter to
// settle, requests one conversion (`adc_start` pulse) and stores the signed
// code returned with `adc_done` as `volts[channel]`. After the last channel
// `mux_en` drops (the analogue switches are opened) and `done` pulses.
// The channel order, the shared selector and the filter follow the paper.
// The settle time (100 ms at 50 MHz, about five time constants of a 15 Hz
// filter), the start/done handshake towards the ADC, and holding the
// converter's code as-is are this design's choices.
// Timing: each channel takes SETTLE_CYCLES + 1 cycles plus the ADC's
// conversion time.
module diode_scan
  import probe_pkg::*;
#(
  parameter int unsigned N             = N_DIODES,
  parameter int unsigned W             = ADC_W,
  parameter int unsigned SETTLE_CYCLES = 5_000_000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // analogue multiplexer pair MUX1/MUX2 (shared selector S3..S0)
  output logic [3:0]                  mux_sel,
  output logic                        mux_en,
  // ADC conversion handshake
  output logic                        adc_start,
  input  logic                        adc_done,
  input  logic [W-1:0]                adc_data,
  // measured diode voltages, ADC codes
  output logic signed [N-1:0][W-1:0]  volts
);
  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_CONVERT} state_t;
  state_t state;
  logic [$clog2(SETTLE_CYCLES+1)-1:0] wait_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      wait_cnt  <= '0;
      mux_sel   <= '0;
      mux_en    <= 1'b0;
      adc_start <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      volts     <= '0;
    end else begin
      adc_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mux_sel  <= '0;
          mux_en   <= 1'b1;
          wait_cnt <= '0;
          busy     <= 1'b1;
          state    <= S_SETTLE;
        end
        S_SETTLE: if (wait_cnt == ($clog2(SETTLE_CYCLES+1))'(SETTLE_CYCLES)) begin
          adc_start <= 1'b1;
          state     <= S_CONVERT;
        end else begin
          wait_cnt <= wait_cnt + 1'b1;
        end
        S_CONVERT: if (adc_done) begin
          volts[mux_sel] <= adc_data;
          wait_cnt       <= '0;
          if (mux_sel == 4'(N - 1)) begin
            mux_en <= 1'b0;
            busy   <= 1'b0;
            done   <= 1'b1;
            state  <= S_IDLE;
          end else begin
            mux_sel <= mux_sel + 1'b1;
            state   <= S_SETTLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
