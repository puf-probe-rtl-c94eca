// probe_frontend_model: behavioural model of the probe's analogue front end
// for simulation only: twelve IED diodes biased one at a time through the
// two 16:1 analogue multiplexers, a unity-gain follower, the low-pass filter
// and the delta-sigma ADC, seen from the digital side.
// The diode voltage of the selected channel, as an ADC code, is the value on
// `diode_code[mux_sel]`; a conversion requested with `adc_start` returns that
// code with `adc_done` CONV_CYCLES clocks later. Channels 12..15 and a
// disabled multiplexer read as zero. `settle_violations` counts conversions
// started less than MIN_SETTLE clocks after the channel last changed, which
// in the real circuit would read a filter output that has not yet settled.
module probe_frontend_model #(
  parameter int unsigned CONV_CYCLES = 7,
  parameter int unsigned MIN_SETTLE  = 4
) (
  input  logic                     clk,
  input  logic [3:0]               mux_sel,
  input  logic                     mux_en,
  input  logic                     adc_start,
  input  logic signed [11:0][15:0] diode_code,
  output logic                     adc_done,
  output logic [15:0]              adc_data,
  output int                       conversions,
  output int                       settle_violations
);
  logic [3:0] last_sel = '0;
  int since_change = 0;
  int busy = 0;
  logic [15:0] held = '0;

  initial begin
    adc_done = 0; adc_data = 0; conversions = 0; settle_violations = 0;
  end

  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (mux_sel != last_sel) since_change = 0;
    else since_change++;
    last_sel = mux_sel;
    if (adc_start) begin
      if (since_change < int'(MIN_SETTLE)) settle_violations++;
      held = (mux_en && mux_sel < 12) ? diode_code[mux_sel] : 16'h0;
      busy = CONV_CYCLES;
    end else if (busy > 0) begin
      busy--;
      if (busy == 0) begin
        adc_done <= 1'b1;
        adc_data <= held;
        conversions++;
      end
    end
  end
endmodule
