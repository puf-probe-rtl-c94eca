// tb_diode_scan: runs three diode sweeps (settle time shortened to 40 clocks)
// against the behavioural front-end model with random diode codes. Checks
// that the twelve stored codes match the diodes, that the selector visits
// channels 0..11 in order with exactly one conversion each, that every
// conversion starts SETTLE_CYCLES+1 clocks after the channel changes, that
// the multiplexer is disabled afterwards, and the total sweep time.
module tb_diode_scan;
  localparam int SETTLE = 40, CONV = 7;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, mux_en, adc_start, adc_done;
  logic [3:0] mux_sel;
  logic [15:0] adc_data;
  logic signed [11:0][15:0] volts, diode_code;
  int conversions, settle_violations;
  int checks = 0, failures = 0;

  diode_scan #(.SETTLE_CYCLES(SETTLE)) dut (.*);
  probe_frontend_model #(.CONV_CYCLES(CONV), .MIN_SETTLE(SETTLE)) afe (
    .clk, .mux_sel, .mux_en, .adc_start, .diode_code, .adc_done, .adc_data,
    .conversions, .settle_violations);
  always #5 clk = ~clk;

  // record the channel of each conversion request
  int order [$];
  always @(posedge clk) if (adc_start) order.push_back(int'(mux_sel));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, conv0;
    diode_code = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 12; i++) diode_code[i] = 16'($urandom_range(17000, 16000));
      order.delete();
      conv0 = conversions;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cycles = 0;
      while (!done) begin @(negedge clk); cycles++; end
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (volts[i] !== diode_code[i]) begin failures++; $display("FAIL ch %0d: %0d exp %0d", i, volts[i], diode_code[i]); end
      end
      checks++;
      if (order.size() != 12) begin failures++; $display("FAIL %0d conversions", order.size()); end
      else for (int i = 0; i < 12; i++) if (order[i] != i) begin failures++; $display("FAIL order"); break; end
      checks++;
      if (conversions - conv0 != 12) begin failures++; $display("FAIL conversions"); end
      checks++;
      // per channel: SETTLE+1 clocks of settling, one clock for the start
      // pulse to reach the ADC, CONV clocks of conversion, one clock to take
      // the result
      if (cycles != 12 * (SETTLE + CONV + 3)) begin
        failures++; $display("FAIL sweep took %0d clocks, exp %0d", cycles, 12 * (SETTLE + CONV + 3));
      end
      checks++;
      if (mux_en !== 1'b0 || busy !== 1'b0) begin failures++; $display("FAIL mux left enabled"); end
    end
    checks++;
    if (settle_violations != 0) begin failures++; $display("FAIL %0d conversions before settling", settle_violations); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
