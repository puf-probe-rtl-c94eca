// tb_diode_sig_gen: drives the signature generator with the twelve diode
// voltages of the paper's Table I (in 0.1 mV codes) and with 60 random sets
// (including ties and negative codes), compares the 132-bit signature with
// the reference model, and checks the 133-clock latency.
// The published bit strings SIG_1 and SIG_2 are printed as 144 bits: the full
// 12 x 12 comparison matrix, row by row, including the twelve self-comparisons
// (always 0). With the diagonal removed they are 132-bit signatures in this
// generator's layout. SIG_1 matches the Table I voltages in every bit except
// the six that compare D10 with D1, D8 and D9: it implies D10 > 517.6 mV where
// Table I prints 515.1 mV. The bench therefore checks SIG_1 exactly with D10 =
// 518.1 mV, and SIG_2 with a voltage set built from the ranking SIG_2 implies
// (no voltages are published for that IED).
module tb_diode_sig_gen;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [11:0][15:0] volts;
  logic busy, done;
  logic [131:0] sig;
  int checks = 0, failures = 0;

  diode_sig_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int v [12]);
    int cycles;
    logic [131:0] exp;
    for (int i = 0; i < 12; i++) volts[i] = 16'(v[i]);
    exp = diode_sig(v);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (sig !== exp) begin failures++; $display("FAIL sig %033h exp %033h", sig, exp); end
    checks++;
    if (cycles != 133) begin failures++; $display("FAIL latency %0d", cycles); end
  endtask

  initial begin
    // Table I, OUT201..OUT212 in units of 0.1 mV
    int t1 [12] = '{5008, 5168, 5134, 5142, 5115, 5141, 5143, 5020, 5161, 5176, 5151, 5144};
    int v [12];
    volts = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(t1);
    // D0 (500.8 mV) is the lowest: its row is all zeros; D9 (517.6 mV) the highest: all ones
    checks++;
    if (sig[131 -: 11] !== 11'h000 || sig[131 - 11*9 -: 11] !== 11'h7FF) begin
      failures++; $display("FAIL Table I rows");
    end
    // printed SIG_1 (diagonal removed), Table I with D10 = 518.1 mV
    t1[10] = 5181;
    run(t1);
    checks++;
    if (sig !== 132'h1fe6485d0821542f8400bf3ff7ffdf8) begin
      failures++; $display("FAIL printed SIG_1: %033h", sig);
    end
    // printed SIG_2 (diagonal removed), voltages ordered as SIG_2 implies
    v = '{5003, 5010, 5004, 5011, 5000, 5008, 5002, 5005, 5006, 5007, 5009, 5001};
    run(v);
    checks++;
    if (sig !== 132'h143bfe50fff0015f420d51ab3576bf840) begin
      failures++; $display("FAIL printed SIG_2: %033h", sig);
    end
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < 12; i++)
        v[i] = (t % 3 == 0) ? int'($urandom_range(4)) + 5000 : int'($urandom_range(65535)) - 32768;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
