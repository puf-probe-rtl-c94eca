// tb_reg_sig_encoder: checks the 22-bit regulator-voltage / clock-period
// signature. The two IEDs of the paper's Table II must give the two
// signatures printed in the paper; random inputs are compared with a
// field-by-field model that includes saturation of large deviations.
module tb_reg_sig_encoder;
  logic clk = 0, rst_n = 0;
  logic [15:0] vrg1_10mv, vrg2_10mv, vrg3_10mv;
  logic [31:0] tp_fs;
  logic [21:0] sig;
  int checks = 0, failures = 0;

  reg_sig_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] field(input longint nom, input longint meas, input int magw);
    longint d, m;
    d = nom - meas;
    m = (d < 0) ? -d : d;
    if (m > (1 << magw) - 1) m = (1 << magw) - 1;
    return {31'(0), d < 0} << magw | 32'(m);
  endfunction

  task automatic apply(input int v1, input int v2, input int v3, input int tp, input logic [21:0] exp, input string name);
    @(negedge clk);
    vrg1_10mv = 16'(v1); vrg2_10mv = 16'(v2); vrg3_10mv = 16'(v3); tp_fs = 32'(tp);
    @(negedge clk);
    checks++;
    if (sig !== exp) begin failures++; $display("FAIL %s: %022b exp %022b", name, sig, exp); end
  endtask

  initial begin
    vrg1_10mv = 330; vrg2_10mv = 500; vrg3_10mv = 1500; tp_fs = 20_000_000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // IED-1: 3.26 V, 4.95 V, 14.85 V, 19.999945 ns
    apply(326, 495, 1485, 19_999_945, 22'b0010000101011110110111, "IED-1");
    // IED-2: 3.29 V, 4.99 V, 14.86 V, 20.000063 ns
    apply(329, 499, 1486, 20_000_063, 22'b0000100001011101111111, "IED-2");
    // exactly nominal
    apply(330, 500, 1500, 20_000_000, 22'b0, "nominal");
    for (int t = 0; t < 200; t++) begin
      int v1, v2, v3, tp;
      logic [21:0] e;
      v1 = 330 + int'($urandom_range(40)) - 20;
      v2 = 500 + int'($urandom_range(40)) - 20;
      v3 = 1500 + int'($urandom_range(40)) - 20;
      tp = 20_000_000 + int'($urandom_range(160)) - 80;
      e = {5'(field(330, v1, 4)), 5'(field(500, v2, 4)), 5'(field(1500, v3, 4)), 7'(field(20_000_000, tp, 6))};
      apply(v1, v2, v3, tp, e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
