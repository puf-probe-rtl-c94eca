// tb_response_builder: builds Phase II responses for random challenges of
// 1..12 ports and compares them with a model that concatenates the 11-bit
// rows of the challenged diodes and the 22-bit register signature. Also
// checks that the full challenge 1..12 returns the whole 154-bit signature,
// that bad counts and port numbers are rejected, and the K+1 clock latency.
module tb_response_builder;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] count;
  logic [11:0][3:0] ports;
  logic [131:0] diode_sig;
  logic [21:0] reg_sig;
  logic busy, done, error;
  logic [153:0] resp;
  logic [7:0] nbits;
  int checks = 0, failures = 0;

  response_builder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int k, input int p [12], input bit expect_err);
    int cycles;
    logic [153:0] exp;
    int pos;
    count = 4'(k);
    for (int i = 0; i < 12; i++) ports[i] = 4'(p[i]);
    exp = '0; pos = 153;
    for (int i = 0; i < k; i++)
      for (int b = 0; b < 11; b++) begin
        exp[pos] = diode_sig[131 - 11*(p[i]-1) - b]; pos--;
      end
    for (int b = 21; b >= 0; b--) begin exp[pos] = reg_sig[b]; pos--; end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (error !== expect_err) begin failures++; $display("FAIL error=%0b for k=%0d", error, k); end
    if (!expect_err) begin
      checks++;
      if (resp !== exp || nbits !== 8'(11*k + 22)) begin
        failures++; $display("FAIL resp k=%0d\n got %039h\n exp %039h", k, resp, exp);
      end
      checks++;
      if (cycles != k + 1) begin failures++; $display("FAIL latency %0d for k=%0d", cycles, k); end
    end
  endtask

  initial begin
    int p [12];
    diode_sig = {$urandom, $urandom, $urandom, $urandom, 4'($urandom)};
    reg_sig   = 22'($urandom);
    ports = '0; count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 12; i++) p[i] = i + 1;
    run(12, p, 0);
    checks++;
    if (resp !== {diode_sig, reg_sig}) begin failures++; $display("FAIL full signature"); end
    for (int t = 0; t < 100; t++) begin
      int k;
      k = int'($urandom_range(12, 1));
      for (int i = 0; i < 12; i++) p[i] = int'($urandom_range(12, 1));
      diode_sig = {$urandom, $urandom, $urandom, $urandom, 4'($urandom)};
      reg_sig   = 22'($urandom);
      run(k, p, 0);
    end
    run(0, p, 1);
    run(13, p, 1);
    p[2] = 0;  run(5, p, 1);
    p[2] = 14; run(5, p, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
