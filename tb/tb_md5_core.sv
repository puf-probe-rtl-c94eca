// tb_md5_core: checks the MD5 core against published digests of "", "abc"
// and "The quick brown fox jumps over the lazy dog", and against the
// reference model for 40 random 4-byte nonces, and checks that each digest
// arrives 65 clocks after `start`.
module tb_md5_core;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] block;
  logic busy, done;
  logic [127:0] digest;
  int checks = 0, failures = 0;

  md5_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pad(input logic [7:0] m [], input int len);
    logic [7:0] b [64];
    logic [511:0] r;
    for (int i = 0; i < 64; i++) b[i] = 0;
    for (int i = 0; i < len; i++) b[i] = m[i];
    b[len] = 8'h80;
    b[56] = 8'(len * 8); b[57] = 8'((len * 8) >> 8);
    for (int i = 0; i < 64; i++) r[8*i +: 8] = b[i];   // little-endian words
    return r;
  endfunction

  task automatic run(input logic [7:0] m [], input int len, input logic [127:0] exp, input string name);
    int cycles;
    @(negedge clk);
    block = pad(m, len);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (digest !== exp) begin
      failures++;
      $display("FAIL %s: got %032h exp %032h", name, digest, exp);
    end
    checks++;
    if (cycles != 65) begin
      failures++;
      $display("FAIL %s: latency %0d, expected 65", name, cycles);
    end
  endtask

  initial begin
    logic [7:0] m [];
    string fox;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m = new[0];
    run(m, 0, 128'hd41d8cd98f00b204e9800998ecf8427e, "empty");
    m = new[3];
    m[0] = "a"; m[1] = "b"; m[2] = "c";
    run(m, 3, 128'h900150983cd24fb0d6963f7d28e17f72, "abc");
    fox = "The quick brown fox jumps over the lazy dog";
    m = new[fox.len()];
    foreach (m[i]) m[i] = fox[i];
    run(m, fox.len(), 128'h9e107d9d372bb6826bd81d3542a419d6, "fox");
    // the reference model itself must agree with the published value
    checks++;
    if (md5_bytes(m, fox.len()) !== 128'h9e107d9d372bb6826bd81d3542a419d6) begin
      failures++; $display("FAIL reference model");
    end
    for (int t = 0; t < 40; t++) begin
      logic [31:0] n;
      n = $urandom;
      m = new[4];
      m[0] = n[31:24]; m[1] = n[23:16]; m[2] = n[15:8]; m[3] = n[7:0];
      run(m, 4, md5_nonce(n), "nonce");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
