// tb_nonce_rng: compares the nonce generator with an independent model of
// the Galois LFSR x^32+x^22+x^2+x+1 (Fibonacci-free, bit by bit) for 5,000
// clocks, with random `take` pulses that fold in random entropy, and checks
// that no nonce is zero and that consecutive nonces differ.
module tb_nonce_rng;
  logic clk = 0, rst_n = 0, take = 0;
  logic [31:0] entropy_in, nonce;
  logic [31:0] model, prev;
  int checks = 0, failures = 0;

  nonce_rng dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    logic lsb;
    lsb = s[0];
    n = s >> 1;
    if (lsb) begin n[31] = 1'b1; n[21] ^= 1'b1; n[1] ^= 1'b1; n[0] ^= 1'b1; end
    return n;
  endfunction

  initial begin
    entropy_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = 32'hACE1_2468;
    prev  = 0;
    for (int t = 0; t < 5000; t++) begin
      checks++;
      if (nonce !== model || nonce == 0 || nonce == prev) begin
        failures++; $display("FAIL t=%0d nonce %08h model %08h", t, nonce, model);
      end
      prev = nonce;
      take = ($urandom_range(9) == 0);
      entropy_in = $urandom;
      model = step(model) ^ (take ? entropy_in : 32'h0);
      if (model == 0) model = 32'hACE1_2468;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
