// tb_adc_puf_stats: feeds the statistics block, at its default of 10,000
// samples, with bimodal noise shaped like the MCU-ADC histograms (a few LSB
// around zero) and with valid gaps, then compares mu and sigma (Q.8) with an
// exact integer model: mu = trunc(256*S/N), sigma = floor(floor(sqrt(65536*(N*Q
// - S^2))) / N). A second run with a constant input checks sigma = 0 and a
// negative mean.
module tb_adc_puf_stats;
  localparam int N = 10_000;
  logic clk = 0, rst_n = 0, start = 0, sample_valid = 0;
  logic signed [11:0] sample;
  logic busy, done, valid;
  logic signed [23:0] mu_q8;
  logic [23:0] sigma_q8;
  int checks = 0, failures = 0;

  adc_puf_stats dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt(input longint x);
    longint r;
    r = longint'($floor($sqrt(real'(x))));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  task automatic run(input int mode);
    longint s, q, d, emu, esig, a;
    int v, n;
    s = 0; q = 0; n = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (n < N) begin
      sample_valid = ($urandom_range(3) != 0);
      if (mode == 0)
        v = ($urandom_range(2) == 0) ? int'($urandom_range(16)) - 18 : int'($urandom_range(20)) - 6;
      else
        v = -37;
      sample = 12'(v);
      if (sample_valid) begin s += v; q += v * v; n++; end
      @(negedge clk);
    end
    sample_valid = 0;
    while (!done) @(negedge clk);
    a    = (s < 0) ? -s : s;
    emu  = (a * 256) / N;
    if (s < 0) emu = -emu;
    d    = longint'(N) * q - s * s;
    esig = isqrt(d * 65536) / N;
    checks++;
    if (longint'(mu_q8) != emu) begin failures++; $display("FAIL mu %0d exp %0d", mu_q8, emu); end
    checks++;
    if (longint'(sigma_q8) != esig) begin failures++; $display("FAIL sigma %0d exp %0d", sigma_q8, esig); end
    checks++;
    if (!valid) begin failures++; $display("FAIL valid"); end
    $display("mode %0d: mu = %0.3f sigma = %0.3f", mode, real'(mu_q8) / 256.0, real'(sigma_q8) / 256.0);
  endtask

  initial begin
    sample = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    checks++;
    if (sigma_q8 != 0 || mu_q8 != -37 * 256) begin failures++; $display("FAIL constant input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
