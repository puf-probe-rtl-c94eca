// tb_uart_tx: sends 60 random bytes through the transmitter (16 clocks per
// bit) and decodes the line independently by sampling mid-bit, checking the
// start bit, the eight data bits LSB first at one bit per 16 clocks, the stop
// bit, and that `ready` returns as the stop bit ends.
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, valid = 0, ready, txd;
  logic [7:0] data;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b, got;
    int busy_cycles;
    data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (txd !== 1'b1 || ready !== 1'b1) begin failures++; $display("FAIL idle line"); end
    for (int t = 0; t < 60; t++) begin
      b = 8'($urandom);
      while (!ready) @(negedge clk);
      data = b; valid = 1;
      @(negedge clk); valid = 0;
      // wait for the falling start edge, then sample in mid-bit
      while (txd) @(negedge clk);
      repeat (CPB / 2) @(negedge clk);
      checks++;
      if (txd !== 1'b0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        got[i] = txd;
      end
      repeat (CPB) @(negedge clk);
      checks++;
      if (txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      checks++;
      if (got !== b) begin failures++; $display("FAIL byte %02h got %02h", b, got); end
      busy_cycles = 0;
      while (!ready) begin @(negedge clk); busy_cycles++; end
      checks++;
      if (busy_cycles > CPB / 2 + 2) begin failures++; $display("FAIL frame too long"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
