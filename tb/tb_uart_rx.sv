// tb_uart_rx: bit-bangs 60 random 8N1 frames (16 clocks per bit, with random
// gaps) into the receiver and checks every byte, then sends a frame with a
// broken stop bit and a short glitch, which must yield a framing error and
// no byte respectively.
module tb_uart_rx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  int nvalid = 0, nerr = 0;
  logic [7:0] last;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (valid) begin nvalid++; last = data; end
    if (frame_err) nerr++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic stopbit);
    rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stopbit; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (CPB + 4) @(negedge clk);
  endtask

  initial begin
    logic [7:0] b;
    int n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      b = 8'($urandom);
      n0 = nvalid;
      send(b, 1'b1);
      checks++;
      if (nvalid != n0 + 1 || last !== b) begin failures++; $display("FAIL byte %02h got %02h", b, last); end
      repeat ($urandom_range(20)) @(negedge clk);
    end
    n0 = nvalid;
    send(8'h5A, 1'b0);
    checks++;
    if (nerr != 1 || nvalid != n0) begin failures++; $display("FAIL framing error not flagged"); end
    rxd = 0; repeat (3) @(negedge clk); rxd = 1;
    repeat (12 * CPB) @(negedge clk);
    checks++;
    if (nvalid != n0) begin failures++; $display("FAIL glitch taken as a byte"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
