// tb_uart_rx: sends 300 random bytes as 8N1 frames at the default bit time,
// with random idle gaps and a bit time up to 2% off nominal, and checks each
// received byte. A frame with a low stop bit, and a break (line held low
// past the stop bit), must produce no byte.
`timescale 1ns/1ps
module tb_uart_rx;
  localparam int CPB = 208;
  logic clk = 0, rst_n = 0, rx = 1;
  logic valid;
  logic [7:0] data;
  int checks = 0, failures = 0;
  byte unsigned q [$];
  int n_valid = 0;
  always #5 clk = ~clk;
  uart_rx dut (.*);

  task automatic frame(byte unsigned b, int cpb, bit stop);
    rx = 0; repeat (cpb) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (cpb) @(posedge clk); end
    rx = stop; repeat (cpb) @(posedge clk);
    rx = 1; repeat (cpb) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && valid) begin
    n_valid++;
    checks++;
    if (q.size() == 0 || data !== q[0]) begin
      failures++;
      $display("FAIL got %h", data);
    end
    if (q.size() != 0) void'(q.pop_front());
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      b = 8'($urandom);
      q.push_back(b);
      frame(b, CPB + $urandom_range(0, 8) - 4, 1'b1);
      repeat ($urandom_range(0, 50)) @(posedge clk);
    end
    // a framing error must not produce a byte
    frame(8'hA5, CPB, 1'b0);
    // a frame whose stop bit runs into a long low line (a break)
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = 1'b0; repeat (CPB) @(posedge clk); end
    rx = 0; repeat (3 * CPB) @(posedge clk);
    rx = 1;
    repeat (5 * CPB) @(posedge clk);
    checks += 2;
    if (n_valid != 300) begin failures++; $display("FAIL %0d bytes received", n_valid); end
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
