// tb_uart_tx: sends 200 random bytes, decodes the line in the testbench by
// sampling each bit in its middle, and checks the start bit, data bits
// (LSB first), stop bit, the frame length of 10 bit times and that ready is
// low for exactly the frame.
`timescale 1ns/1ps
module tb_uart_tx;
  localparam int CPB = 208;
  logic clk = 0, rst_n = 0, send = 0;
  logic [7:0] data = '0;
  logic ready, tx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  uart_tx dut (.*);

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned b, got;
    int busy_cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      b = 8'($urandom);
      @(negedge clk);
      checks++;
      if (!ready || tx !== 1'b1) begin failures++; $display("FAIL not idle"); end
      send = 1; data = b;
      @(negedge clk); send = 0; data = 8'($urandom);
      busy_cyc = 0;
      fork
        begin
          @(negedge tx);
          repeat (CPB / 2) @(posedge clk);
          checks++;
          if (tx !== 1'b0) begin failures++; $display("FAIL start bit"); end
          for (int i = 0; i < 8; i++) begin
            repeat (CPB) @(posedge clk);
            got[i] = tx;
          end
          repeat (CPB) @(posedge clk);
          checks += 2;
          if (tx !== 1'b1) begin failures++; $display("FAIL stop bit"); end
          if (got !== b) begin failures++; $display("FAIL byte %h got %h", b, got); end
        end
        begin
          while (!ready) begin @(negedge clk); busy_cyc++; end
        end
      join
      checks++;
      if (busy_cyc != 10 * CPB) begin failures++; $display("FAIL frame %0d cycles", busy_cyc); end
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
