// tb_spram_16kx16: writes a pseudo-random pattern to every word of the
// 16K x 16 RAM, reads it all back and checks the one-cycle read latency and
// that the read data holds while the RAM is not enabled.
`timescale 1ns/1ps
module tb_spram_16kx16;
  logic clk = 0, en = 0, we = 0;
  logic [13:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spram_16kx16 dut (.*);

  function automatic logic [15:0] pat(int i);
    return 16'((i * 40503) ^ (i >> 3) ^ 16'h5A5A);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16384; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 14'(i); wdata = pat(i);
    end
    for (int i = 0; i < 16384; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 14'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== pat(i)) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d got %h exp %h", i, rdata, pat(i));
      end
    end
    // hold while disabled
    @(negedge clk); addr = 14'd5;
    @(negedge clk);
    checks++;
    if (rdata !== pat(16383)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
