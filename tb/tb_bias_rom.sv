// tb_bias_rom: reads all 512 entries of the bias ROM and compares them with
// the formula the default content follows, ((i*37) mod 201) - 100.
`timescale 1ns/1ps
module tb_bias_rom;
  logic clk = 0, en = 0;
  logic [8:0] addr = '0;
  logic signed [31:0] rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bias_rom dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 511; i >= 0; i--) begin
      @(negedge clk); en = 1; addr = 9'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata != ((i * 37) % 201) - 100) begin
        failures++;
        $display("FAIL bias[%0d] = %0d", i, rdata);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
