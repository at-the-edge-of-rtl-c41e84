// tb_scale_rom: checks the registered per-layer multiplier for each layer
// index, the one-cycle latency, and zero for an index past the last layer.
`timescale 1ns/1ps
module tb_scale_rom;
  import cnn_pkg::*;
  logic clk = 0;
  logic [2:0] layer_id = '0;
  logic signed [31:0] scale;
  int checks = 0, failures = 0;
  logic signed [31:0] expv [8] = '{32'sd134217728, 32'sd33554432, 32'sd33554432,
                                   32'sd134217728, 32'sd1073741824, 0, 0, 0};
  always #5 clk = ~clk;
  scale_rom dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int i = 7; i >= 0; i--) begin
        @(negedge clk); layer_id = 3'(i);
        @(negedge clk);
        checks++;
        if (scale !== expv[i]) begin
          failures++;
          $display("FAIL layer %0d scale %0d", i, scale);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
