// tb_dsp_cluster: feeds the six-lane systolic array the way the controller
// does for one batch of two input channels: clear with a bias, shift in six
// samples, then K cycles of MAC with a broadcast weight while the chain
// shifts on; a second channel accumulates on top without a clear. Lane i must
// hold bias + sum_ch sum_k w[ch][k] * s[ch][5-i+k]. Random signed operands,
// several kernel sizes.
`timescale 1ns/1ps
module tb_dsp_cluster;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, shift = 0, clear = 0, mac = 0;
  logic signed [15:0] x_in = '0, w = '0;
  logic signed [31:0] bias = '0;
  logic signed [31:0] y [NUM_LANES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dsp_cluster dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s [2][16], wt [2][9], exp_y, K, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      K = (trial % 3 == 0) ? 9 : (trial % 3 == 1) ? 5 : 1;
      b = $urandom_range(0, 2000) - 1000;
      foreach (s[c, i])  s[c][i]  = $urandom_range(0, 255) - 128;
      foreach (wt[c, k]) wt[c][k] = $urandom_range(0, 255) - 128;
      for (int c = 0; c < 2; c++) begin
        for (int i = 0; i < 6; i++) begin
          @(negedge clk);
          clear = (c == 0 && i == 0); bias = b;
          shift = 1; mac = 0; x_in = 16'(s[c][i]);
        end
        for (int k = 0; k < K; k++) begin
          @(negedge clk);
          clear = 0; shift = 1; mac = 1; w = 16'(wt[c][k]); x_in = 16'(s[c][6 + k]);
        end
      end
      @(negedge clk); shift = 0; mac = 0; clear = 0;
      for (int i = 0; i < NUM_LANES; i++) begin
        exp_y = b;
        for (int c = 0; c < 2; c++)
          for (int k = 0; k < K; k++) exp_y += wt[c][k] * s[c][5 - i + k];
        checks++;
        if (y[i] !== exp_y) begin
          failures++;
          $display("FAIL trial %0d lane %0d got %0d exp %0d", trial, i, y[i], exp_y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
