// tb_pooling_unit: random lane results through the three modes.
//   max:    o[m] = max(y[5-2m], y[4-2m]) with keep set only for pooled
//           positions below w_out (last, ragged batch checked too)
//   GAP:    a channel of 11 batches over width 64; positions 64, 65 of the
//           last batch must be ignored; flushed sum of (y >>> 6), then a
//           second channel must start again from zero
//   bypass: o[0] = y[5]
`timescale 1ns/1ps
module tb_pooling_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, pool = 0, last_batch = 0;
  pool_mode_e mode = POOL_MAX;
  logic [9:0] base = '0, w_in = '0, w_out = '0;
  logic signed [31:0] y [NUM_LANES];
  logic o_valid;
  logic [1:0] n_out;
  logic signed [31:0] o [3];
  logic [2:0] o_keep;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pooling_unit dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic strobe();
    @(negedge clk); pool = 1;
    @(negedge clk); pool = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g;
    foreach (y[i]) y[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // max pooling, width 512 -> 256, 86 batches
    mode = POOL_MAX; w_in = 512; w_out = 256;
    for (int b = 0; b < 86; b++) begin
      @(negedge clk);
      base = 10'(6 * b);
      foreach (y[i]) y[i] = int'($urandom) >>> ($urandom_range(0, 20));
      strobe();
      chk(o_valid && n_out == 3, "max: valid and three outputs");
      for (int m = 0; m < 3; m++) begin
        chk(o[m] == ((y[5-2*m] > y[4-2*m]) ? y[5-2*m] : y[4-2*m]), $sformatf("max b%0d m%0d", b, m));
        chk(o_keep[m] == (3*b + m < 256), $sformatf("keep b%0d m%0d", b, m));
      end
    end
    // GAP, width 64, 11 batches, two channels
    mode = POOL_GAP; w_in = 64; w_out = 1;
    for (int ch = 0; ch < 2; ch++) begin
      g = 0;
      for (int b = 0; b < 11; b++) begin
        @(negedge clk);
        base = 10'(6 * b); last_batch = (b == 10);
        foreach (y[i]) begin
          y[i] = $urandom_range(0, 400000) - 200000;
          if (6 * b + 5 - i < 64) g += y[i] >>> 6;
        end
        strobe();
        if (b < 10) chk(o_valid && n_out == 0, "gap: no output before last batch");
        else begin
          chk(o_valid && n_out == 1 && o_keep == 3'b001, "gap: one output at flush");
          chk(o[0] == g, $sformatf("gap sum ch%0d got %0d exp %0d", ch, o[0], g));
        end
      end
    end
    // bypass
    mode = POOL_BYPASS; w_in = 1; last_batch = 1; base = 0;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      foreach (y[i]) y[i] = int'($urandom);
      strobe();
      chk(o_valid && n_out == 1 && o[0] == y[5], "bypass passes lane 5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
