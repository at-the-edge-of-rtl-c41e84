// tb_layer_sequencer: a model of the layer controller answers each
// layer_start with layer_done after a random delay. Checks that the five
// layers are started once each, in order, with the matching layer record;
// that pp_sel is 0,1,0,1,0 during L0..L4 (toggle after each layer); that
// done pulses once after L4; and that a second trigger runs again.
`timescale 1ns/1ps
module tb_layer_sequencer;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, layer_done = 0;
  logic busy, done, layer_start, pp_sel;
  logic [2:0] layer_id;
  layer_cfg_t cfg;
  int checks = 0, failures = 0;
  int starts [$];
  int n_done = 0;
  always #5 clk = ~clk;
  layer_sequencer dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  always @(posedge clk) begin
    if (rst_n && layer_start) begin
      starts.push_back(int'(layer_id));
      chk(cfg == layer_cfg(layer_id), "cfg matches layer");
      chk(pp_sel == layer_id[0], $sformatf("pp_sel %0d at layer %0d", pp_sel, layer_id));
      fork begin
        repeat ($urandom_range(1, 30)) @(negedge clk);
        layer_done = 1;
        @(negedge clk) layer_done = 0;
      end join_none
    end
    if (rst_n && done) n_done++;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      starts.delete();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      chk(busy, "busy after trigger");
      wait (done);
      @(negedge clk);
      chk(!busy, "idle after done");
      chk(starts.size() == 5, "five layer starts");
      for (int i = 0; i < starts.size(); i++) chk(starts[i] == i, "layer order");
    end
    repeat (2) @(negedge clk);
    chk(n_done == 2, $sformatf("one done per run (%0d)", n_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
