// tb_mc_controller: runs the memory and compute controller on its own, one
// layer at a time, with behavioural memories in the testbench (one-cycle read
// latency, like the block RAMs and SPRAMs). Every layer of the network is run
// with random inputs and weights, plus one small layer of odd sizes (3 input
// channels, 5 outputs, width 22, K=3, 11 outputs per channel so the packer
// must flush a half word). For each run the packed outputs or logits are
// compared with the reference model and the cycle count with
//   Cout*Nb*Cin*(7+K) + Cout*Nb*(6n+4) + Cout + 2
// counted from the clock edge that takes start to the one that raises done.
// It also checks that no weight word is read twice in a row (word reuse).
`timescale 1ns/1ps
module tb_mc_controller;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg = '0;
  logic signed [31:0] scale = '0;
  logic busy, done;
  logic src_rd_en, w_rd_en, b_rd_en, out_we, logit_valid;
  logic [15:0] src_rd_addr, out_wdata;
  logic [7:0] src_rd_byte;
  logic [14:0] w_rd_addr;
  logic [15:0] w_rd_data;
  logic [8:0] b_rd_addr;
  logic signed [31:0] b_rd_data, logit_data;
  logic [13:0] out_addr;
  logic [1:0] logit_idx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mc_controller dut (.*);

  byte unsigned src [];
  byte          wts [];
  int           bias [];
  logic [15:0]  outm [int];
  int           lg [4];
  int           n_rd_w = 0, n_dup_w = 0;
  logic [14:0]  last_w = '1;

  always @(posedge clk) if (rst_n) begin
    if (src_rd_en) src_rd_byte <= src[src_rd_addr];
    if (w_rd_en) begin
      w_rd_data <= {wts[2*w_rd_addr+1], wts[2*w_rd_addr]};
      n_rd_w++;
      if (w_rd_addr == last_w) n_dup_w++;
      last_w = w_rd_addr;
    end
    if (b_rd_en) b_rd_data <= bias[b_rd_addr];
    if (out_we) outm[out_addr] = out_wdata;
    if (logit_valid) lg[logit_idx] = logit_data;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(layer_cfg_t c, int m, string name);
    byte unsigned exp_out [];
    int exp_lg [];
    longint t0, cyc, expc, nb;
    int n, bad;
    ref_layer(c, src, wts, bias, m, exp_out, exp_lg);
    outm.delete();
    @(negedge clk);
    cfg = c; scale = m; start = 1;
    t0 = $time;
    @(negedge clk); start = 0;
    wait (done);
    cyc = ($time - t0) / 10;
    @(negedge clk);
    nb = (longint'(c.w_in) + 5) / 6;
    expc = longint'(c.cout) + 2;
    for (int b = 0; b < nb; b++) begin
      n = (c.pool == POOL_MAX) ? 3 : (c.pool == POOL_GAP) ? ((b == nb - 1) ? 1 : 0) : 1;
      expc += longint'(c.cout) * (longint'(c.cin) * (7 + c.k) + 6 * n + 4);
    end
    chk(cyc == expc, $sformatf("%s cycles %0d expected %0d", name, cyc, expc));
    if (c.relu) begin
      bad = 0;
      for (int i = 0; i < exp_out.size(); i++) begin
        logic [15:0] w;
        w = outm.exists(i / 2) ? outm[i / 2] : 16'hxxxx;
        if ((i[0] ? w[15:8] : w[7:0]) !== exp_out[i]) bad++;
      end
      chk(bad == 0, $sformatf("%s: %0d of %0d outputs wrong", name, bad, exp_out.size()));
      chk(outm.num() == (exp_out.size() + 1) / 2, $sformatf("%s: %0d words written", name, outm.num()));
    end else begin
      for (int i = 0; i < int'(c.cout); i++)
        chk(lg[i] == exp_lg[i], $sformatf("%s logit %0d got %0d exp %0d", name, i, lg[i], exp_lg[i]));
    end
    $display("%s: %0d cycles", name, cyc);
  endtask

  initial begin
    layer_cfg_t c;
    wts = new[65536];
    foreach (wts[i]) wts[i] = byte'($urandom_range(0, 48)) - 8'sd24;
    bias = new[512];
    foreach (bias[i]) bias[i] = $urandom_range(0, 4000) - 2000;
    src = new[65536];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // odd small layer first
    c = '0;
    c.cin = 3; c.cout = 5; c.k = 3; c.pad = 1; c.w_in = 22; c.w_out = 11;
    c.pool = POOL_MAX; c.src = SRC_PP; c.in_signed = 1'b0; c.relu = 1'b1;
    c.w_base = 16'd1001; c.b_base = 9'd300;
    foreach (src[i]) src[i] = 8'($urandom);
    run_layer(c, 32'sd100000000, "small");
    for (int l = 0; l < NUM_LAYERS; l++) begin
      c = layer_cfg(3'(l));
      foreach (src[i]) src[i] = 8'($urandom_range(0, 255));
      run_layer(c, scale_of(l), $sformatf("L%0d", l));
    end
    chk(n_dup_w == 0, "no weight word fetched twice in a row");
    chk(n_rd_w > 0, "weights fetched");
    $display("weight word reads: %0d", n_rd_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
