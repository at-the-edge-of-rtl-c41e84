// tb_cnn_l3w96: end-to-end run of the narrower model variant, whose last
// convolution has 96 output channels instead of 128 (so the fully connected
// layer has 96 inputs). Only the L3_COUT parameter of the top changes; the
// weight layout shrinks to 54,192 bytes and the L4 weights and biases move
// down accordingly.
//
// Random weights are put into the weight memory directly, a random window
// into input bank 0, and the inference is started with infer_trigger. The
// logits and the 96-entry L3 vector left in Pong are compared with the
// reference model, and the inference time with the cycle formula of the
// memory and compute controller (per layer Cout*Nb*Cin*(7+K) +
// Cout*Nb*(6n+4) + Cout + 2, plus 4 sequencer cycles per layer and 1 to
// start).
`timescale 1ns/1ps
module tb_cnn_l3w96;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int unsigned L3W = 96;

  logic clk = 1'b0, rst_n = 1'b0;
  logic uart_rxd = 1'b1, uart_txd;
  logic in_wr_en = 1'b0, in_wr_bank = 1'b0, in_rd_bank = 1'b0, infer_trigger = 1'b0;
  logic [7:0] in_wr_addr = '0;
  logic [15:0] in_wr_data = '0;
  logic busy, done, logits_valid;
  logic [1:0] mode;
  logic signed [31:0] logits [NUM_CLASSES];

  always #5 clk = ~clk;

  cnn_accel_top #(.L3_COUT(L3W)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte          wts [];
    int           bias [];
    byte unsigned x_in [], cur [], nxt [], l3_out [];
    int           lg [], exp_logit [];
    longint       t0, t1, exp_cycles;
    int           nbytes, bad;
    layer_cfg_t   c4;
    logic [15:0]  wd;
    byte unsigned got;

    c4     = layer_cfg(3'd4, L3W);
    nbytes = int'(c4.w_base) + int'(c4.cin) * 3;
    $display("weight bytes for L3 width %0d: %0d", L3W, nbytes);
    check(nbytes == 54192, "weight layout of the 96-channel variant");
    check(c4.b_base + 3 == 211, "bias entries of the 96-channel variant");

    wts = new[2 * 32768];
    foreach (wts[i]) wts[i] = (i < nbytes) ? byte'($urandom_range(0, 48)) - 8'sd24 : 8'sd0;
    bias = new[512];
    foreach (bias[i]) bias[i] = ((i * 37) % 201) - 100;
    x_in = new[IN_LEN];
    foreach (x_in[i]) x_in[i] = 8'($urandom_range(0, 200) - 100);

    for (int i = 0; i < 16384; i++) begin
      dut.u_wmem.u_lower.mem[i] = {wts[2*i+1], wts[2*i]};
      dut.u_wmem.u_upper.mem[i] = {wts[32768+2*i+1], wts[32768+2*i]};
    end

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    for (int i = 0; i < IN_LEN / 2; i++) begin
      @(negedge clk);
      in_wr_en = 1'b1; in_wr_bank = 1'b0; in_wr_addr = 8'(i);
      in_wr_data = {x_in[2*i+1], x_in[2*i]};
    end
    @(negedge clk) in_wr_en = 1'b0;

    cur = x_in;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      ref_layer(layer_cfg(3'(l), L3W), cur, wts, bias, scale_of(l), nxt, lg);
      if (l == 3) l3_out = nxt;
      if (l == 4) exp_logit = lg;
      cur = nxt;
    end

    fork
      begin
        @(negedge clk) infer_trigger = 1'b1;
        @(negedge clk) infer_trigger = 1'b0;
      end
      begin
        @(posedge dut.seq_start);
        t0 = $time;
      end
    join
    @(posedge done);
    t1 = $time;
    repeat (3) @(posedge clk);

    check(logits_valid, "logits_valid after run");
    for (int i = 0; i < NUM_CLASSES; i++) begin
      check(logits[i] == exp_logit[i], $sformatf("logit %0d: got %0d exp %0d", i, logits[i], exp_logit[i]));
      $display("logit[%0d] = %0d (expected %0d)", i, logits[i], exp_logit[i]);
    end
    bad = 0;
    for (int i = 0; i < int'(L3W); i++) begin
      wd  = dut.u_pp.u_pong.mem[i/2];
      got = i[0] ? wd[15:8] : wd[7:0];
      if (got != l3_out[i]) bad++;
    end
    check(bad == 0, $sformatf("L3 vector of %0d in Pong: %0d mismatches", L3W, bad));

    exp_cycles = 1;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      layer_cfg_t c;
      longint nb, co;
      int n;
      c  = layer_cfg(3'(l), L3W);
      nb = (longint'(c.w_in) + 5) / 6;
      co = longint'(c.cout);
      for (int b = 0; b < nb; b++) begin
        n = (c.pool == POOL_MAX) ? 3 : (c.pool == POOL_GAP) ? ((b == nb - 1) ? 1 : 0) : 1;
        exp_cycles += co * (longint'(c.cin) * (7 + c.k) + 6 * n + 4);
      end
      exp_cycles += co + 2 + 4;
    end
    $display("inference cycles: %0d (formula %0d)", (t1 - t0) / 10, exp_cycles);
    check((t1 - t0) / 10 == exp_cycles, "inference cycles match formula");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
