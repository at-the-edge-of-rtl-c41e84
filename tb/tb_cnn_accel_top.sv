// tb_cnn_accel_top: end-to-end test of the accelerator at its default sizes.
//
// 1. Random INT8 weights are placed in the weight memory; four words that
//    straddle the boundary of the two SPRAM banks are sent over the UART
//    with an 'L' packet instead, then read back with a 'V' packet and
//    compared byte by byte.
// 2. A random 512-sample window is written into input bank 1.
// 3. A 'G' command runs the five layers. The logits are compared with the
//    reference model, and so are the L2 feature map left in Ping and the L3
//    (GAP) vector left in Pong.
// 4. Cycle counts are checked: prime and compute cycles against the paper's
//    per-layer table (1,112,608 and 1,066,976 in total), requantised values x6
//    against its requant column (75,666), and the whole run against the
//    design's own cycle formula.
// 5. While the first inference runs, a second window is written into
//    bank 0 and a stray 'L' packet is sent; the packet must not reach the
//    weight memory. A pulse on infer_trigger (no UART command) then
//    classifies the bank-0 window.
// Each mechanism (load, readback, run, max pooling, GAP, bypass, padding,
// weight-word reuse, saturation at 0 and 255, ping-pong toggle) is counted
// and a failure is counted for one that never happened.
`timescale 1ns/1ps
module tb_cnn_accel_top;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;

  localparam int CPB = 208;   // the top's default bit time

  logic clk = 1'b0, rst_n = 1'b0;
  logic uart_rxd = 1'b1, uart_txd;
  logic in_wr_en = 1'b0, in_wr_bank = 1'b0, in_rd_bank = 1'b1, infer_trigger = 1'b0;
  logic [7:0] in_wr_addr = '0;
  logic [15:0] in_wr_data = '0;
  logic busy, done, logits_valid;
  logic [1:0] mode;
  logic signed [31:0] logits [NUM_CLASSES];

  always #5 clk = ~clk;

  cnn_accel_top dut (.*);

  int checks = 0, failures = 0;
  byte          wts [];
  int           bias [];
  byte unsigned x_in [];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send_byte(byte unsigned b);
    uart_rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    uart_rxd = 1'b1;
    repeat (CPB) @(posedge clk);
  endtask

  task automatic recv_byte(output byte unsigned b);
    @(negedge uart_txd);
    repeat (CPB + CPB/2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      b[i] = uart_txd;
      repeat (CPB) @(posedge clk);
    end
  endtask

  function automatic logic [15:0] wword(int i);
    return {wts[2*i+1], wts[2*i]};
  endfunction

  // ---------------- event counters -------------------------------------------
  longint n_prime = 0, n_compute = 0, n_req = 0, n_pad = 0, n_reuse = 0;
  longint n_max = 0, n_gap = 0, n_bypass = 0, n_sat_hi = 0, n_sat_lo = 0;
  longint n_toggle = 0, n_load = 0, n_verify = 0, n_run = 0;
  longint prime_l [NUM_LAYERS], comp_l [NUM_LAYERS], req_l [NUM_LAYERS];
  bit     counting = 1'b0;
  longint n_wm_wr_run = 0, n_stray = 0;
  byte unsigned x_in2 [];
  always @(posedge clk) if (rst_n && busy) begin
    if (dut.a_wm_en && dut.a_wm_we) n_wm_wr_run++;
    if (dut.rx_valid) n_stray++;
  end

  always @(posedge clk) if (rst_n) begin
    if (counting) begin
      if (dut.u_mcc.state == dut.u_mcc.S_PRIME)   begin n_prime++;   prime_l[dut.layer_id]++; end
      if (dut.u_mcc.state == dut.u_mcc.S_COMPUTE) begin n_compute++; comp_l[dut.layer_id]++;  end
      if (dut.u_mcc.s_valid && dut.u_mcc.s_ready) begin n_req++; req_l[dut.layer_id]++; end
    end
    if (dut.u_mcc.fetch && dut.u_mcc.fetch_pad) n_pad++;
    if (dut.u_mcc.w_need && !dut.u_mcc.w_rd_en) n_reuse++;
    if (dut.u_mcc.u_pool.pool) begin
      if (dut.u_mcc.c.pool == POOL_MAX) n_max++;
      else if (dut.u_mcc.c.pool == POOL_GAP && dut.u_mcc.u_pool.last_batch) n_gap++;
      else if (dut.u_mcc.c.pool == POOL_BYPASS) n_bypass++;
    end
    if (dut.u_mcc.u_req.mul_done && dut.u_mcc.c.relu) begin
      if (dut.u_mcc.u_req.r > 255) n_sat_hi++;
      if (dut.u_mcc.u_req.r < 0)   n_sat_lo++;
    end
    if (dut.layer_done) n_toggle++;
    if (dut.u_arb.state == dut.u_arb.S_IDLE && dut.rx_valid) begin
      if (dut.rx_data == 8'h4C) n_load++;
      if (dut.rx_data == 8'h56) n_verify++;
      if (dut.rx_data == 8'h47) n_run++;
    end
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned cur [], nxt [], l2_out [], l3_out [];
    int lg [], exp_logit [];
    byte unsigned rb;
    longint t0, t1, exp_cycles;
    int base_w;

    for (int l = 0; l < NUM_LAYERS; l++) begin prime_l[l] = 0; comp_l[l] = 0; req_l[l] = 0; end

    // data
    wts = new[2 * 32768];
    foreach (wts[i]) wts[i] = (i < WEIGHT_BYTES) ? byte'($urandom_range(0, 48)) - 8'sd24 : 8'sd0;
    bias = new[512];
    foreach (bias[i]) bias[i] = ((i * 37) % 201) - 100;
    x_in = new[IN_LEN];
    foreach (x_in[i]) x_in[i] = 8'($urandom_range(0, 200) - 100);

    // weight memory: backdoor except the words 0x3FFE..0x4001
    for (int i = 0; i < 16384; i++) begin
      dut.u_wmem.u_lower.mem[i] = (i >= 16382) ? 16'h0000 : wword(i);
      dut.u_wmem.u_upper.mem[i] = (i <= 1)     ? 16'h0000 : wword(16384 + i);
    end

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // 'L' packet: 4 words from 0x3FFE, across the bank boundary
    base_w = 16'h3FFE;
    send_byte(8'h4C);
    send_byte(8'h3F); send_byte(8'hFE); send_byte(8'h00); send_byte(8'h04);
    for (int i = 0; i < 4; i++) begin
      send_byte(wword(base_w + i)[15:8]);
      send_byte(wword(base_w + i)[7:0]);
    end
    repeat (10) @(posedge clk);
    check(dut.u_wmem.u_lower.mem[16383] == wword(16383), "load into lower bank top word");
    check(dut.u_wmem.u_upper.mem[0] == wword(16384), "load into upper bank word 0");

    // 'V' packet: read the same 4 words back
    fork
      begin
        send_byte(8'h56);
        send_byte(8'h3F); send_byte(8'hFE); send_byte(8'h00); send_byte(8'h04);
      end
      begin
        for (int i = 0; i < 8; i++) begin
          recv_byte(rb);
          check(rb == (i[0] ? wword(base_w + i/2)[7:0] : wword(base_w + i/2)[15:8]),
                $sformatf("readback byte %0d", i));
        end
      end
    join
    repeat (20) @(posedge clk);

    // input window into bank 1
    for (int i = 0; i < IN_LEN / 2; i++) begin
      @(negedge clk);
      in_wr_en = 1'b1; in_wr_bank = 1'b1; in_wr_addr = 8'(i);
      in_wr_data = {x_in[2*i+1], x_in[2*i]};
    end
    @(negedge clk) in_wr_en = 1'b0;

    // reference
    cur = x_in;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      ref_layer(layer_cfg(3'(l)), cur, wts, bias, scale_of(l), nxt, lg);
      if (l == 2) l2_out = nxt;
      if (l == 3) l3_out = nxt;
      if (l == 4) exp_logit = lg;
      cur = nxt;
    end

    // run; while it runs, the next window goes into bank 0 and a stray
    // 'L' packet arrives on the UART, which must not reach the weights
    x_in2 = new[IN_LEN];
    foreach (x_in2[i]) x_in2[i] = 8'($urandom_range(0, 200) - 100);
    counting = 1'b1;
    fork
      send_byte(8'h47);
      begin
        @(posedge dut.seq_start);
        t0 = $time;
      end
    join
    repeat (100) @(posedge clk);
    for (int i = 0; i < IN_LEN / 2; i++) begin
      @(negedge clk);
      in_wr_en = 1'b1; in_wr_bank = 1'b0; in_wr_addr = 8'(i);
      in_wr_data = {x_in2[2*i+1], x_in2[2*i]};
    end
    @(negedge clk) in_wr_en = 1'b0;
    send_byte(8'h4C);
    send_byte(8'h00); send_byte(8'h00); send_byte(8'h00); send_byte(8'h01);
    send_byte(8'h7F); send_byte(8'h7F);
    check(busy && mode == 2'd3, "still running after the stray packet");
    @(posedge done);
    t1 = $time;
    @(posedge clk);
    counting = 1'b0;
    repeat (3) @(posedge clk);

    check(logits_valid, "logits_valid after run");
    for (int i = 0; i < NUM_CLASSES; i++) begin
      check(logits[i] == exp_logit[i], $sformatf("logit %0d: got %0d exp %0d", i, logits[i], exp_logit[i]));
      $display("logit[%0d] = %0d (expected %0d)", i, logits[i], exp_logit[i]);
    end
    begin
      int bad, zeros, sat;
      logic [15:0] wd;
      byte unsigned got;
      bad = 0; zeros = 0; sat = 0;
      for (int i = 0; i < 64 * 64; i++) begin
        wd  = dut.u_pp.u_ping.mem[i/2];
        got = i[0] ? wd[15:8] : wd[7:0];
        if (got != l2_out[i]) bad++;
        if (l2_out[i] == 0) zeros++;
        if (l2_out[i] == 255) sat++;
      end
      check(bad == 0, $sformatf("L2 feature map in Ping: %0d mismatches", bad));
      $display("L2 output: %0d zero, %0d saturated of 4096", zeros, sat);
      bad = 0;
      for (int i = 0; i < 128; i++) begin
        wd  = dut.u_pp.u_pong.mem[i/2];
        got = i[0] ? wd[15:8] : wd[7:0];
        if (got != l3_out[i]) bad++;
      end
      check(bad == 0, $sformatf("L3 GAP vector in Pong: %0d mismatches", bad));
    end

    // cycle counts against the paper's table
    check(prime_l[0] == 9632   && prime_l[1] == 154112 && prime_l[2] == 315392 &&
          prime_l[3] == 630784 && prime_l[4] == 2688, "per-layer prime cycles match table");
    check(comp_l[0] == 12384   && comp_l[1] == 198144 && comp_l[2] == 405504 &&
          comp_l[3] == 450560  && comp_l[4] == 384, "per-layer compute cycles match table");
    check(req_l[0]*6 == 24768  && req_l[1]*6 == 24768 && req_l[2]*6 == 25344 &&
          req_l[3]*6 == 768    && req_l[4]*6 == 18, "per-layer requant cycles match table");
    check(n_prime == 1112608, $sformatf("total prime %0d", n_prime));
    check(n_compute == 1066976, $sformatf("total compute %0d", n_compute));
    check(n_req * 6 == 75666, $sformatf("total requant %0d", n_req * 6));

    // design formula: per layer Cout*Nb*Cin*(7+K) + Cout*Nb*(6n+4) + Cout + 2,
    // plus 4 sequencer cycles per layer and 1 to start
    exp_cycles = 1;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      layer_cfg_t c;
      longint nb, co;
      int n;
      c  = layer_cfg(3'(l));
      nb = (longint'(c.w_in) + 5) / 6;
      co = longint'(c.cout);
      for (int b = 0; b < nb; b++) begin
        n = (c.pool == POOL_MAX) ? 3 : (c.pool == POOL_GAP) ? ((b == nb - 1) ? 1 : 0) : 1;
        exp_cycles += co * (longint'(c.cin) * (7 + c.k) + 6 * n + 4);
      end
      exp_cycles += co + 2 + 4;
    end
    $display("inference cycles: %0d (formula %0d, paper ~2.26M)", (t1 - t0) / 10, exp_cycles);
    check((t1 - t0) / 10 == exp_cycles, "total inference cycles match formula");

    $display("events: load=%0d verify=%0d run=%0d max=%0d gap=%0d bypass=%0d pad=%0d reuse=%0d sat_hi=%0d sat_lo=%0d toggle=%0d",
             n_load, n_verify, n_run, n_max, n_gap, n_bypass, n_pad, n_reuse, n_sat_hi, n_sat_lo, n_toggle);
    check(n_load > 0, "weight load happened");
    check(n_verify > 0, "readback happened");
    check(n_run > 0, "inference run happened");
    check(n_max > 0, "max pooling happened");
    check(n_gap == 128, "GAP flush once per L3 channel");
    check(n_bypass == 3, "bypass once per FC output");
    check(n_pad > 0, "zero padding happened");
    check(n_reuse > 0, "weight word reuse happened");
    check(n_sat_hi > 0, "saturation at 255 happened");
    check(n_sat_lo > 0, "clamp at 0 happened");
    check(n_toggle == 5, "ping-pong toggled after each layer");
    check(n_wm_wr_run == 0, $sformatf("no weight write from the UART during a run (%0d)", n_wm_wr_run));
    check(n_stray > 0, "UART bytes arrived during a run");

    // second inference from bank 0, the window written during the first run
    cur = x_in2;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      ref_layer(layer_cfg(3'(l)), cur, wts, bias, scale_of(l), nxt, lg);
      if (l == 4) exp_logit = lg;
      cur = nxt;
    end
    in_rd_bank = 1'b0;
    @(negedge clk) infer_trigger = 1'b1;
    @(negedge clk) infer_trigger = 1'b0;
    repeat (2) @(negedge clk);
    check(busy && mode == 2'd3, "automatic trigger started a run");
    @(posedge done);
    repeat (3) @(posedge clk);
    check(logits_valid, "logits_valid after second run");
    for (int i = 0; i < NUM_CLASSES; i++)
      check(logits[i] == exp_logit[i], $sformatf("run 2 logit %0d: got %0d exp %0d", i, logits[i], exp_logit[i]));
    check(mode == 2'd0, "back in idle after the second run");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
