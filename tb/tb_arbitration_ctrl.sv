// tb_arbitration_ctrl: drives command bytes straight into the command FSM
// (no UART line), with a real weight memory behind it and a transmitter
// model that is busy for a random time per byte.
//   'L' packets write words that are then checked in the memory,
//   'V' packets must send the same words back (hi byte first),
//   'G' must hand the memory to the datapath, pulse seq_start once and hold
//       until seq_done; stray bytes in idle are ignored.
//   auto_go must start a run from idle like 'G' and be ignored while a
//       packet is being loaded.
`timescale 1ns/1ps
module tb_arbitration_ctrl;
  logic clk = 0, rst_n = 0, rx_valid = 0, tx_ready = 1, seq_done = 0, auto_go = 0;
  logic [7:0] rx_data = '0, tx_data;
  logic tx_send, wm_en, wm_we, owner_infer, seq_start;
  logic [14:0] wm_addr;
  logic [15:0] wm_wdata, wm_rdata;
  logic [1:0] mode;
  int checks = 0, failures = 0;
  logic [15:0] model [int];
  byte unsigned txq [$];
  int n_start = 0;
  always #5 clk = ~clk;
  arbitration_ctrl dut (.*);
  weight_mem u_mem (.clk, .en(wm_en), .we(wm_we), .addr(wm_addr), .wdata(wm_wdata), .rdata(wm_rdata));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic put(byte unsigned b);
    @(negedge clk); rx_valid = 1; rx_data = b;
    @(negedge clk); rx_valid = 0;
    repeat ($urandom_range(0, 4)) @(negedge clk);
  endtask

  // transmitter model: takes a byte, then busy for a while
  always @(posedge clk) if (rst_n) begin
    if (tx_send && tx_ready) begin
      txq.push_back(tx_data);
      tx_ready <= 0;
      fork begin repeat ($urandom_range(1, 12)) @(posedge clk); tx_ready <= 1; end join_none
    end
    if (seq_start) n_start++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, n;
    logic [15:0] w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    put(8'h00); put(8'h13);                      // ignored
    chk(mode == 2'd0, "stray bytes keep idle");
    for (int p = 0; p < 8; p++) begin
      a = (p == 0) ? 16'h3FFC : $urandom_range(0, 32767 - 40);
      n = $urandom_range(1, 30);
      put(8'h4C); put(8'(a >> 8)); put(8'(a)); put(8'(n >> 8)); put(8'(n));
      chk(mode == 2'd1, "load mode");
      for (int i = 0; i < n; i++) begin
        w = 16'($urandom);
        model[a + i] = w;
        put(w[15:8]); put(w[7:0]);
      end
      repeat (3) @(negedge clk);
      chk(mode == 2'd0, "back to idle after load");
      for (int i = 0; i < n; i++) begin
        logic [15:0] got;
        got = (a + i < 16384) ? u_mem.u_lower.mem[(a + i) % 16384] : u_mem.u_upper.mem[(a + i) % 16384];
        chk(got === model[a + i], $sformatf("loaded word %h", a + i));
      end
      // readback
      txq.delete();
      put(8'h56); put(8'(a >> 8)); put(8'(a)); put(8'(n >> 8)); put(8'(n));
      wait (mode == 2'd0);
      repeat (20) @(negedge clk);
      chk(txq.size() == 2 * n, $sformatf("readback length %0d", txq.size()));
      for (int i = 0; i < n && 2*i+1 < txq.size(); i++)
        chk({txq[2*i], txq[2*i+1]} === model[a + i], $sformatf("readback word %h", a + i));
    end
    // run
    chk(!owner_infer, "UART side owns memory when idle");
    put(8'h47);
    chk(owner_infer && mode == 2'd3, "run hands memory to datapath");
    repeat (50) @(negedge clk);
    put(8'h4C);                                   // ignored while running
    chk(owner_infer && n_start == 1, "still running, one start");
    @(negedge clk); seq_done = 1;
    @(negedge clk); seq_done = 0;
    @(negedge clk);
    chk(!owner_infer && mode == 2'd0, "idle after seq_done");
    // automatic trigger: ignored in the middle of a load packet
    put(8'h4C); put(8'h00);
    @(negedge clk) auto_go = 1;
    @(negedge clk) auto_go = 0;
    chk(mode == 2'd1 && !owner_infer && n_start == 1, "trigger ignored while loading");
    put(8'h10); put(8'h00); put(8'h01); put(8'hAB); put(8'hCD);
    repeat (3) @(negedge clk);
    chk(u_mem.u_lower.mem[16'h0010] === 16'hABCD && mode == 2'd0, "load after ignored trigger");
    // automatic trigger from idle
    @(negedge clk) auto_go = 1;
    @(negedge clk) auto_go = 0;
    chk(owner_infer && mode == 2'd3, "trigger hands memory to datapath");
    repeat (5) @(negedge clk);
    chk(n_start == 2, "trigger pulses seq_start once");
    @(negedge clk); seq_done = 1;
    @(negedge clk); seq_done = 0;
    @(negedge clk);
    chk(!owner_infer && mode == 2'd0, "idle after triggered run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
