// tb_requant_engine: streams random accumulator values and multipliers
// through the requantiser with in_valid held high, so a value is taken as
// soon as the engine is ready. Checks each result against
// r = (v*M + 2^31) >>> 32 (clamped to [0,255] with relu=1, 32-bit with
// relu=0), the keep tag, and the rate: one result every six cycles, the
// first six cycles after the first accept.
`timescale 1ns/1ps
module tb_requant_engine;
  logic clk = 0, rst_n = 0, in_valid = 0, in_keep = 0, relu = 1;
  logic signed [31:0] in_data = '0, scale = '0;
  logic in_ready, out_valid, out_keep;
  logic [7:0] out_byte;
  logic signed [31:0] out_word;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  requant_engine dut (.*);

  function automatic longint rq(int v, int m);
    longint p;
    p = longint'(v) * longint'(m);
    return (p + (64'sd1 <<< 31)) >>> 32;
  endfunction

  int qv [$], qm [$], qr [$], qk [$], qt [$];
  int n_hi = 0, n_lo = 0, n_mid = 0;
  function automatic int cyc();
    return int'($time / 10);
  endfunction

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      qv.push_back(in_data); qm.push_back(scale); qr.push_back(relu);
      qk.push_back(in_keep); qt.push_back(cyc());
    end
    if (out_valid) begin
      int v, m, r, k, t0;
      longint e;
      v = qv.pop_front(); m = qm.pop_front(); r = qr.pop_front();
      k = qk.pop_front(); t0 = qt.pop_front();
      e = rq(v, m);
      checks += 3;
      if (r) begin
        int eb;
        eb = (e < 0) ? 0 : (e > 255) ? 255 : int'(e);
        if (e < 0) n_lo++; else if (e > 255) n_hi++; else n_mid++;
        if (out_byte != 8'(eb)) begin failures++; $display("FAIL relu v=%0d m=%0d got %0d exp %0d", v, m, out_byte, eb); end
      end else if (out_word != int'(e)) begin
        failures++; $display("FAIL logit v=%0d m=%0d got %0d exp %0d", v, m, out_word, e);
      end
      if (out_keep != k[0]) failures++;
      if (cyc() - t0 != 6) begin failures++; $display("FAIL latency %0d", cyc() - t0); end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_acc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    n_acc = 0;
    while (n_acc < 3000) begin
      if (in_ready) begin   // taken at the next rising edge
        in_data = int'($urandom) >>> $urandom_range(4, 31);
        scale   = int'($urandom_range(0, 32'h7FFFFFFF)) >>> $urandom_range(0, 12);
        relu    = (n_acc % 4 != 3);
        in_keep = $urandom;
        n_acc++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks += 2;
    if (qv.size() != 0) failures++;
    if (n_hi == 0 || n_lo == 0 || n_mid == 0) begin failures++; $display("FAIL coverage %0d %0d %0d", n_hi, n_lo, n_mid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate: with in_valid always high, accepts are exactly 6 cycles apart
  int last_acc = -1;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    if (last_acc >= 0) begin
      checks++;
      if (cyc() - last_acc != 6) begin failures++; $display("FAIL accept spacing %0d", cyc() - last_acc); end
    end
    last_acc = cyc();
  end
endmodule
