// tb_serializer: loads groups of 0..3 values and drains them through a
// consumer that is ready only on random cycles. Checks order, keep flags,
// that nothing is lost or repeated, and that done pulses exactly once per
// group (also for an empty group).
`timescale 1ns/1ps
module tb_serializer;
  logic clk = 0, rst_n = 0, load = 0, ready = 0;
  logic [1:0] n = '0;
  logic signed [31:0] d [3];
  logic [2:0] keep = '0;
  logic valid, q_keep, done;
  logic signed [31:0] q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  serializer dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got, dones;
    foreach (d[i]) d[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      load = 1; n = 2'($urandom_range(0, 3)); keep = 3'($urandom);
      foreach (d[i]) d[i] = int'($urandom);
      @(negedge clk); load = 0;
      got = 0; dones = 0;
      for (int c = 0; c < 40; c++) begin
        ready = ($urandom_range(0, 2) == 0);
        #1;
        if (done) dones++;
        if (valid && ready) begin
          checks++;
          if (got >= n || q !== d[got] || q_keep !== keep[got]) begin
            failures++;
            $display("FAIL group %0d item %0d", t, got);
          end
          got++;
        end
        @(negedge clk);
      end
      ready = 0;
      checks += 2;
      if (got != n)   begin failures++; $display("FAIL group %0d count %0d of %0d", t, got, n); end
      if (dones != 1) begin failures++; $display("FAIL group %0d done x%0d", t, dones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
