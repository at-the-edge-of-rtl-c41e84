// tb_mul64signed: random and corner-case 32 x 32 signed products against
// the 64-bit product, with the latency checked: done exactly five cycles
// after start (four accumulation cycles).
`timescale 1ns/1ps
module tb_mul64signed;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [31:0] a = '0, b = '0;
  logic busy, done;
  logic signed [63:0] p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mul64signed dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner [8] = '{32'sh80000000, 32'sh7FFFFFFF, -1, 0, 1, 32'sh0000FFFF, 32'shFFFF0000, 32'sh00010000};
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2064; t++) begin
      @(negedge clk);
      if (t < 64) begin a = corner[t % 8]; b = corner[t / 8]; end
      else begin a = int'($urandom); b = int'($urandom); end
      start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks += 2;
      if (p !== longint'(a) * longint'(b)) begin
        failures++;
        $display("FAIL %0d * %0d = %0d got %0d", a, b, longint'(a) * longint'(b), p);
      end
      if (lat != 5) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
