// tb_weight_mem: fills all 32K words of the two-bank weight memory, checks
// every word reads back with one cycle of latency, and checks directly that
// words below 0x4000 land in the lower SPRAM and the rest in the upper one.
`timescale 1ns/1ps
module tb_weight_mem;
  logic clk = 0, en = 0, we = 0;
  logic [14:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_mem dut (.*);

  function automatic logic [15:0] pat(int i);
    return 16'(i * 2654435761 >> 7);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32768; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 15'(i); wdata = pat(i);
    end
    @(negedge clk); en = 0; we = 0;
    // bank decode by the address MSB
    checks += 4;
    if (dut.u_lower.mem[0]     !== pat(0))     failures++;
    if (dut.u_lower.mem[16383] !== pat(16383)) failures++;
    if (dut.u_upper.mem[0]     !== pat(16384)) failures++;
    if (dut.u_upper.mem[16383] !== pat(32767)) failures++;
    // read back in an order that alternates banks
    for (int j = 0; j < 32768; j++) begin
      int i;
      i = (j % 2 == 0) ? j / 2 : 16384 + j / 2;
      @(negedge clk); en = 1; addr = 15'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== pat(i)) begin
        failures++;
        if (failures < 5) $display("FAIL addr %h got %h exp %h", i, rdata, pat(i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
