// tb_result_packer: sends random bytes with random gaps and checks that every
// pair becomes one word {second, first} at consecutive addresses, that a
// flush writes a held odd byte with a zero upper half, and that clear
// restarts at address 0.
`timescale 1ns/1ps
module tb_result_packer;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, flush = 0;
  logic [7:0] in_byte = '0;
  logic mem_we;
  logic [13:0] mem_addr;
  logic [15:0] mem_wdata;
  int checks = 0, failures = 0;
  byte unsigned sent [$];
  logic [15:0] mem [int];
  always #5 clk = ~clk;
  result_packer dut (.*);

  always @(posedge clk) if (rst_n && mem_we) mem[mem_addr] = mem_wdata;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      sent.delete(); mem.delete();
      n = $urandom_range(1, 600);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1; in_byte = 8'($urandom); sent.push_back(in_byte);
        @(negedge clk); in_valid = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      @(negedge clk); flush = 1;
      @(negedge clk); flush = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (mem.num() != (n + 1) / 2) begin failures++; $display("FAIL words %0d for %0d bytes", mem.num(), n); end
      for (int w = 0; w < (n + 1) / 2; w++) begin
        logic [15:0] e;
        e = {(2*w+1 < n) ? sent[2*w+1] : 8'h00, sent[2*w]};
        checks++;
        if (!mem.exists(w) || mem[w] !== e) begin
          failures++;
          $display("FAIL round %0d word %0d", round, w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
