// tb_input_buffer: writes different windows into the two banks, then reads
// every byte of both banks through the byte read mux in random order and
// checks data, bank selection and the one-cycle latency.
`timescale 1ns/1ps
module tb_input_buffer;
  logic clk = 0, wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [7:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic [8:0] rd_addr = '0;
  logic [7:0] rd_byte;
  byte unsigned img [2][512];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  input_buffer dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (img[b, i]) img[b][i] = 8'($urandom);
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 256; i++) begin
        @(negedge clk); wr_en = 1; wr_bank = b[0]; wr_addr = 8'(i);
        wr_data = {img[b][2*i+1], img[b][2*i]};
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 1024; n++) begin
      int b, i;
      b = $urandom_range(0, 1); i = $urandom_range(0, 511);
      @(negedge clk); rd_en = 1; rd_bank = b[0]; rd_addr = 9'(i);
      @(negedge clk); rd_en = 0; rd_bank = ~rd_bank; rd_addr = ~rd_addr;
      checks++;
      if (rd_byte !== img[b][i]) begin
        failures++;
        if (failures < 5) $display("FAIL bank %0d byte %0d got %h exp %h", b, i, rd_byte, img[b][i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
