// tb_pingpong_buffer: with sel=0 writes a pattern (into Ping), flips sel and
// reads it back byte by byte while writing a second pattern (into Pong) in
// the same cycles, then flips again and reads the second pattern. This is
// the layer-to-layer hand-over of the double-buffer scheme.
`timescale 1ns/1ps
module tb_pingpong_buffer;
  logic clk = 0, sel = 0, wr_en = 0, rd_en = 0;
  logic [13:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic [14:0] rd_addr = '0;
  logic [7:0] rd_byte;
  int checks = 0, failures = 0;
  localparam int N = 2048;
  always #5 clk = ~clk;
  pingpong_buffer dut (.*);

  function automatic logic [15:0] pat(int i, int s);
    return 16'((i * 31 + s * 7919) ^ (s ? 16'hA5C3 : 16'h0F1E));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 14'(i); wr_data = pat(i, 0);
    end
    @(negedge clk); wr_en = 0; sel = 1;
    for (int j = 0; j < 2 * N; j++) begin
      logic [15:0] w;
      @(negedge clk);
      rd_en = 1; rd_addr = 15'(j);
      wr_en = (j < N); wr_addr = 14'(j); wr_data = pat(j, 1);
      @(negedge clk); rd_en = 0; wr_en = 0;
      w = pat(j / 2, 0);
      checks++;
      if (rd_byte !== (j[0] ? w[15:8] : w[7:0])) begin
        failures++;
        if (failures < 5) $display("FAIL ping byte %0d", j);
      end
    end
    @(negedge clk); sel = 0;
    for (int j = 0; j < 2 * N; j++) begin
      logic [15:0] w;
      @(negedge clk); rd_en = 1; rd_addr = 15'(j);
      @(negedge clk); rd_en = 0;
      w = pat(j / 2, 1);
      checks++;
      if (rd_byte !== (j[0] ? w[15:8] : w[7:0])) begin
        failures++;
        if (failures < 5) $display("FAIL pong byte %0d", j);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
