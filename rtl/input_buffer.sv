// input_buffer: dual-bank buffer for the INT8 input window.
//
// Two 256 x 16-bit block RAMs (x16 mode), 1 KB together, each able to hold a
// 512-sample window packed two samples per word (even sample in the low
// byte). The write side takes whole words from the acquisition path into
// either bank; the read side addresses bytes: a byte address selects word
// addr[8:1] of bank rd_bank, and a read mux returns byte addr[0] one cycle
// later. With two banks the next window can be written while the current one
// is processed. Bank count, sizes and the byte read mux follow the paper; the
// use of the second bank for the next window is this design's choice.
module input_buffer #(
  parameter int unsigned WORDS = 256
) (
  input  logic                        clk,
  // write port (acquisition side)
  input  logic                        wr_en,
  input  logic                        wr_bank,
  input  logic [$clog2(WORDS)-1:0]    wr_addr,
  input  logic [15:0]                 wr_data,
  // read port (compute side), byte addressed
  input  logic                        rd_en,
  input  logic                        rd_bank,
  input  logic [$clog2(WORDS):0]      rd_addr,
  output logic [7:0]                  rd_byte
);
  logic [15:0] bank0 [WORDS];
  logic [15:0] bank1 [WORDS];
  logic [15:0] q0, q1;
  logic        bank_q, byte_q;

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) bank0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) bank1[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      q0     <= bank0[rd_addr[$clog2(WORDS):1]];
      q1     <= bank1[rd_addr[$clog2(WORDS):1]];
      bank_q <= rd_bank;
      byte_q <= rd_addr[0];
    end
  end

  logic [15:0] word_q;
  assign word_q  = bank_q ? q1 : q0;
  assign rd_byte = byte_q ? word_q[15:8] : word_q[7:0];
endmodule
