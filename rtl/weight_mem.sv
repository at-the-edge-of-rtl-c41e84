// weight_mem: INT8 weight store, 32K x 16-bit built from two cascaded
// 16K x 16-bit SPRAM banks.
//
// The 15-bit word address is decoded on its MSB: 0x0000-0x3FFF selects the
// lower bank, 0x4000-0x7FFF the upper bank. Each 16-bit word packs two INT8
// weights (the lower byte is the weight with the even byte address). Reads
// have one cycle of latency; the bank select is registered so the output mux
// follows the bank that was read. The two-bank organisation and the MSB decode
// follow the paper; the byte order within a word is this design's choice.
module weight_mem #(
  parameter int unsigned BANK_DEPTH = 16384
) (
  input  logic                          clk,
  input  logic                          en,
  input  logic                          we,
  input  logic [$clog2(BANK_DEPTH):0]   addr,   // MSB = bank select
  input  logic [15:0]                   wdata,
  output logic [15:0]                   rdata
);
  localparam int unsigned AW = $clog2(BANK_DEPTH);

  logic        bank_sel, bank_q;
  logic [15:0] rd_lo, rd_hi;

  assign bank_sel = addr[AW];

  spram_16kx16 #(.DEPTH(BANK_DEPTH)) u_lower (
    .clk, .en(en && !bank_sel), .we, .addr(addr[AW-1:0]), .wdata, .rdata(rd_lo));
  spram_16kx16 #(.DEPTH(BANK_DEPTH)) u_upper (
    .clk, .en(en && bank_sel), .we, .addr(addr[AW-1:0]), .wdata, .rdata(rd_hi));

  always_ff @(posedge clk) if (en && !we) bank_q <= bank_sel;

  assign rdata = bank_q ? rd_hi : rd_lo;
endmodule
