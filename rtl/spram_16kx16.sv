// spram_16kx16: 16K x 16-bit single-port RAM, the size and behaviour of one
// iCE40UP5K SPRAM block (256 kbit).
//
// One port: on a clock edge with en=1 and we=1 the word is written; with en=1
// and we=0 the word at addr appears on rdata after the edge (one-cycle read
// latency). rdata holds its value when en=0. Written as an array so that a
// synthesis tool infers the SPRAM; content after power-up is undefined, as in
// the real block. Byte masks of the vendor primitive are not used here.
module spram_16kx16 #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic [15:0]   rdata
);
  logic [15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
