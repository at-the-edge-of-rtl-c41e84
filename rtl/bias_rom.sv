// bias_rom: 512 x 32-bit bias ROM (four 4-kbit block RAMs in the paper's
// implementation), filled at synthesis time from a hex file.
//
// One read port with one cycle of latency: rdata shows mem[addr] after the
// clock edge on which en=1. Entries are ordered layer by layer (L0 biases
// first), at the base index each layer's record in cnn_pkg gives. The trained
// biases are not published; the default file holds a test pattern,
// bias[i] = ((i * 37) mod 201) - 100, i = 0..511, to be replaced by the
// folded batch-norm biases of a trained model.
module bias_rom #(
  parameter int unsigned DEPTH     = 512,
  parameter string       INIT_FILE = "rtl/bias_rom.hex"
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic [$clog2(DEPTH)-1:0]  addr,
  output logic signed [31:0]        rdata
);
  logic [31:0] mem [DEPTH];

  initial $readmemh(INIT_FILE, mem);

  always_ff @(posedge clk) if (en) rdata <= mem[addr];
endmodule
