// pingpong_buffer: two 16K x 16-bit SPRAMs used as inter-layer scratchpads.
//
// A layer reads its input feature map from one buffer and writes its output
// into the other. The global toggle `sel` picks the roles: sel=0 writes Ping
// and reads Pong, sel=1 writes Pong and reads Ping. The layer sequencer flips
// sel when a layer completes, so the next layer reads what the last one wrote
// and no data is copied. Reads are byte addressed (word = addr[15:1], byte =
// addr[0], one cycle latency); writes are whole 16-bit words from the result
// packer. The double-buffer scheme and toggle follow the paper; the byte
// addressing of reads is this design's choice.
module pingpong_buffer #(
  parameter int unsigned DEPTH = 16384
) (
  input  logic                       clk,
  input  logic                       sel,
  // write side
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  logic [15:0]                wr_data,
  // read side, byte addressed
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH):0]     rd_addr,
  output logic [7:0]                 rd_byte
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic          ping_en, pong_en, ping_we, pong_we;
  logic [AW-1:0] ping_addr, pong_addr;
  logic [15:0]   ping_q, pong_q;
  logic          sel_q, byte_q;

  always_comb begin
    ping_we   = wr_en && !sel;
    pong_we   = wr_en &&  sel;
    ping_en   = sel ? rd_en : wr_en;
    pong_en   = sel ? wr_en : rd_en;
    ping_addr = sel ? rd_addr[AW:1] : wr_addr;
    pong_addr = sel ? wr_addr : rd_addr[AW:1];
  end

  spram_16kx16 #(.DEPTH(DEPTH)) u_ping (
    .clk, .en(ping_en), .we(ping_we), .addr(ping_addr), .wdata(wr_data), .rdata(ping_q));
  spram_16kx16 #(.DEPTH(DEPTH)) u_pong (
    .clk, .en(pong_en), .we(pong_we), .addr(pong_addr), .wdata(wr_data), .rdata(pong_q));

  always_ff @(posedge clk) begin
    if (rd_en) begin
      sel_q  <= sel;
      byte_q <= rd_addr[0];
    end
  end

  logic [15:0] word_q;
  assign word_q  = sel_q ? ping_q : pong_q;
  assign rd_byte = byte_q ? word_q[15:8] : word_q[7:0];
endmodule
