// result_packer: packs the 8-bit result stream into 16-bit memory words.
//
// The first byte of a pair is held in a register; when the second arrives the
// pair is written as one word {second, first} (first byte in bits 7:0) at the
// next word address, so the single-port buffer sees half as many writes.
// `flush` writes a held odd byte with a zero upper half. `clear` resets the
// word address to zero and drops any held byte (start of a layer).
// Outputs: mem_we/mem_addr/mem_wdata, valid in the cycle after the byte that
// completes a word. Pairing follows the paper; byte order is this design's.
module result_packer #(
  parameter int unsigned AW = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [7:0]    in_byte,
  input  logic          flush,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [15:0]   mem_wdata
);
  logic          have_low;
  logic [7:0]    low_q;
  logic [AW-1:0] waddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_low  <= 1'b0;
      low_q     <= '0;
      waddr     <= '0;
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
    end else begin
      mem_we <= 1'b0;
      if (clear) begin
        have_low <= 1'b0;
        waddr    <= '0;
      end else if (in_valid) begin
        if (have_low) begin
          mem_we    <= 1'b1;
          mem_addr  <= waddr;
          mem_wdata <= {in_byte, low_q};
          waddr     <= waddr + 1'b1;
          have_low  <= 1'b0;
        end else begin
          low_q    <= in_byte;
          have_low <= 1'b1;
        end
      end else if (flush && have_low) begin
        mem_we    <= 1'b1;
        mem_addr  <= waddr;
        mem_wdata <= {8'h00, low_q};
        waddr     <= waddr + 1'b1;
        have_low  <= 1'b0;
      end
    end
  end
endmodule
