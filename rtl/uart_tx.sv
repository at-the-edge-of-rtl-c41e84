// uart_tx: 8N1 UART transmitter.
//
// When idle (ready=1) a `send` pulse loads `data`; the line then carries a
// low start bit, eight data bits LSB first and a high stop bit, each
// CLKS_PER_BIT cycles long, after which ready returns. The paper names the
// UART link only; frame format and default rate are this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 208
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       send,
  input  logic [7:0] data,
  output logic       ready,
  output logic       tx
);
  logic [9:0] shreg;
  logic [3:0] nbits;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] tick;

  assign ready = (nbits == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= '0;
      tick  <= '0;
      tx    <= 1'b1;
    end else if (nbits == 4'd0) begin
      tx <= 1'b1;
      if (send) begin
        shreg <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        tick  <= '0;
      end
    end else begin
      tx <= shreg[0];
      if (tick == ($bits(tick))'(CLKS_PER_BIT - 1)) begin
        tick  <= '0;
        shreg <= {1'b1, shreg[9:1]};
        nbits <= nbits - 4'd1;
      end else tick <= tick + 1'b1;
    end
  end
endmodule
