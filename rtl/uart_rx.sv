// uart_rx: 8N1 UART receiver.
//
// The line idles high. A falling edge (high to low, so a line held low after
// a broken frame starts nothing) starts a frame; the start bit is
// checked at its middle, then eight data bits (LSB first) are sampled every
// CLKS_PER_BIT cycles at their middle and the stop bit is awaited. valid
// pulses for one cycle with the byte when the stop bit has been sampled high;
// a frame with a low stop bit is dropped. The input is synchronised by two
// flip-flops. The paper names the UART link only; frame format and the
// default rate (24 MHz / 115200 baud) are this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 208
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       valid,
  output logic [7:0] data
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;
  state_e state;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] tick;
  logic [2:0] bitn;
  logic       rx_m, rx_s, rx_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_m <= 1'b1;
      rx_s <= 1'b1;
      rx_p <= 1'b1;
    end else begin
      rx_m <= rx;
      rx_s <= rx_m;
      rx_p <= rx_s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      tick  <= '0;
      bitn  <= '0;
      valid <= 1'b0;
      data  <= '0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: if (rx_p && !rx_s) begin
          tick  <= '0;
          state <= S_START;
        end
        S_START: begin
          if (tick == ($bits(tick))'(CLKS_PER_BIT / 2 - 1)) begin
            tick  <= '0;
            bitn  <= '0;
            state <= rx_s ? S_IDLE : S_DATA;
          end else tick <= tick + 1'b1;
        end
        S_DATA: begin
          if (tick == ($bits(tick))'(CLKS_PER_BIT - 1)) begin
            tick <= '0;
            data <= {rx_s, data[7:1]};
            bitn <= bitn + 3'd1;
            if (bitn == 3'd7) state <= S_STOP;
          end else tick <= tick + 1'b1;
        end
        S_STOP: begin
          if (tick == ($bits(tick))'(CLKS_PER_BIT - 1)) begin
            tick  <= '0;
            valid <= rx_s;
            state <= S_IDLE;
          end else tick <= tick + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
