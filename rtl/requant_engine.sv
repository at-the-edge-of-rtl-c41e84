// requant_engine: requantisation and activation of one 32-bit result.
//
// An accepted value v (in_valid && in_ready) is multiplied by the layer's
// 32-bit multiplier M in mul64signed, giving a 64-bit product. The product is
// rounded and reduced: r = (v*M + 2^(REQ_SHIFT-1)) >>> REQ_SHIFT, then the
// zero point ZERO_POINT is added. With relu=1 (convolution layers) r is
// saturated to [0,255] and given as an unsigned byte: ReLU and 8-bit
// requantisation in one step. With relu=0 (fully connected layer) r is given
// as a signed 32-bit logit. out_valid pulses for one cycle with the result;
// out_keep repeats the tag that came with the input.
// Timing: accept in cycle t, result in cycle t+6, next accept in t+6, so one
// value per six cycles. The multiply, zero point and saturation follow the
// paper; the rounding constant and the shift of 32 are this design's choice.
// Since |v*M| <= 2^62, the reduced value always fits in 32 bits: bits 63:32
// of `rounded` are only sign copies and are not used. The multiplier's busy
// output is left unused as well, because the engine keeps its own busy flag.
// An assertion checks the rate: after a result, the next one is at least six
// cycles away. It samples rst_n (disable iff), so lint sees the asynchronous
// reset used synchronously as well; that is expected.
module requant_engine
  import cnn_pkg::*;
#(
  parameter int ZERO_POINT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] in_data,
  input  logic               in_keep,
  input  logic signed [31:0] scale,
  input  logic               relu,
  output logic               out_valid,
  output logic [7:0]         out_byte,
  output logic signed [31:0] out_word,
  output logic               out_keep
);
  logic               busy, mul_busy, mul_done, keep_q;
  logic signed [63:0] prod, rounded;
  logic signed [31:0] r;

  assign in_ready = !busy;

  mul64signed u_mul (
    .clk, .rst_n, .start(in_valid && !busy), .a(in_data), .b(scale),
    .busy(mul_busy), .done(mul_done), .p(prod));

  always_comb begin
    rounded = (prod + (64'sd1 <<< (REQ_SHIFT - 1))) >>> REQ_SHIFT;
    r       = 32'(rounded) + 32'(ZERO_POINT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      keep_q    <= 1'b0;
      out_valid <= 1'b0;
      out_byte  <= '0;
      out_word  <= '0;
      out_keep  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        busy   <= 1'b1;
        keep_q <= in_keep;
      end
      if (mul_done) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        out_keep  <= keep_q;
        out_word  <= r;
        if (!relu || r < 0) out_byte <= 8'd0;
        else if (r > 255)   out_byte <= 8'd255;
        else                out_byte <= r[7:0];
      end
    end
  end

  a_rate: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid |=> !out_valid [*5]);
endmodule
