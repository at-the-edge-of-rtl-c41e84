// mul64signed: 32 x 32 signed multiplier built from one 16 x 16 multiplier.
//
// Each operand is split into a signed upper half H and an unsigned lower half
// L, so a*b = aH*bH*2^32 + (aH*bL + aL*bH)*2^16 + aL*bL. The four partial
// products are formed one per cycle on a single (17 x 17 signed) multiplier
// and added into a 64-bit accumulator. Timing: `start` in cycle t latches a
// and b; cycles t+1..t+4 accumulate; `done` is high in cycle t+5 with the
// product p. A new start is accepted in the cycle done is high or later.
// The decomposition and the four-cycle accumulation follow the paper.
module mul64signed (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [31:0] a,
  input  logic signed [31:0] b,
  output logic               busy,
  output logic               done,
  output logic signed [63:0] p
);
  logic signed [31:0] a_q, b_q;
  logic [1:0]         step;
  logic signed [16:0] op_a, op_b;
  logic signed [33:0] pp;
  logic signed [63:0] pp_sh;

  always_comb begin
    op_a  = step[0] ? {a_q[31], a_q[31:16]} : {1'b0, a_q[15:0]};
    op_b  = step[1] ? {b_q[31], b_q[31:16]} : {1'b0, b_q[15:0]};
    pp    = op_a * op_b;
    pp_sh = 64'(pp) <<< (16 * (int'(step[0]) + int'(step[1])));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      step <= '0;
      p    <= '0;
      a_q  <= '0;
      b_q  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_q  <= a;
        b_q  <= b;
        p    <= '0;
        step <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        p    <= p + pp_sh;
        step <= step + 2'd1;
        if (step == 2'd3) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
