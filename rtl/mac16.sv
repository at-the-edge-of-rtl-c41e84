// mac16: one multiply-accumulate lane, the job of one iCE40 SB_MAC16 DSP.
//
// A signed 16x16 multiply feeds a 32-bit accumulator register. On clear the
// accumulator is loaded with the bias (so a new output starts from its bias);
// on en it adds x*w; otherwise it holds. Result `acc` is the register, valid
// the cycle after the last en. Operands are sign-extended bytes in this design.
module mac16 (
  input  logic               clk,
  input  logic               clear,
  input  logic               en,
  input  logic signed [15:0] x,
  input  logic signed [15:0] w,
  input  logic signed [31:0] bias,
  output logic signed [31:0] acc
);
  always_ff @(posedge clk) begin
    if (clear)   acc <= bias;
    else if (en) acc <= acc + 32'(x * w);
  end
endmodule
