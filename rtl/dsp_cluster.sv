// dsp_cluster: one-dimensional systolic array of NUM_LANES (six) MAC lanes.
//
// The input feature stream enters register X[0] and moves one register down
// the chain X[0] -> X[1] -> ... -> X[5] on every cycle with shift=1, so lane i
// always sees the sample that lane 0 saw i cycles earlier. The weight w and
// the bias are broadcast to all lanes. Lane i multiplies its own X[i] with the
// broadcast weight, so with weights w[0..K-1] presented on consecutive cycles
// lane i accumulates sum_k w[k]*x[t0+k-i]: six neighbouring outputs of a
// stride-one convolution at once, Y[i] belonging to position n-i.
//
// Interface: shift/x_in feed the chain; clear loads every accumulator with
// bias; mac adds X[i]*w in every lane using the chain contents of that cycle
// (the chain may shift in the same cycle). y[i] is lane i's accumulator.
// The structure follows the paper's DSP cluster; operand widths (bytes
// extended to 16 bits) are this design's choice.
module dsp_cluster
  import cnn_pkg::*;
#(
  parameter int unsigned LANES = NUM_LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               shift,
  input  logic signed [15:0] x_in,
  input  logic               clear,
  input  logic               mac,
  input  logic signed [15:0] w,
  input  logic signed [31:0] bias,
  output logic signed [31:0] y [LANES]
);
  logic signed [15:0] xr [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) xr[i] <= '0;
    end else if (shift) begin
      xr[0] <= x_in;
      for (int i = 1; i < LANES; i++) xr[i] <= xr[i-1];
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    mac16 u_mac (.clk, .clear, .en(mac), .x(xr[i]), .w, .bias, .acc(y[i]));
  end
endmodule
