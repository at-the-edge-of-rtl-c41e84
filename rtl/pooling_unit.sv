// pooling_unit: reduces the six lane results of one spatial batch.
//
// The six results y[0..5] of a batch belong to positions base+5 .. base
// (y[i] is position base+5-i, base = 6*batch). On a `pool` strobe, the mode
// of the layer decides what is produced, registered, with o_valid one cycle
// later:
//   POOL_MAX    2x1 max pooling of neighbours: o[m] = max(y[5-2m], y[4-2m]),
//               m = 0..2, pooled position base/2+m. All three are sent on
//               (n_out=3); o_keep[m] marks those inside the output width.
//   POOL_GAP    each lane result inside the input width is shifted right
//               arithmetically by GAP_SHIFT (width 64 -> divide by 64) and
//               added to a persistent 32-bit accumulator. On the last batch of
//               a channel the sum is flushed as o[0] (n_out=1) and cleared;
//               other batches produce nothing (n_out=0).
//   POOL_BYPASS the raw accumulator of position 0 (lane 5) passes unchanged
//               (n_out=1), for the fully connected layer.
// The three modes and the shift-then-accumulate GAP follow the paper; the
// keep mask for the ragged last batch is this design's choice.
module pooling_unit
  import cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pool,
  input  pool_mode_e         mode,
  input  logic [9:0]         base,      // first position of the batch (6*b)
  input  logic [9:0]         w_in,      // positions per channel at the input
  input  logic [9:0]         w_out,     // positions per channel after pooling
  input  logic               last_batch,
  input  logic signed [31:0] y [NUM_LANES],
  output logic               o_valid,
  output logic [1:0]         n_out,
  output logic signed [31:0] o [3],
  output logic [2:0]         o_keep
);
  logic signed [31:0] gap_acc, gap_sum;
  logic [9:0]         pbase;

  assign pbase = base >> 1;

  always_comb begin
    gap_sum = gap_acc;
    for (int i = 0; i < NUM_LANES; i++)
      if (11'(base) + 11'(NUM_LANES - 1 - i) < 11'(w_in))
        gap_sum = gap_sum + (y[i] >>> GAP_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      n_out   <= '0;
      o_keep  <= '0;
      gap_acc <= '0;
      for (int m = 0; m < 3; m++) o[m] <= '0;
    end else begin
      o_valid <= pool;
      if (pool) begin
        unique case (mode)
          POOL_MAX: begin
            for (int m = 0; m < 3; m++) begin
              o[m]      <= (y[5-2*m] > y[4-2*m]) ? y[5-2*m] : y[4-2*m];
              o_keep[m] <= (11'(pbase) + 11'(m)) < 11'(w_out);
            end
            n_out <= 2'd3;
          end
          POOL_GAP: begin
            if (last_batch) begin
              o[0]    <= gap_sum;
              o_keep  <= 3'b001;
              n_out   <= 2'd1;
              gap_acc <= '0;
            end else begin
              gap_acc <= gap_sum;
              o_keep  <= 3'b000;
              n_out   <= 2'd0;
            end
          end
          default: begin
            o[0]   <= y[NUM_LANES-1];
            o_keep <= 3'b001;
            n_out  <= 2'd1;
          end
        endcase
      end
    end
  end
endmodule
