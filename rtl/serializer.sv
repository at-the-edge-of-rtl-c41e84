// serializer: turns the up to three pooled outputs of a batch into a stream.
//
// On load it captures o[0..n-1] with their keep flags, then offers them one at
// a time on a valid/ready handshake (item 0 first), in the order of their
// output positions. `done` pulses in the cycle the last item is accepted, or
// right after load when n=0. The paper shows this block only by name between
// the pooling unit and the requantiser; the handshake is this design's choice.
// Assertions state the handshake rules: an offered item stays unchanged until
// it is taken, and a new load only comes when the previous batch is drained.
// They sample rst_n (disable iff), so lint sees the asynchronous reset used
// synchronously as well; that is expected.
module serializer (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [1:0]         n,
  input  logic signed [31:0] d [3],
  input  logic [2:0]         keep,
  output logic               valid,
  input  logic               ready,
  output logic signed [31:0] q,
  output logic               q_keep,
  output logic               done
);
  logic signed [31:0] buf_q [3];
  logic [2:0]         keep_q;
  logic [1:0]         idx, cnt;
  logic               active, empty_done;

  assign valid  = active;
  assign q      = buf_q[idx];
  assign q_keep = keep_q[idx];
  assign done   = (active && ready && (idx == cnt - 2'd1)) || empty_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      idx        <= '0;
      cnt        <= '0;
      keep_q     <= '0;
      empty_done <= 1'b0;
      for (int i = 0; i < 3; i++) buf_q[i] <= '0;
    end else begin
      empty_done <= 1'b0;
      if (load) begin
        for (int i = 0; i < 3; i++) buf_q[i] <= d[i];
        keep_q     <= keep;
        cnt        <= n;
        idx        <= '0;
        active     <= (n != 2'd0);
        empty_done <= (n == 2'd0);
      end else if (active && ready) begin
        if (idx == cnt - 2'd1) active <= 1'b0;
        idx <= idx + 2'd1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           valid && !ready |=> valid && $stable(q) && $stable(q_keep));
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                load |-> !active);
endmodule
