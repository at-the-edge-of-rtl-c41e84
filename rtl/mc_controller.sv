// mc_controller: memory and compute controller for one layer, with the
// compute datapath it drives (DSP cluster, pooling unit, serializer,
// requantisation engine, result packer).
//
// For a layer described by `cfg` it runs four nested loops in hardware:
//   for each output channel co            (CH_START: bias fetch, pointers)
//     for each spatial batch b of six positions
//       for each input channel ci
//         PRIME   7 cycles: fetch six input samples into the X chain (the
//                 first cycle only issues a read); at ci=0 the accumulators
//                 are loaded with the bias of co
//         COMPUTE K cycles: weight k is broadcast, every lane does one MAC,
//                 the chain shifts in the next sample
//       POOL, LOAD  max pool / GAP / bypass of the six lane results
//       REQ     the serializer feeds each pooled value to the requantiser
//               (six cycles per value) and the packer writes byte pairs
//       WRITE   batch complete; go to the next batch or channel
// so a layer takes  Cout*Nb*Cin*(7+K)  +  Cout*Nb*(6*n+4)  +  Cout  +  2
// cycles from the edge that takes `start` to the edge that raises `done`,
// with Nb = ceil(Win/6) and n the values requantised per batch (3
// for max pooling; for GAP 1 on the last batch, else 0; 1 for bypass).
// The first two terms are the prime and compute terms of the paper's cycle
// model; the requant term matches its table (6 cycles per value), the small
// per-batch and per-channel overheads are this design's.
//
// Memory: input samples are read one per cycle, byte addressed
// (address = ci*Win + position, read data one cycle later); positions
// outside [0, Win) are the zero padding and are not read. Weights are stored
// for each layer as [co][ci][k] bytes from cfg.w_base, two per 16-bit word;
// a word is read only when the needed byte lies in a different word from
// the previous one, so one fetch serves two MACs. Outputs are written as
// packed words from address 0 in [co][position] order. For the fully
// connected layer (relu=0) the 32-bit results leave on logit_* instead.
// REQ ends when the requantiser has returned as many results as the pooling
// unit produced, so the serializer's own done flag is not needed here.
// Of the layer record, only the fields a layer changes are read.
// rst_n is an asynchronous reset; it is also sampled by the assertion at the
// end (disable iff), which is why lint reports it as used both ways.
module mc_controller
  import cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  input  logic signed [31:0] scale,
  output logic               busy,
  output logic               done,
  // input feature reads (input buffer or ping-pong buffer, chosen outside)
  output logic               src_rd_en,
  output logic [15:0]        src_rd_addr,
  input  logic [7:0]         src_rd_byte,
  // weight memory reads
  output logic               w_rd_en,
  output logic [14:0]        w_rd_addr,
  input  logic [15:0]        w_rd_data,
  // bias ROM reads
  output logic               b_rd_en,
  output logic [8:0]         b_rd_addr,
  input  logic signed [31:0] b_rd_data,
  // packed output writes
  output logic               out_we,
  output logic [13:0]        out_addr,
  output logic [15:0]        out_wdata,
  // logits of the fully connected layer
  output logic               logit_valid,
  output logic [1:0]         logit_idx,
  output logic signed [31:0] logit_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_CH_START, S_PRIME, S_COMPUTE, S_POOL, S_LOAD, S_REQ, S_WRITE,
    S_FLUSH, S_DONE
  } state_e;

  state_e      state;
  layer_cfg_t  c;
  logic [9:0]  co, ci;
  logic [7:0]  b, nb;
  logic [3:0]  cnt;         // prime cycle / kernel tap
  logic [4:0]  ft;          // sample fetch index within a batch
  logic signed [11:0] batch_pos;  // 6*b - pad
  logic [15:0] ch_base;     // ci * w_in
  logic [15:0] kern_base;   // weight byte address of (co, ci, 0)
  logic [15:0] co_wbase;    // weight byte address of (co, 0, 0)
  logic [15:0] cin_k;       // cin * k
  logic [1:0]  req_n, req_got;

  // ---------------- sample fetch -----------------------------------------
  logic signed [12:0] fpos;
  logic               fetch, fetch_pad, pad_q;
  assign fpos  = 13'(batch_pos) + 13'(ft);
  assign fetch = (state == S_PRIME) || (state == S_COMPUTE);
  assign fetch_pad = (fpos < 0) || (fpos >= 13'(c.w_in));
  assign src_rd_en   = fetch && !fetch_pad;
  assign src_rd_addr = ch_base + 16'(fpos);

  always_ff @(posedge clk) pad_q <= fetch_pad;

  logic signed [15:0] x_in;
  always_comb begin
    if (pad_q)            x_in = '0;
    else if (c.in_signed) x_in = 16'(signed'(src_rd_byte));
    else                  x_in = {8'h00, src_rd_byte};
  end

  // ---------------- weight fetch with word reuse ---------------------------
  logic        w_need;
  logic [15:0] w_byte_addr;
  logic [14:0] last_w_word;
  logic        last_w_ok, w_sel_q;
  assign w_need = ((state == S_PRIME) && (cnt == 4'(PRIME_CYC - 1))) ||
                  ((state == S_COMPUTE) && (cnt != c.k - 4'd1));
  assign w_byte_addr = kern_base + ((state == S_COMPUTE) ? 16'(cnt) + 16'd1 : 16'd0);
  assign w_rd_addr   = w_byte_addr[15:1];
  assign w_rd_en     = w_need && !(last_w_ok && (last_w_word == w_byte_addr[15:1]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_w_ok   <= 1'b0;
      last_w_word <= '0;
      w_sel_q     <= 1'b0;
    end else begin
      if (state == S_IDLE) last_w_ok <= 1'b0;
      if (w_need) w_sel_q <= w_byte_addr[0];
      if (w_rd_en) begin
        last_w_ok   <= 1'b1;
        last_w_word <= w_byte_addr[15:1];
      end
    end
  end

  logic signed [15:0] w_val;
  assign w_val = 16'(signed'(w_sel_q ? w_rd_data[15:8] : w_rd_data[7:0]));

  // ---------------- bias --------------------------------------------------
  assign b_rd_en   = (state == S_CH_START);
  assign b_rd_addr = c.b_base + 9'(co);

  // ---------------- DSP cluster ------------------------------------------
  logic               cl_shift, cl_clear, cl_mac;
  logic signed [31:0] y [NUM_LANES];
  assign cl_shift = ((state == S_PRIME) && (cnt != 4'd0)) || (state == S_COMPUTE);
  assign cl_clear = (state == S_PRIME) && (cnt == 4'd0) && (ci == '0);
  assign cl_mac   = (state == S_COMPUTE);

  dsp_cluster u_cluster (
    .clk, .rst_n, .shift(cl_shift), .x_in, .clear(cl_clear), .mac(cl_mac),
    .w(w_val), .bias(b_rd_data), .y);

  // ---------------- pooling, serializer, requant, packer -------------------
  logic               p_valid;
  logic [1:0]         p_n;
  logic signed [31:0] p_o [3];
  logic [2:0]         p_keep;

  pooling_unit u_pool (
    .clk, .rst_n, .pool(state == S_POOL), .mode(c.pool),
    .base(10'(b) * 10'd6), .w_in(c.w_in), .w_out(c.w_out),
    .last_batch(b == nb - 8'd1), .y,
    .o_valid(p_valid), .n_out(p_n), .o(p_o), .o_keep(p_keep));

  logic               s_valid, s_ready, s_keep, s_done;
  logic signed [31:0] s_q;
  serializer u_ser (
    .clk, .rst_n, .load(p_valid), .n(p_n), .d(p_o), .keep(p_keep),
    .valid(s_valid), .ready(s_ready), .q(s_q), .q_keep(s_keep), .done(s_done));

  logic               r_valid, r_keep;
  logic [7:0]         r_byte;
  logic signed [31:0] r_word;
  requant_engine u_req (
    .clk, .rst_n, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_q),
    .in_keep(s_keep), .scale, .relu(c.relu),
    .out_valid(r_valid), .out_byte(r_byte), .out_word(r_word), .out_keep(r_keep));

  result_packer #(.AW(14)) u_pack (
    .clk, .rst_n, .clear(start && state == S_IDLE),
    .in_valid(r_valid && r_keep && c.relu), .in_byte(r_byte),
    .flush(state == S_FLUSH),
    .mem_we(out_we), .mem_addr(out_addr), .mem_wdata(out_wdata));

  assign logit_valid = r_valid && r_keep && !c.relu;
  assign logit_idx   = co[1:0];
  assign logit_data  = r_word;

  // ---------------- loop FSM ------------------------------------------------
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      co        <= '0;
      ci        <= '0;
      b         <= '0;
      nb        <= '0;
      cnt       <= '0;
      ft        <= '0;
      batch_pos <= '0;
      ch_base   <= '0;
      kern_base <= '0;
      co_wbase  <= '0;
      cin_k     <= '0;
      req_n     <= '0;
      req_got   <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (fetch) ft <= ft + 5'd1;
      unique case (state)
        S_IDLE: if (start) begin
          c        <= cfg;
          nb       <= 8'((cfg.w_in + 10'd5) / 10'd6);
          cin_k    <= 16'(cfg.cin) * 16'(cfg.k);
          co       <= '0;
          co_wbase <= cfg.w_base;
          state    <= S_CH_START;
        end
        S_CH_START: begin            // channel tracker: reset pointers
          b         <= '0;
          ci        <= '0;
          ch_base   <= '0;
          kern_base <= co_wbase;
          batch_pos <= -12'(c.pad);
          cnt       <= '0;
          ft        <= '0;
          state     <= S_PRIME;
        end
        S_PRIME: begin
          if (cnt == 4'(PRIME_CYC - 1)) begin
            cnt   <= '0;
            state <= S_COMPUTE;
          end else cnt <= cnt + 4'd1;
        end
        S_COMPUTE: begin
          if (cnt == c.k - 4'd1) begin
            cnt <= '0;
            ft  <= '0;
            if (ci == c.cin - 10'd1) begin
              state <= S_POOL;
            end else begin
              ci        <= ci + 10'd1;
              ch_base   <= ch_base + 16'(c.w_in);
              kern_base <= kern_base + 16'(c.k);
              state     <= S_PRIME;
            end
          end else cnt <= cnt + 4'd1;
        end
        S_POOL: state <= S_LOAD;
        S_LOAD: begin
          req_n   <= p_n;
          req_got <= '0;
          state   <= S_REQ;
        end
        S_REQ: begin                 // wait for the requantiser
          if (r_valid) req_got <= req_got + 2'd1;
          if ((req_n == '0) || (r_valid && req_got == req_n - 2'd1))
            state <= S_WRITE;
        end
        S_WRITE: begin               // output written; next batch or channel
          ci        <= '0;
          ch_base   <= '0;
          kern_base <= co_wbase;
          cnt       <= '0;
          ft        <= '0;
          if (b == nb - 8'd1) begin
            if (co == c.cout - 10'd1) state <= S_FLUSH;
            else begin
              co       <= co + 10'd1;
              co_wbase <= co_wbase + cin_k;
              state    <= S_CH_START;
            end
          end else begin
            b         <= b + 8'd1;
            batch_pos <= batch_pos + 12'sd6;
            state     <= S_PRIME;
          end
        end
        S_FLUSH: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a requantised value must never arrive while the FSM is not waiting
  a_req_in_req: assert property (@(posedge clk) disable iff (!rst_n)
                                 r_valid |-> state == S_REQ);
endmodule
