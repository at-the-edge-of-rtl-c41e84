// cnn_accel_top: 1-D CNN inference accelerator for single-channel SCG windows.
//
// A 512-sample INT8 window in the input buffer is classified into three
// classes (background, systolic, diastolic) by four 1-D convolution layers
// and one fully connected layer, all run on one six-lane systolic MAC array.
// Blocks:
//   uart_rx / uart_tx + arbitration_ctrl  host commands 'L' (load weights),
//                                          'V' (read weights back), 'G' (run)
//   weight_mem      32K x 16 INT8 weights (two SPRAM banks)
//   bias_rom        512 x 32 biases, scale_rom  per-layer multipliers
//   input_buffer    2 x 256 x 16 window store, written from outside
//   pingpong_buffer two 16K x 16 SPRAMs between layers
//   layer_sequencer runs L0..L4 and flips the ping-pong toggle
//   mc_controller   loop control plus cluster, pooling, requant, packer
// Interface: the acquisition side writes words into the input buffer
// (in_wr_*) and chooses the bank an inference reads (in_rd_bank); it may
// start an inference itself with a pulse on infer_trigger while the command
// FSM is idle (mode 0). After a 'G' command or a trigger, busy is high until done pulses; logits[0..2] then hold the three
// signed 32-bit class scores. With the default parameters an inference takes
// 2,277,808 cycles (94.9 ms at 24 MHz). L3_COUT sets the width of the last
// convolution: 128 as in the accelerator's cycle table (default), or 96 as
// in the model description (2,005,072 cycles).
// rst_n is an asynchronous reset; the arbitration assertion at the end also
// samples it (disable iff), which is why lint reports it as used both ways.
module cnn_accel_top
  import cnn_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 208,
  parameter int unsigned L3_COUT      = L3_COUT_DEF  // 128, or 96 for the
                                                     // narrower model variant
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               uart_rxd,
  output logic               uart_txd,
  input  logic               in_wr_en,
  input  logic               in_wr_bank,
  input  logic [7:0]         in_wr_addr,
  input  logic [15:0]        in_wr_data,
  input  logic               in_rd_bank,
  input  logic               infer_trigger,   // start an inference without the UART
  output logic               busy,
  output logic [1:0]         mode,       // 0 idle, 1 load, 2 verify, 3 run
  output logic               done,
  output logic               logits_valid,
  output logic signed [31:0] logits [NUM_CLASSES]
);
  // ---------------- UART and arbitration -----------------------------------
  logic       rx_valid, tx_send, tx_ready;
  logic [7:0] rx_data, tx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rxd), .valid(rx_valid), .data(rx_data));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .send(tx_send), .data(tx_data), .ready(tx_ready), .tx(uart_txd));

  logic        a_wm_en, a_wm_we, owner_infer, seq_start, seq_done;
  logic [14:0] a_wm_addr;
  logic [15:0] a_wm_wdata, wm_rdata;

  arbitration_ctrl u_arb (
    .clk, .rst_n, .rx_valid, .rx_data, .tx_send, .tx_data, .tx_ready,
    .wm_en(a_wm_en), .wm_we(a_wm_we), .wm_addr(a_wm_addr), .wm_wdata(a_wm_wdata),
    .wm_rdata, .owner_infer, .seq_start, .seq_done, .auto_go(infer_trigger), .mode);

  // ---------------- sequencer and controller --------------------------------
  logic       layer_start, layer_done, pp_sel, seq_busy;
  logic [2:0] layer_id;
  layer_cfg_t cfg;

  layer_sequencer #(.L3_COUT(L3_COUT)) u_seq (
    .clk, .rst_n, .start(seq_start), .busy(seq_busy), .done(seq_done),
    .layer_id, .cfg, .layer_start, .layer_done, .pp_sel);

  logic signed [31:0] scale;
  scale_rom u_scale (.clk, .layer_id, .scale);

  logic               src_rd_en, w_rd_en, b_rd_en, out_we, logit_valid;
  logic               mc_busy;
  logic [15:0]        src_rd_addr, out_wdata;
  logic [7:0]         src_rd_byte, in_byte, pp_byte;
  logic [14:0]        w_rd_addr;
  logic [8:0]         b_rd_addr;
  logic signed [31:0] b_rd_data, logit_data;
  logic [13:0]        out_addr;
  logic [1:0]         logit_idx;

  mc_controller u_mcc (
    .clk, .rst_n, .start(layer_start), .cfg, .scale, .busy(mc_busy), .done(layer_done),
    .src_rd_en, .src_rd_addr, .src_rd_byte,
    .w_rd_en, .w_rd_addr, .w_rd_data(wm_rdata),
    .b_rd_en, .b_rd_addr, .b_rd_data,
    .out_we, .out_addr, .out_wdata,
    .logit_valid, .logit_idx, .logit_data);

  // ---------------- memories -------------------------------------------------
  weight_mem u_wmem (
    .clk,
    .en   (owner_infer ? w_rd_en   : a_wm_en),
    .we   (owner_infer ? 1'b0      : a_wm_we),
    .addr (owner_infer ? w_rd_addr : a_wm_addr),
    .wdata(a_wm_wdata),
    .rdata(wm_rdata));

  bias_rom u_bias (.clk, .en(b_rd_en), .addr(b_rd_addr), .rdata(b_rd_data));

  logic src_is_input, src_sel_q;
  assign src_is_input = (cfg.src == SRC_INPUT);

  input_buffer u_inbuf (
    .clk, .wr_en(in_wr_en), .wr_bank(in_wr_bank), .wr_addr(in_wr_addr),
    .wr_data(in_wr_data), .rd_en(src_rd_en && src_is_input), .rd_bank(in_rd_bank),
    .rd_addr(src_rd_addr[8:0]), .rd_byte(in_byte));

  pingpong_buffer u_pp (
    .clk, .sel(pp_sel), .wr_en(out_we), .wr_addr(out_addr), .wr_data(out_wdata),
    .rd_en(src_rd_en && !src_is_input), .rd_addr(src_rd_addr[14:0]), .rd_byte(pp_byte));

  always_ff @(posedge clk) if (src_rd_en) src_sel_q <= src_is_input;
  assign src_rd_byte = src_sel_q ? in_byte : pp_byte;

  // ---------------- results --------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      logits_valid <= 1'b0;
      for (int i = 0; i < NUM_CLASSES; i++) logits[i] <= '0;
    end else begin
      if (seq_start) logits_valid <= 1'b0;
      if (seq_done)  logits_valid <= 1'b1;
      if (logit_valid && logit_idx < 2'(NUM_CLASSES)) logits[logit_idx] <= logit_data;
    end
  end

  assign busy = seq_busy || owner_infer || mc_busy;
  assign done = seq_done;

  // the inference datapath must only touch the weight memory when it owns it
  a_wmem_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                 w_rd_en |-> owner_infer);
endmodule
