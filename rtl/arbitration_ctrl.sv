// arbitration_ctrl: top-level command FSM and weight-memory arbiter.
//
// It waits in IDLE for a command byte from the UART receiver:
//   'L' (0x4C) load weights:  4 header bytes, start word address (hi, lo)
//              and word count N (hi, lo), then N words of two bytes each
//              (hi byte first); each complete word is written into the
//              weight memory at consecutive addresses.
//   'V' (0x56) verify/readback: the same 4-byte header, then the N words
//              are read from the weight memory and sent back (hi, lo).
//   'G' (0x47) run: weight-memory control is handed to the inference
//              datapath (owner_infer=1), seq_start pulses, and the FSM waits
//              for seq_done before returning to IDLE.
// A pulse on auto_go in IDLE starts an inference exactly as 'G' does, so the
// acquisition side can trigger one when a window is complete without a host
// (the paper's trigger handler allows automatic triggering); a pulse outside
// IDLE is dropped, and a byte arriving in the same cycle has priority.
// Other bytes are ignored in IDLE. While loading or verifying, the UART side
// owns the weight memory exclusively. The three commands, the modes and the
// exclusive arbitration follow the paper; the packet layout is this design's.
module arbitration_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  // UART
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  output logic        tx_send,
  output logic [7:0]  tx_data,
  input  logic        tx_ready,
  // weight memory port (UART side)
  output logic        wm_en,
  output logic        wm_we,
  output logic [14:0] wm_addr,
  output logic [15:0] wm_wdata,
  input  logic [15:0] wm_rdata,
  output logic        owner_infer,
  // layer sequencer
  output logic        seq_start,
  input  logic        seq_done,
  input  logic        auto_go,
  output logic [1:0]  mode          // 0 idle, 1 load, 2 verify, 3 inference
);
  localparam logic [7:0] CMD_LOAD = 8'h4C, CMD_VERIFY = 8'h56, CMD_GO = 8'h47;

  typedef enum logic [3:0] {
    S_IDLE, S_HDR, S_L_HI, S_L_LO, S_V_RD, S_V_WAIT, S_V_HI, S_V_LO, S_V_NEXT,
    S_G_START, S_G_RUN
  } state_e;
  state_e state;

  logic        is_load;
  logic [1:0]  hdr_n;
  logic [15:0] addr, count;
  logic [7:0]  hi_q;
  logic [15:0] word_q;

  always_comb begin
    unique case (state)
      S_IDLE:             mode = 2'd0;
      S_G_START, S_G_RUN: mode = 2'd3;
      default:            mode = is_load ? 2'd1 : 2'd2;
    endcase
  end

  assign owner_infer = (state == S_G_START) || (state == S_G_RUN);
  assign wm_addr     = addr[14:0];
  assign wm_wdata    = {hi_q, rx_data};
  assign wm_we       = (state == S_L_LO) && rx_valid;
  assign wm_en       = wm_we || (state == S_V_RD);
  assign seq_start   = (state == S_G_START);
  assign tx_send     = ((state == S_V_HI) || (state == S_V_LO)) && tx_ready;
  assign tx_data     = (state == S_V_HI) ? word_q[15:8] : word_q[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      is_load <= 1'b0;
      hdr_n   <= '0;
      addr    <= '0;
      count   <= '0;
      hi_q    <= '0;
      word_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (rx_valid) begin
          hdr_n <= '0;
          unique case (rx_data)
            CMD_LOAD:   begin is_load <= 1'b1; state <= S_HDR; end
            CMD_VERIFY: begin is_load <= 1'b0; state <= S_HDR; end
            CMD_GO:     state <= S_G_START;
            default:    state <= S_IDLE;
          endcase
        end else if (auto_go) begin
          state <= S_G_START;
        end
        S_HDR: if (rx_valid) begin
          unique case (hdr_n)
            2'd0: addr[15:8]  <= rx_data;
            2'd1: addr[7:0]   <= rx_data;
            2'd2: count[15:8] <= rx_data;
            default: count[7:0] <= rx_data;
          endcase
          hdr_n <= hdr_n + 2'd1;
          if (hdr_n == 2'd3) begin
            if ({count[15:8], rx_data} == 16'd0) state <= S_IDLE;
            else state <= is_load ? S_L_HI : S_V_RD;
          end
        end
        S_L_HI: if (rx_valid) begin
          hi_q  <= rx_data;
          state <= S_L_LO;
        end
        S_L_LO: if (rx_valid) begin
          addr  <= addr + 16'd1;
          count <= count - 16'd1;
          state <= (count == 16'd1) ? S_IDLE : S_L_HI;
        end
        S_V_RD:   state <= S_V_WAIT;
        S_V_WAIT: begin
          word_q <= wm_rdata;
          state  <= S_V_HI;
        end
        S_V_HI: if (tx_ready) state <= S_V_LO;
        S_V_LO: if (tx_ready) state <= S_V_NEXT;
        S_V_NEXT: begin
          addr  <= addr + 16'd1;
          count <= count - 16'd1;
          state <= (count == 16'd1) ? S_IDLE : S_V_RD;
        end
        S_G_START: state <= S_G_RUN;
        S_G_RUN:   if (seq_done) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end
endmodule
