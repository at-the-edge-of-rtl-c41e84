// layer_sequencer: fixed schedule that runs the network layer by layer.
//
// The network topology lives in hardware (cnn_pkg::layer_cfg), not in an
// instruction memory. On `start` (inference trigger) the sequencer sets up
// layer 0: it presents that layer's record on cfg, pulses layer_start for one
// cycle, and waits for layer_done from the memory and compute controller.
// It then flips the ping-pong toggle pp_sel (the buffer just written becomes
// the next layer's input), advances the layer index and sets up the next
// layer, until the last layer completes; then `done` pulses and it waits for
// the next trigger. L3_COUT selects the width of L3 (see cnn_pkg).
// pp_sel is 0 during L0 (L0 writes Ping). States follow the
// Inference Trigger Handler / Setup Layer / Layer Tracker flow of the paper.
module layer_sequencer
  import cnn_pkg::*;
#(
  parameter int unsigned L3_COUT = L3_COUT_DEF  // output channels of L3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic [2:0] layer_id,
  output layer_cfg_t cfg,
  output logic       layer_start,
  input  logic       layer_done,
  output logic       pp_sel
);
  typedef enum logic [1:0] {S_TRIGGER, S_SETUP, S_WAIT, S_TRACK} state_e;
  state_e state;

  assign cfg  = layer_cfg(layer_id, L3_COUT);
  assign busy = (state != S_TRIGGER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_TRIGGER;
      layer_id    <= '0;
      layer_start <= 1'b0;
      pp_sel      <= 1'b0;
      done        <= 1'b0;
    end else begin
      layer_start <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        S_TRIGGER: if (start) begin
          layer_id <= '0;
          pp_sel   <= 1'b0;
          state    <= S_SETUP;
        end
        S_SETUP: begin
          layer_start <= 1'b1;
          state       <= S_WAIT;
        end
        S_WAIT: if (layer_done) begin
          pp_sel <= !pp_sel;
          state  <= S_TRACK;
        end
        S_TRACK: begin
          if (layer_id == 3'(NUM_LAYERS - 1)) begin
            done  <= 1'b1;
            state <= S_TRIGGER;
          end else begin
            layer_id <= layer_id + 3'd1;
            state    <= S_SETUP;
          end
        end
        default: state <= S_TRIGGER;
      endcase
    end
  end
endmodule
