// scale_rom: per-layer 32-bit requantisation multipliers held in flip-flops.
//
// One 32-bit multiplier per layer, set when the bitstream is built (flip-flop
// initial values) and never written. The multiplier of layer layer_id is
// registered onto `scale` on each clock, so it follows a change of layer one
// cycle later; the layer sequencer changes layer_id several cycles before the
// first value of a layer reaches the requantiser. The constants come from
// cnn_pkg and stand in for those of a trained model.
module scale_rom
  import cnn_pkg::*;
(
  input  logic               clk,
  input  logic [2:0]         layer_id,
  output logic signed [31:0] scale
);
  logic signed [31:0] regs [NUM_LAYERS] = '{SCALE_L0, SCALE_L1, SCALE_L2, SCALE_L3, SCALE_L4};

  always_ff @(posedge clk)
    scale <= (32'(layer_id) < NUM_LAYERS) ? regs[layer_id] : 32'sd0;
endmodule
