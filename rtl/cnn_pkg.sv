// cnn_pkg: shared types and constants of the 1-D CNN accelerator.
//
// The network is fixed in hardware: four 1-D convolution layers (L0..L3) and
// one fully connected layer (L4) run on the same six-lane systolic MAC array.
// Each layer is described by a layer_cfg_t record, and layer_cfg() returns the
// record for a layer index; the layer sequencer walks through these records.
//
// Topology, kernel sizes, paddings, widths and the pooling mode of each layer
// follow the accelerator's cycle-analysis table. That table gives L3 128
// output channels, the network figure and the model description 96; the
// width of L3 is therefore an argument of layer_cfg() (default 128), and it
// also sets the input count of L4 and the L4 base addresses. The weight and
// bias base addresses follow from packing the layers one after another:
// L4 weights start at 23,184 + 64*5*l3_cout, L4 biases at 112 + l3_cout. The per-layer requantisation multipliers are placeholders for
// trained values: the trained model's constants are not published.
package cnn_pkg;

  localparam int unsigned NUM_LANES   = 6;   // DSPs in the systolic cluster
  localparam int unsigned NUM_LAYERS  = 5;   // L0..L4
  localparam int unsigned PRIME_CYC   = 7;   // cycles to fill the X pipeline
  localparam int unsigned REQ_SHIFT   = 32;  // right shift after requant multiply
  localparam int unsigned GAP_SHIFT   = 6;   // GAP pre-scale: width 64 -> >>> 6
  localparam int unsigned NUM_CLASSES = 3;
  localparam int unsigned IN_LEN      = 512; // input window length (samples)

  typedef enum logic [1:0] {
    POOL_MAX    = 2'd0,  // 2x1 max pooling of adjacent outputs
    POOL_GAP    = 2'd1,  // global average pooling (shift, accumulate, flush)
    POOL_BYPASS = 2'd2   // raw accumulator straight to the requantiser
  } pool_mode_e;

  typedef enum logic [1:0] {
    SRC_INPUT = 2'd0,    // input buffer (BRAM)
    SRC_PP    = 2'd1     // ping-pong buffer selected by the toggle
  } src_e;

  typedef struct packed {
    logic [9:0]  cin;       // input channels
    logic [9:0]  cout;      // output channels
    logic [3:0]  k;         // kernel size
    logic [3:0]  pad;       // zero padding on both sides
    logic [9:0]  w_in;      // input width (samples per channel)
    logic [9:0]  w_out;     // output width after pooling
    pool_mode_e  pool;
    src_e        src;
    logic        in_signed; // input bytes are signed INT8 (else unsigned)
    logic        relu;      // saturate to [0,255] and store; else 32-bit logits
    logic [15:0] w_base;    // first weight, byte address in weight memory
    logic [8:0]  b_base;    // first bias entry in the bias ROM
  } layer_cfg_t;

  localparam int unsigned L3_COUT_DEF = 128;  // output channels of L3

  function automatic layer_cfg_t layer_cfg(input logic [2:0] id,
                                           input int unsigned l3_cout = L3_COUT_DEF);
    layer_cfg_t c;
    c = '0;
    unique case (id)
      3'd0: begin c.cin=1;   c.cout=16;  c.k=9; c.pad=4; c.w_in=512; c.w_out=256;
                  c.pool=POOL_MAX; c.src=SRC_INPUT; c.in_signed=1'b1; c.relu=1'b1;
                  c.w_base=16'd0;     c.b_base=9'd0;   end
      3'd1: begin c.cin=16;  c.cout=32;  c.k=9; c.pad=4; c.w_in=256; c.w_out=128;
                  c.pool=POOL_MAX; c.src=SRC_PP;    c.in_signed=1'b0; c.relu=1'b1;
                  c.w_base=16'd144;   c.b_base=9'd16;  end
      3'd2: begin c.cin=32;  c.cout=64;  c.k=9; c.pad=4; c.w_in=128; c.w_out=64;
                  c.pool=POOL_MAX; c.src=SRC_PP;    c.in_signed=1'b0; c.relu=1'b1;
                  c.w_base=16'd4752;  c.b_base=9'd48;  end
      3'd3: begin c.cin=64;  c.cout=10'(l3_cout); c.k=5; c.pad=2; c.w_in=64;  c.w_out=1;
                  c.pool=POOL_GAP; c.src=SRC_PP;    c.in_signed=1'b0; c.relu=1'b1;
                  c.w_base=16'd23184; c.b_base=9'd112; end
      default: begin c.cin=10'(l3_cout); c.cout=3; c.k=1; c.pad=0; c.w_in=1; c.w_out=1;
                  c.pool=POOL_BYPASS; c.src=SRC_PP; c.in_signed=1'b0; c.relu=1'b0;
                  c.w_base=16'(23184 + 320 * l3_cout);
                  c.b_base=9'(112 + l3_cout); end
    endcase
    return c;
  endfunction

  // Total bytes of INT8 weights with the default L3 width (64,528 = 32,264
  // words of the 32K-word memory)
  localparam int unsigned WEIGHT_BYTES = 64528;
  localparam int unsigned BIAS_WORDS   = 243;

  // Requantisation multipliers, one per layer (flip-flop ROM). Applied as
  // (acc * M + 2^31) >>> 32. Placeholder values sized for test weights.
  localparam logic signed [31:0] SCALE_L0 = 32'sd134217728; // 2^27  (1/32)
  localparam logic signed [31:0] SCALE_L1 = 32'sd33554432;  // 2^25  (1/128)
  localparam logic signed [31:0] SCALE_L2 = 32'sd33554432;  // 2^25  (1/128)
  localparam logic signed [31:0] SCALE_L3 = 32'sd134217728; // 2^27  (1/32)
  localparam logic signed [31:0] SCALE_L4 = 32'sd1073741824;// 2^30  (1/4)

endpackage
