// spleat_pkg -- types and constants shared by the SPLEAT-style spiking accelerator.
//
// Numbers follow the deployed configuration: 16-bit fixed point in Q8.8 for weights,
// biases, thresholds and membrane potentials, and the 11-layer "small 32-ST-VGG"
// convolutional backbone (patchify stem 32c4x4s4, then 3x3 layers) on a 2x240x304
// binary event frame.  Spikes travel between layers as tokens: a SPIKE carries the
// (channel, row, column) of the neuron that fired, an EOT marks the end of one time step
// (one event frame), a CLEAR marks the end of a video clip and zeroes every potential.
// The token format, field widths and the padding values are choices of this design; the
// padding (1 for 3x3 kernels, 0 for the stem) reproduces the published feature-map sizes
// 38x30, 19x15, 10x8, 5x4, 3x2 and 2x1.
package spleat_pkg;

  localparam int unsigned DATA_W = 16;  // Q8.8 word
  localparam int unsigned FRAC_W = 8;   // fractional bits of Q8.8

  localparam int unsigned CH_W  = 8;    // up to 256 channels
  localparam int unsigned Y_W   = 8;    // up to 256 rows
  localparam int unsigned X_W   = 9;    // up to 512 columns
  localparam int unsigned LID_W = 4;    // layer index
  localparam int unsigned CFG_ADDR_W = 20;
  localparam int unsigned CFG_DATA_W = 64; // per-layer widths may be up to 64 bits

  typedef enum logic [1:0] {
    TOK_SPIKE = 2'd0,
    TOK_EOT   = 2'd1,
    TOK_CLEAR = 2'd2
  } tok_kind_e;

  typedef struct packed {
    tok_kind_e        kind;
    logic [CH_W-1:0]  ch;
    logic [Y_W-1:0]   y;
    logic [X_W-1:0]   x;
  } spike_tok_t;

  localparam int unsigned TOK_W = $bits(spike_tok_t);

  // Host configuration targets inside one NPU.
  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,  // addr = ((co*CIN+ci)*K+ky)*K+kx
    CFG_BIAS   = 2'd1,  // addr = co
    CFG_THRESH = 2'd2,
    CFG_DECAY  = 2'd3   // leak factor in Q0.FRAC, 2^FRAC = no leak (IF neuron)
  } cfg_sel_e;

  // Geometry of one convolutional spiking layer.
  typedef struct packed {
    logic [8:0] cin;
    logic [8:0] cout;
    logic [3:0] k;
    logic [3:0] s;
    logic [3:0] p;
    logic [8:0] ih;
    logic [8:0] iw;
  } layer_t;

  localparam int NUM_LAYERS = 11;

  function automatic layer_t mk_layer(int cin, int cout, int k, int s, int p, int ih, int iw);
    layer_t l;
    l.cin = 9'(cin); l.cout = 9'(cout); l.k = 4'(k); l.s = 4'(s); l.p = 4'(p);
    l.ih = 9'(ih); l.iw = 9'(iw);
    return l;
  endfunction

  function automatic int conv_out(int in_sz, int k, int s, int p);
    return (in_sz + 2 * p - k) / s + 1;
  endfunction

  // Small 32-ST-VGG backbone, layer 0 first.
  localparam layer_t [0:NUM_LAYERS-1] SMALL_32_ST_VGG = '{
    mk_layer(  2,  32, 4, 4, 0, 240, 304),   // patchify stem -> 32x60x76
    mk_layer( 32,  32, 3, 1, 1,  60,  76),
    mk_layer( 32,  32, 3, 1, 1,  60,  76),
    mk_layer( 32,  64, 3, 2, 1,  60,  76),   // -> 38x30 feature map
    mk_layer( 64,  64, 3, 1, 1,  30,  38),
    mk_layer( 64, 128, 3, 2, 1,  30,  38),   // -> 19x15 feature map
    mk_layer(128, 128, 3, 1, 1,  15,  19),
    mk_layer(128, 128, 3, 2, 1,  15,  19),   // -> 10x8
    mk_layer(128, 128, 3, 2, 1,   8,  10),   // -> 5x4
    mk_layer(128, 128, 3, 2, 1,   4,   5),   // -> 3x2
    mk_layer(128, 128, 3, 2, 1,   2,   3)    // -> 2x1
  };

  // Layers whose spikes are sent to the SSD heads (bit i = layer i).
  localparam logic [NUM_LAYERS-1:0] SMALL_32_ST_VGG_TAPS = 11'b111_1010_1000;

endpackage
