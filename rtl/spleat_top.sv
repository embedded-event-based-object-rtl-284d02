// spleat_top -- event-driven spiking CNN accelerator configured for an object-detection
// backbone.
//
// The network is mapped layer by layer onto a chain of NPUs, one NPU per spiking layer,
// all working at once: while layer l integrates the spikes of frame t, layer l-1 can
// already work on frame t+1.  Consecutive NPUs are linked by spike FIFOs.  The spikes of
// the layers marked in TAP_MASK are copied into per-layer tap FIFOs and merged by
// fmap_tap_arbiter into one feature-map stream for the processor that runs the SSD
// detection heads and the box post-processing (those stay in software).
// By default the chain is the 11-layer small 32-ST-VGG backbone on a 2x240x304 binary
// event frame, in Q8.8 fixed point, with taps on layers 3, 5, 7, 8, 9 and 10 (feature
// maps 38x30, 19x15, 10x8, 5x4, 3x2 and 2x1).
// Host interface (plain valid/ready streams, the real host bus is not modelled):
//   in_*    input events of one frame as SPIKE tokens (ch = polarity, y, x), then an EOT
//           closing the frame (time step); a CLEAR after the last frame of a clip resets
//           every membrane potential in the chain.
//   cfg_*   writes of weights, biases, threshold and decay into NPU `cfg_layer`.
//   fmap_*  spikes of the tapped layers, tagged with their layer, each layer's frame
//           closed by its EOT (and CLEAR) token.
//   busy    per-NPU activity; configure only while all are low.
// NL, LAYERS and TAP_MASK describe the network (at most 16 layers, as cfg_layer and
// fmap_layer are 4 bits); the defaults are the backbone above.  Widths and geometry are
// parameters; the token protocol, FIFO depth and host ports are
// this design's choices.
module spleat_top
  import spleat_pkg::*;
#(
  parameter int unsigned             NL       = NUM_LAYERS,
  parameter layer_t [0:NL-1]         LAYERS   = SMALL_32_ST_VGG,
  parameter logic [NL-1:0]           TAP_MASK = SMALL_32_ST_VGG_TAPS,
  parameter int unsigned             FIFO_DEPTH = 16,
  parameter int unsigned             W_W  = 16,
  parameter int unsigned             V_W  = 16,
  parameter int unsigned             FRAC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  spike_tok_t            in_tok,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic                  cfg_we,
  input  logic [LID_W-1:0]      cfg_layer,
  input  cfg_sel_e              cfg_sel,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  output spike_tok_t            fmap_tok,
  output logic [LID_W-1:0]      fmap_layer,
  output logic                  fmap_valid,
  input  logic                  fmap_ready,
  output logic [NL-1:0]         busy
);

  localparam int L = NL;

  // Layer-input streams: index i feeds NPU i (index 0 is the host input).
  spike_tok_t [L-1:0] fifo_in_tok, npu_in_tok, npu_out_tok, tap_tok;
  logic       [L-1:0] fifo_in_valid, fifo_in_ready, npu_in_valid, npu_in_ready;
  logic       [L-1:0] npu_out_valid, npu_out_ready;
  logic       [L-1:0] tap_in_valid, tap_in_ready, tap_valid, tap_ready;
  logic       [L-1:0] npu_busy, fifo_busy;

  assign fifo_in_tok[0]   = in_tok;
  assign fifo_in_valid[0] = in_valid;
  assign in_ready         = fifo_in_ready[0];

  for (genvar i = 0; i < L; i++) begin : g_layer
    localparam layer_t G = LAYERS[i];
  
    if (i > 0) begin : g_chk
      localparam layer_t PR = LAYERS[i-1];
      if (int'(PR.cout) != int'(G.cin) ||
          conv_out(int'(PR.ih), int'(PR.k), int'(PR.s), int'(PR.p)) != int'(G.ih) ||
          conv_out(int'(PR.iw), int'(PR.k), int'(PR.s), int'(PR.p)) != int'(G.iw)) begin : g_bad
        $error("spleat_top: layer %0d does not match the output of layer %0d", i, i - 1);
      end
    end

    logic [$clog2(FIFO_DEPTH+1)-1:0] in_cnt;

    spike_fifo #(.WIDTH(TOK_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
      .clk, .rst_n,
      .in_valid  (fifo_in_valid[i]),
      .in_ready  (fifo_in_ready[i]),
      .in_data   (fifo_in_tok[i]),
      .out_valid (npu_in_valid[i]),
      .out_ready (npu_in_ready[i]),
      .out_data  (npu_in_tok[i]),
      .count     (in_cnt)
    );

    npu #(
      .CIN(int'(G.cin)), .COUT(int'(G.cout)), .K(int'(G.k)), .S(int'(G.s)), .P(int'(G.p)),
      .IH(int'(G.ih)), .IW(int'(G.iw)), .W_W(W_W), .V_W(V_W), .FRAC(FRAC)
    ) u_npu (
      .clk, .rst_n,
      .in_tok    (npu_in_tok[i]),
      .in_valid  (npu_in_valid[i]),
      .in_ready  (npu_in_ready[i]),
      .out_tok   (npu_out_tok[i]),
      .out_valid (npu_out_valid[i]),
      .out_ready (npu_out_ready[i]),
      .cfg_we    (cfg_we && cfg_layer == LID_W'(i)),
      .cfg_sel,
      .cfg_addr,
      .cfg_data,
      .busy      (npu_busy[i])
    );

    // Fork: a token leaves the NPU when the next layer's FIFO and, for a tapped layer,
    // the tap FIFO can both take it.
    logic next_ok, tap_ok;
    if (i < L - 1) begin : g_next
      assign next_ok            = fifo_in_ready[i+1];
      assign fifo_in_tok[i+1]   = npu_out_tok[i];
      assign fifo_in_valid[i+1] = npu_out_valid[i] && tap_ok;
    end else begin : g_last
      assign next_ok = 1'b1;
    end

    if (TAP_MASK[i]) begin : g_tap
      logic [$clog2(FIFO_DEPTH+1)-1:0] tap_cnt;
      assign tap_ok          = tap_in_ready[i];
      assign tap_in_valid[i] = npu_out_valid[i] && next_ok;
      spike_fifo #(.WIDTH(TOK_W), .DEPTH(FIFO_DEPTH)) u_tap_fifo (
        .clk, .rst_n,
        .in_valid  (tap_in_valid[i]),
        .in_ready  (tap_in_ready[i]),
        .in_data   (npu_out_tok[i]),
        .out_valid (tap_valid[i]),
        .out_ready (tap_ready[i]),
        .out_data  (tap_tok[i]),
        .count     (tap_cnt)
      );
      assign fifo_busy[i] = (in_cnt != '0) || (tap_cnt != '0);
    end else begin : g_notap
      assign tap_ok          = 1'b1;
      assign tap_in_valid[i] = 1'b0;
      assign tap_in_ready[i] = 1'b1;
      assign tap_valid[i]    = 1'b0;
      assign tap_tok[i]      = '0;
      assign fifo_busy[i]    = (in_cnt != '0);
    end

    assign npu_out_ready[i] = next_ok && tap_ok;
    assign busy[i]          = npu_busy[i] || fifo_busy[i];
  end

  fmap_tap_arbiter #(.N(L), .MASK(TAP_MASK)) u_arb (
    .clk, .rst_n,
    .in_tok    (tap_tok),
    .in_valid  (tap_valid),
    .in_ready  (tap_ready),
    .out_tok   (fmap_tok),
    .out_layer (fmap_layer),
    .out_valid (fmap_valid),
    .out_ready (fmap_ready)
  );

endmodule
