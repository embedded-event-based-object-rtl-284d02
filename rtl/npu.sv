// npu -- Neural Processing Unit: one convolutional spiking layer, driven by events.
//
// Each spiking layer of the network gets an NPU of its own, holding that layer's weights,
// per-channel biases (batch norm folded into the convolution), threshold, leak factor and
// the membrane potential of every neuron of its output map.  The NPU only works when
// tokens arrive:
//   SPIKE (ci, y, x)  conv_addr_gen lists the stimulated neurons and the NPU adds the
//                     matching weight to each potential, one neuron per cycle through a
//                     two-stage pipeline (read weight and potential, add, write back).
//   EOT               end of a time step (one event frame).  After the last update has
//                     been written, the fire step visits every neuron of the layer
//                     (two cycles each): H = V + bias; if H >= threshold the neuron
//                     spikes, a SPIKE token (co, oy, ox) is sent downstream and V is reset
//                     to 0, otherwise V = H*decay (leak).  The EOT is then forwarded.
//   CLEAR             end of a clip: every potential is set to 0, the CLEAR is forwarded.
// After reset the NPU clears its potentials on its own before accepting tokens.
// Interfaces: in_*/out_* are valid/ready token streams (spleat_pkg::spike_tok_t); out_tok
// is registered and a full downstream FIFO stalls the fire step.  The cfg_* port writes
// weights (addr ((co*CIN+ci)*K+ky)*K+kx), biases (addr co), the threshold and the decay;
// the host should write only while `busy` is low.
// Event-driven processing, one NPU per layer, sequential per-neuron updates, the hard
// reset, LIF/IF behaviour and per-layer fixed-point widths follow the accelerator's
// description; the token protocol, the end-of-step scan and the memory layouts are this
// design's choices.  Cycle cost: (taps and channels, see conv_addr_gen) + 1 per spike,
// 2 per neuron per time step, 1 per neuron per clear.
module npu
  import spleat_pkg::*;
#(
  parameter int unsigned CIN  = 32,
  parameter int unsigned COUT = 32,
  parameter int unsigned K    = 3,
  parameter int unsigned S    = 1,
  parameter int unsigned P    = 1,
  parameter int unsigned IH   = 60,
  parameter int unsigned IW   = 76,
  parameter int unsigned W_W  = 16,
  parameter int unsigned V_W  = 16,
  parameter int unsigned FRAC = 8,
  localparam int unsigned OH  = (IH + 2 * P - K) / S + 1,
  localparam int unsigned OW  = (IW + 2 * P - K) / S + 1,
  localparam int unsigned WDEPTH = COUT * CIN * K * K,
  localparam int unsigned VDEPTH = COUT * OH * OW,
  localparam int unsigned WAW = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned VAW = (VDEPTH > 1) ? $clog2(VDEPTH) : 1,
  localparam int unsigned BAW = (COUT > 1) ? $clog2(COUT) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  spike_tok_t            in_tok,
  input  logic                  in_valid,
  output logic                  in_ready,
  output spike_tok_t            out_tok,
  output logic                  out_valid,
  input  logic                  out_ready,
  input  logic                  cfg_we,
  input  cfg_sel_e              cfg_sel,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  output logic                  busy
);

  typedef enum logic [2:0] {
    ST_IDLE, ST_DRAIN, ST_SCAN_RD, ST_SCAN_EV, ST_CLR, ST_FWD
  } state_e;

  state_e    state;
  tok_kind_e kind_q;   // token that started the current scan or clear

  // ---------------- configuration registers ----------------
  logic signed [W_W-1:0] bias_mem [COUT];
  logic signed [V_W-1:0] thresh_q;
  logic        [FRAC:0]  decay_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thresh_q <= V_W'(64'd1 << FRAC);   // 1.0
      decay_q  <= (FRAC+1)'(64'd1 << FRAC); // no leak
      for (int i = 0; i < int'(COUT); i++) bias_mem[i] <= '0;
    end else if (cfg_we) begin
      unique case (cfg_sel)
        CFG_BIAS:   if (cfg_addr < CFG_ADDR_W'(COUT)) bias_mem[BAW'(cfg_addr)] <= W_W'(cfg_data);
        CFG_THRESH: thresh_q <= V_W'(cfg_data);
        CFG_DECAY:  decay_q  <= (FRAC+1)'(cfg_data);
        default: ;
      endcase
    end
  end

  // ---------------- spike expansion ----------------
  logic            ag_start, ag_busy, ag_upd;
  logic [WAW-1:0]  ag_waddr;
  logic [VAW-1:0]  ag_vaddr;
  logic [CH_W-1:0] ag_co;

  assign in_ready = (state == ST_IDLE) && !ag_busy;
  assign ag_start = in_valid && in_ready && (in_tok.kind == TOK_SPIKE);

  conv_addr_gen #(.CIN(CIN), .COUT(COUT), .K(K), .S(S), .P(P), .IH(IH), .IW(IW)) u_ag (
    .clk, .rst_n,
    .start (ag_start),
    .ch    (in_tok.ch),
    .y     (in_tok.y),
    .x     (in_tok.x),
    .busy  (ag_busy),
    .upd_valid (ag_upd),
    .w_addr (ag_waddr),
    .v_addr (ag_vaddr),
    .co     (ag_co)
  );

  // ---------------- memories ----------------
  logic [W_W-1:0] w_rdata;
  logic [V_W-1:0] v_rdata, v_wdata;
  logic [VAW-1:0] v_raddr, v_waddr;
  logic           v_re, v_we;

  sdp_ram #(.WIDTH(W_W), .DEPTH(WDEPTH)) u_wmem (
    .clk,
    .we    (cfg_we && cfg_sel == CFG_WEIGHT),
    .waddr (WAW'(cfg_addr)),
    .wdata (W_W'(cfg_data)),
    .re    (ag_upd),
    .raddr (ag_waddr),
    .rdata (w_rdata)
  );

  sdp_ram #(.WIDTH(V_W), .DEPTH(VDEPTH)) u_vmem (
    .clk,
    .we    (v_we),
    .waddr (v_waddr),
    .wdata (v_wdata),
    .re    (v_re),
    .raddr (v_raddr),
    .rdata (v_rdata)
  );

  // ---------------- neuron arithmetic ----------------
  logic                  s1_valid;   // integration update in its read/write stage
  logic [VAW-1:0]        s1_vaddr;
  logic [VAW-1:0]        sc_addr;    // scan position
  logic [CH_W-1:0]       sc_co;
  logic [Y_W-1:0]        sc_y;
  logic [X_W-1:0]        sc_x;
  logic signed [W_W-1:0] lif_w;
  logic signed [V_W-1:0] lif_acc, lif_next;
  logic                  lif_fire;
  logic                  out_free, sc_last;

  assign lif_w = (state == ST_SCAN_EV) ? bias_mem[BAW'(sc_co)] : $signed(w_rdata);

  lif_unit #(.V_W(V_W), .W_W(W_W), .FRAC(FRAC)) u_lif (
    .v_in    ($signed(v_rdata)),
    .w_in    (lif_w),
    .thresh  (thresh_q),
    .decay   (decay_q),
    .acc_out (lif_acc),
    .fire    (lif_fire),
    .v_next  (lif_next)
  );

  assign out_free = !out_valid || out_ready;
  assign sc_last  = (sc_addr == VAW'(VDEPTH - 1));

  always_comb begin
    v_re    = 1'b0;
    v_raddr = ag_vaddr;
    v_we    = 1'b0;
    v_waddr = sc_addr;
    v_wdata = '0;
    if (ag_upd) v_re = 1'b1;
    if (s1_valid) begin
      v_we    = 1'b1;
      v_waddr = s1_vaddr;
      v_wdata = lif_acc;
    end
    unique case (state)
      ST_SCAN_RD: begin
        v_re    = 1'b1;
        v_raddr = sc_addr;
      end
      ST_SCAN_EV: begin
        v_we    = out_free || !lif_fire;
        v_wdata = lif_next;
      end
      ST_CLR: v_we = 1'b1;
      default: ;
    endcase
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_CLR;
      kind_q    <= TOK_SPIKE;
      s1_valid  <= 1'b0;
      s1_vaddr  <= '0;
      sc_addr   <= '0;
      sc_co     <= '0;
      sc_y      <= '0;
      sc_x      <= '0;
      out_valid <= 1'b0;
      out_tok   <= '0;
    end else begin
      s1_valid <= ag_upd;
      s1_vaddr <= ag_vaddr;
      if (out_valid && out_ready) out_valid <= 1'b0;

      unique case (state)
        ST_IDLE: begin
          if (in_valid && in_ready && in_tok.kind != TOK_SPIKE) begin
            kind_q <= in_tok.kind;
            state  <= ST_DRAIN;
          end
        end
        ST_DRAIN: begin
          if (!s1_valid) begin
            sc_addr <= '0;
            sc_co   <= '0;
            sc_y    <= '0;
            sc_x    <= '0;
            state   <= (kind_q == TOK_EOT) ? ST_SCAN_RD : ST_CLR;
          end
        end
        ST_SCAN_RD: state <= ST_SCAN_EV;
        ST_SCAN_EV: begin
          if (out_free || !lif_fire) begin
            if (lif_fire) begin
              out_valid    <= 1'b1;
              out_tok.kind <= TOK_SPIKE;
              out_tok.ch   <= sc_co;
              out_tok.y    <= sc_y;
              out_tok.x    <= sc_x;
            end
            sc_addr <= sc_addr + 1'b1;
            if (sc_x == X_W'(OW - 1)) begin
              sc_x <= '0;
              if (sc_y == Y_W'(OH - 1)) begin
                sc_y  <= '0;
                sc_co <= sc_co + 1'b1;
              end else begin
                sc_y <= sc_y + 1'b1;
              end
            end else begin
              sc_x <= sc_x + 1'b1;
            end
            state <= sc_last ? ST_FWD : ST_SCAN_RD;
          end
        end
        ST_CLR: begin
          sc_addr <= sc_addr + 1'b1;
          if (sc_last) state <= (kind_q == TOK_CLEAR) ? ST_FWD : ST_IDLE;
        end
        ST_FWD: begin
          if (out_free) begin
            out_valid <= 1'b1;
            out_tok   <= '{kind: kind_q, ch: '0, y: '0, x: '0};
            state     <= ST_IDLE;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE) || ag_busy || s1_valid || out_valid;

  // An integration read never hits the address being written back in the same cycle
  // (conv_addr_gen inserts an idle cycle between spikes and never repeats an address
  // within one spike), so the pipeline needs no forwarding path.
  a_no_rw_hazard: assert property (@(posedge clk) disable iff (!rst_n)
                                   ag_upd && s1_valid |-> ag_vaddr != s1_vaddr);
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_tok));
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               cfg_we && cfg_sel == CFG_WEIGHT |-> !ag_upd);

endmodule
