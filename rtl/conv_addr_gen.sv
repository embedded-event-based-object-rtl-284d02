// conv_addr_gen -- expands one input spike into the synaptic updates it causes.
//
// A spike at input channel ci, row iy, column ix of a KxK convolution with stride S and
// zero padding P stimulates output neuron (co, oy, ox) through kernel tap (ky, kx) when
// iy + P - ky = oy*S and ix + P - kx = ox*S with oy, ox inside the output map.  The unit
// walks the kernel taps (ky outer, kx inner) and, for every tap that lands on an output
// neuron, all COUT output channels, issuing one update per cycle: the weight address
// ((co*CIN+ci)*K+ky)*K+kx and the potential address (co*OH+oy)*OW+ox.  A tap that lands
// outside the map or between stride positions costs one idle cycle.  This is the
// "one neuron at a time" sequential update of an NPU; the enumeration order and the
// memory layouts are this design's choices.
// Interface: `start` (accepted only while `busy` is low) loads the spike; updates follow
// from the next cycle on `upd_valid`/`w_addr`/`v_addr`/`co`; `busy` falls after the last.
// Cycles per spike: sum over the K*K taps of (COUT if the tap lands, else 1).
module conv_addr_gen
  import spleat_pkg::*;
#(
  parameter int unsigned CIN  = 32,
  parameter int unsigned COUT = 32,
  parameter int unsigned K    = 3,
  parameter int unsigned S    = 1,
  parameter int unsigned P    = 1,
  parameter int unsigned IH   = 60,
  parameter int unsigned IW   = 76,
  localparam int unsigned OH  = (IH + 2 * P - K) / S + 1,
  localparam int unsigned OW  = (IW + 2 * P - K) / S + 1,
  localparam int unsigned WDEPTH = COUT * CIN * K * K,
  localparam int unsigned VDEPTH = COUT * OH * OW,
  localparam int unsigned WAW = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned VAW = (VDEPTH > 1) ? $clog2(VDEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CH_W-1:0]   ch,
  input  logic [Y_W-1:0]    y,
  input  logic [X_W-1:0]    x,
  output logic              busy,
  output logic              upd_valid,
  output logic [WAW-1:0]    w_addr,
  output logic [VAW-1:0]    v_addr,
  output logic [CH_W-1:0]   co
);

  localparam int unsigned KW = $clog2(K + 1);

  logic [CH_W-1:0] ci_q;
  logic [Y_W-1:0]  iy_q;
  logic [X_W-1:0]  ix_q;
  logic [KW-1:0]   ky, kx;
  logic [CH_W-1:0] co_q;

  int ty, tx, oy, ox;
  logic hit, last_co, last_tap;

  always_comb begin
    ty  = int'(iy_q) + int'(P) - int'(ky);
    tx  = int'(ix_q) + int'(P) - int'(kx);
    oy  = ty / int'(S);
    ox  = tx / int'(S);
    hit = (ty >= 0) && (tx >= 0) && (ty % int'(S) == 0) && (tx % int'(S) == 0)
          && (oy < int'(OH)) && (ox < int'(OW));
    last_co  = (co_q == CH_W'(COUT - 1));
    last_tap = (ky == KW'(K - 1)) && (kx == KW'(K - 1));

    upd_valid = busy && hit;
    co        = co_q;
    w_addr    = WAW'(((int'(co_q) * int'(CIN) + int'(ci_q)) * int'(K) + int'(ky)) * int'(K) + int'(kx));
    v_addr    = VAW'((int'(co_q) * int'(OH) + oy) * int'(OW) + ox);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ci_q <= '0;
      iy_q <= '0;
      ix_q <= '0;
      ky   <= '0;
      kx   <= '0;
      co_q <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        ci_q <= ch;
        iy_q <= y;
        ix_q <= x;
        ky   <= '0;
        kx   <= '0;
        co_q <= '0;
      end
    end else if (hit && !last_co) begin
      co_q <= co_q + 1'b1;
    end else begin
      co_q <= '0;
      if (last_tap) begin
        busy <= 1'b0;
      end else if (kx == KW'(K - 1)) begin
        kx <= '0;
        ky <= ky + 1'b1;
      end else begin
        kx <= kx + 1'b1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_ch_range:   assert property (@(posedge clk) disable iff (!rst_n) start |-> int'(ch) < int'(CIN));

endmodule
