// fmap_tap_arbiter -- merges the spike streams of the feature-map layers for the host.
//
// The detector reads six spiking feature maps from inside the backbone (38x30, 19x15,
// 10x8, 5x4, 3x2 and 2x1); their spikes leave the accelerator through one stream that
// the CPU running the SSD heads consumes.  Inputs whose bit in MASK is 0 are ignored.
// A round-robin pointer gives each tapped layer a fair share: the first valid input at or
// after the pointer is granted and the pointer moves past it after each transfer.
// Tokens pass unchanged (including the EOT that closes a layer's time step), tagged with
// the index of the layer that produced them.  Grant and ready are combinational; the
// arbitration scheme is this design's choice.
module fmap_tap_arbiter
  import spleat_pkg::*;
#(
  parameter int unsigned   N    = NUM_LAYERS,
  parameter logic [N-1:0]  MASK = {N{1'b1}}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  spike_tok_t [N-1:0]   in_tok,
  input  logic       [N-1:0]   in_valid,
  output logic       [N-1:0]   in_ready,
  output spike_tok_t           out_tok,
  output logic [LID_W-1:0]     out_layer,
  output logic                 out_valid,
  input  logic                 out_ready
);

  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;

  logic [PW-1:0] ptr;
  logic [PW-1:0] gnt;
  logic          any;

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int o = int'(N) - 1; o >= 0; o--) begin
      int idx;
      idx = (int'(ptr) + o) % int'(N);
      if (in_valid[idx] && MASK[idx]) begin
        any = 1'b1;
        gnt = PW'(idx);
      end
    end
    out_valid = any;
    out_tok   = in_tok[gnt];
    out_layer = LID_W'(gnt);
    in_ready  = '0;
    in_ready[gnt] = any && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready) ptr <= (gnt == PW'(N - 1)) ? '0 : gnt + 1'b1;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid);

endmodule
