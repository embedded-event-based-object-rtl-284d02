// lif_unit -- fixed-point arithmetic of a leaky integrate-and-fire neuron.
//
// Combinational.  Two operations share the unit:
//   integrate: acc_out = sat(v_in + w_in)            (one synaptic event, w_in = weight)
//   fire step: H = sat(v_in + w_in)                  (w_in = per-channel bias, once per step)
//              fire   = (H >= thresh)
//              v_next = fire ? 0 : floor(H * decay / 2^FRAC)
// All values are two's-complement fixed point with FRAC fractional bits (Q8.8 by default).
// The hard reset to 0 after a spike, the threshold test and the leak follow the neuron
// model the accelerator is built for (IF, LIF, and PLIF with its learned leak frozen).
// The leak is written as a multiplicative factor `decay` = 2^FRAC*(1-1/tau) in Q0.FRAC:
// decay = 2^FRAC disables the leak (IF neuron), decay = 2^(FRAC-1) is a leak factor of 2.
// The form of the leak, applying it after the threshold test, saturation instead of
// wrap-around, and rounding towards minus infinity are this design's choices.
module lif_unit #(
  parameter int unsigned V_W  = 16,
  parameter int unsigned W_W  = 16,
  parameter int unsigned FRAC = 8
) (
  input  logic signed [V_W-1:0]  v_in,
  input  logic signed [W_W-1:0]  w_in,
  input  logic signed [V_W-1:0]  thresh,
  input  logic        [FRAC:0]   decay,
  output logic signed [V_W-1:0]  acc_out,
  output logic                   fire,
  output logic signed [V_W-1:0]  v_next
);

  localparam int unsigned SW = ((V_W > W_W) ? V_W : W_W) + 1;
  localparam int unsigned PW = V_W + FRAC + 2;

  localparam logic signed [SW-1:0] VMAX = SW'((64'sd1 <<< (V_W - 1)) - 1);
  localparam logic signed [SW-1:0] VMIN = -SW'(64'sd1 <<< (V_W - 1));
  localparam logic signed [PW-1:0] PMAX = PW'(VMAX);
  localparam logic signed [PW-1:0] PMIN = PW'(VMIN);

  logic signed [SW-1:0] sum;
  logic signed [PW-1:0] prod, leaked;

  always_comb begin
    sum = SW'(v_in) + SW'(w_in);
    if (sum > VMAX)      acc_out = V_W'(VMAX);
    else if (sum < VMIN) acc_out = V_W'(VMIN);
    else                 acc_out = V_W'(sum);

    fire   = (acc_out >= thresh);
    prod   = PW'(acc_out) * PW'($signed({1'b0, decay}));
    leaked = prod >>> FRAC;
    if (fire)                v_next = '0;
    else if (leaked > PMAX)  v_next = V_W'(PMAX);
    else if (leaked < PMIN)  v_next = V_W'(PMIN);
    else                     v_next = V_W'(leaked);
  end

endmodule
