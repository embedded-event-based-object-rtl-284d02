// sdp_ram -- simple dual-port synchronous RAM, the storage element of every NPU.
//
// One write port and one read port on the same clock, written as an array so that an
// FPGA flow maps it to block RAM.  Each NPU uses one instance for its synaptic weights
// and one for its membrane potentials; memory is what limits how large a network fits.
// Timing: a write with `we` is committed at the clock edge.  A read with `re` returns
// mem[raddr] on `rdata` after that edge and `rdata` holds while `re` is low.  A read and
// a write to the same address at the same edge return the old value (read-before-write).
// The array is not reset; the NPU clears potentials itself and the host loads weights.
module sdp_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
