// spike_fifo -- synchronous FIFO linking consecutive NPUs of the layer pipeline.
//
// Every spiking layer runs in its own NPU and all NPUs work at the same time, so the
// spikes (and end-of-step / clear tokens) produced by one layer are buffered here until
// the next layer is ready to integrate them.  Both sides use valid/ready: a word moves
// when valid and ready are high at a clock edge.  `in_ready` is low only when the FIFO is
// full, which stalls the producing NPU (backpressure).  `out_data` shows the oldest word
// combinationally from the storage array.  The depth is this design's choice.
module spike_fifo #(
  parameter int unsigned WIDTH = 27,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= next_ptr(wptr);
      if (pop)  rptr <= next_ptr(rptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  // A word offered by the consumer side stays until it is taken.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
  a_hold_out: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
