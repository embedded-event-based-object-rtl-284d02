// tb_npu -- self-checking test of one Neural Processing Unit against the layer model.
// A small padded 3x3 stride-2 layer is configured with pseudo-random Q8.8 weights and
// biases, a threshold and a leak, then fed several time steps of random spikes with a
// clip boundary (CLEAR) in the middle, while the output side applies random
// backpressure.  Every output token is compared in order with the model.  In a
// backpressure-free step the cycle counts are checked: integration costs one cycle per
// synaptic update (plus one per idle tap and one per spike) and the fire step two cycles
// per neuron.
module tb_npu;
  import spleat_pkg::*;
  import spleat_ref_pkg::*;

  localparam int CIN = 3, COUT = 4, K = 3, S = 2, P = 1, IH = 7, IW = 9;
  localparam int OH = (IH + 2*P - K)/S + 1, OW = (IW + 2*P - K)/S + 1, VD = COUT*OH*OW;
  localparam int THR = 300, DEC = 192;

  logic clk = 0, rst_n = 0;
  spike_tok_t in_tok, out_tok;
  logic in_valid, in_ready, out_valid, out_ready;
  logic cfg_we; cfg_sel_e cfg_sel; logic [CFG_ADDR_W-1:0] cfg_addr; logic [CFG_DATA_W-1:0] cfg_data;
  logic busy;
  int checks = 0, failures = 0;
  longint cyc = 0;

  npu #(.CIN(CIN), .COUT(COUT), .K(K), .S(S), .P(P), .IH(IH), .IW(IW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  layer_model m;
  ref_tok_t exp_q[$];
  ref_tok_t in_q[$];
  int bp_pct = 30;           // percentage of cycles with out_ready low
  longint acc_cyc[$], out_cyc[$];

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    ref_tok_t e;
    out_cyc.push_back(cyc);
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected token"); end
    else begin
      e = exp_q.pop_front();
      if (int'(out_tok.kind) != e.kind || int'(out_tok.ch) != e.ch || int'(out_tok.y) != e.y || int'(out_tok.x) != e.x) begin
        failures++;
        $display("FAIL token got k%0d c%0d y%0d x%0d exp k%0d c%0d y%0d x%0d", out_tok.kind, out_tok.ch, out_tok.y, out_tok.x, e.kind, e.ch, e.y, e.x);
      end
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) acc_cyc.push_back(cyc);

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  task automatic cfg(cfg_sel_e sel, int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = CFG_ADDR_W'(addr); cfg_data = CFG_DATA_W'(longint'(data));
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic send(ref_tok_t t);
    @(negedge clk);
    in_valid = 1;
    in_tok.kind = tok_kind_e'(t.kind); in_tok.ch = CH_W'(t.ch); in_tok.y = Y_W'(t.y); in_tok.x = X_W'(t.x);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // cost of one spike in cycles, including the acceptance cycle
  function automatic int spike_cost(int iy, int ix);
    int c = 1;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++) begin
        int ty = iy + P - ky, tx = ix + P - kx;
        if (ty >= 0 && tx >= 0 && ty % S == 0 && tx % S == 0 && ty / S < OH && tx / S < OW) c += COUT;
        else c += 1;
      end
    return c;
  endfunction

  task automatic step(int nspk, bit timed);
    ref_tok_t t;
    int exp_int = 0;
    longint a0, a_eot;
    int base = acc_cyc.size();
    for (int n = 0; n < nspk; n++) begin
      t = '{0, $urandom_range(CIN-1), $urandom_range(IH-1), $urandom_range(IW-1)};
      m.integrate(t.ch, t.y, t.x);
      exp_int += spike_cost(t.y, t.x);
      in_q.push_back(t);
    end
    m.fire(exp_q);
    // stream with valid held high
    @(negedge clk);
    foreach (in_q[i]) begin
      in_valid = 1;
      in_tok.kind = TOK_SPIKE; in_tok.ch = CH_W'(in_q[i].ch); in_tok.y = Y_W'(in_q[i].y); in_tok.x = X_W'(in_q[i].x);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_q.delete();
    in_valid = 1; in_tok = '{kind: TOK_EOT, ch: '0, y: '0, x: '0};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if (timed && nspk > 0) begin
      a0 = acc_cyc[base];
      a_eot = acc_cyc[acc_cyc.size()-1];
      checks++;
      if (a_eot - a0 != longint'(exp_int)) begin
        failures++; $display("FAIL integration cycles %0d expected %0d", a_eot - a0, exp_int);
      end
      wait (exp_q.size() == 0);
      checks++;
      if (out_cyc[out_cyc.size()-1] - a_eot != longint'(2*VD + 3)) begin
        failures++; $display("FAIL fire-step cycles %0d expected %0d", out_cyc[out_cyc.size()-1] - a_eot, 2*VD + 3);
      end
    end
    wait (exp_q.size() == 0);
  endtask

  initial begin
    in_valid = 0; in_tok = '0; cfg_we = 0; cfg_sel = CFG_WEIGHT; cfg_addr = '0; cfg_data = '0;
    m = new(CIN, COUT, K, S, P, IH, IW);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    wait (!busy);
    for (int a = 0; a < COUT*CIN*K*K; a++) begin
      m.w[a] = hash_range(1, a, -120, 200);
      cfg(CFG_WEIGHT, a, m.w[a]);
    end
    for (int c = 0; c < COUT; c++) begin
      m.bias[c] = hash_range(2, c, -30, 50);
      cfg(CFG_BIAS, c, m.bias[c]);
    end
    m.thresh = THR; cfg(CFG_THRESH, 0, THR);
    m.decay = DEC;  cfg(CFG_DECAY, 0, DEC);

    bp_pct = 30;
    for (int s = 0; s < 4; s++) step($urandom_range(5, 25), 0);
    m.clear(exp_q);
    send('{2, 0, 0, 0});
    wait (exp_q.size() == 0);
    for (int s = 0; s < 3; s++) step($urandom_range(0, 25), 0);
    bp_pct = 0;
    step(20, 1);
    step(12, 1);
    repeat (10) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    checks++;
    if (m.n_fire == 0 || m.n_leak == 0) begin failures++; $display("FAIL coverage fire=%0d leak=%0d", m.n_fire, m.n_leak); end
    $display("fires=%0d leaks=%0d updates=%0d", m.n_fire, m.n_leak, m.n_updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
