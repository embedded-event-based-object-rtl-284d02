// tb_spleat_top_full -- end-to-end run of the accelerator at its default size: the
// 11-layer small 32-ST-VGG backbone on 2x240x304 event frames, Q8.8, all 886,752
// weights and biases loaded through the configuration port.  Three event frames are
// streamed with a clip boundary (CLEAR) after the second, the feature-map output sees
// random backpressure, and every token of the six tapped layers is compared in order
// with a chain of layer models.  The same mechanism counters as the reduced end-to-end
// test are checked.  Weights are zero-mean pseudo-random values (the stem's are
// positive) so that activity stays moderate and the run takes minutes.
module tb_spleat_top_full;
  import spleat_pkg::*;
  import spleat_ref_pkg::*;

  localparam layer_t [0:NUM_LAYERS-1] NET = SMALL_32_ST_VGG;
  localparam int FRAMES      = 3;
  localparam int CLEAR_AFTER = 2;     // CLEAR after this many frames
  localparam int EVENTS      = 3000;    // input events per frame
  localparam int W_LO = -100, W_HI = 100;
  localparam longint WATCHDOG = 400_000_000;

  logic clk = 0, rst_n = 0;
  spike_tok_t in_tok, fmap_tok;
  logic in_valid, in_ready, fmap_valid, fmap_ready;
  logic cfg_we; logic [LID_W-1:0] cfg_layer; cfg_sel_e cfg_sel;
  logic [CFG_ADDR_W-1:0] cfg_addr; logic [CFG_DATA_W-1:0] cfg_data;
  logic [LID_W-1:0] fmap_layer;
  logic [NUM_LAYERS-1:0] busy;

  spleat_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  layer_model ml[NUM_LAYERS];
  ref_tok_t exp_q[NUM_LAYERS][$];
  int bp_pct = 20;

  // mechanism counters
  int n_in_events, n_fire, n_leak, n_last_layer_spikes, n_clear_out;
  longint n_parallel, n_layer_stall, n_fmap_stall, n_tap_stall, n_tokens_out;

  always @(negedge clk) fmap_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.npu_busy) >= 2) n_parallel++;
    for (int i = 1; i < NUM_LAYERS; i++)
      if (dut.fifo_in_valid[i] && !dut.fifo_in_ready[i]) n_layer_stall++;
    if (fmap_valid && !fmap_ready) n_fmap_stall++;
    for (int i = 0; i < NUM_LAYERS; i++)
      if (dut.TAP_MASK[i] && dut.npu_out_valid[i] && !dut.tap_in_ready[i]) n_tap_stall++;
    if (fmap_valid && fmap_ready) begin
      int l;
      ref_tok_t e;
      l = int'(fmap_layer);
      n_tokens_out++;
      checks++;
      if (l >= NUM_LAYERS || !dut.TAP_MASK[l]) begin
        failures++; $display("FAIL token from untapped layer %0d", l);
      end else if (exp_q[l].size() == 0) begin
        failures++; $display("FAIL unexpected token from layer %0d", l);
      end else begin
        e = exp_q[l].pop_front();
        if (int'(fmap_tok.kind) != e.kind || int'(fmap_tok.ch) != e.ch ||
            int'(fmap_tok.y) != e.y || int'(fmap_tok.x) != e.x) begin
          failures++;
          $display("FAIL layer %0d got k%0d c%0d y%0d x%0d exp k%0d c%0d y%0d x%0d", l,
                   fmap_tok.kind, fmap_tok.ch, fmap_tok.y, fmap_tok.x, e.kind, e.ch, e.y, e.x);
        end
        if (fmap_tok.kind == TOK_SPIKE && l == NUM_LAYERS - 1) n_last_layer_spikes++;
        if (fmap_tok.kind == TOK_CLEAR && l == NUM_LAYERS - 1) n_clear_out++;
      end
    end
  end

  function automatic int exp_pending();
    int n = 0;
    for (int l = 0; l < NUM_LAYERS; l++) n += exp_q[l].size();
    return n;
  endfunction

  // Model of one frame through the whole chain.
  task automatic model_frame(ref ref_tok_t ev[$]);
    ref_tok_t cur[$], nxt[$];
    cur = ev;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      nxt.delete();
      foreach (cur[i]) if (cur[i].kind == 0) ml[l].integrate(cur[i].ch, cur[i].y, cur[i].x);
      ml[l].fire(nxt);
      if (dut.TAP_MASK[l]) foreach (nxt[i]) exp_q[l].push_back(nxt[i]);
      cur = nxt;
    end
  endtask

  task automatic model_clear();
    ref_tok_t q[$];
    for (int l = 0; l < NUM_LAYERS; l++) begin
      q.delete();
      ml[l].clear(q);
      if (dut.TAP_MASK[l]) exp_q[l].push_back(q[0]);
    end
  endtask

  task automatic send(tok_kind_e k, int c, int y, int x);
    in_valid = 1;
    in_tok.kind = k; in_tok.ch = CH_W'(c); in_tok.y = Y_W'(y); in_tok.x = X_W'(x);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if ($urandom_range(3) == 0) @(negedge clk);
  endtask

  task automatic load_config();
    for (int l = 0; l < NUM_LAYERS; l++) begin
      layer_model m;
      m = ml[l];
      @(negedge clk);
      cfg_we = 1; cfg_layer = LID_W'(l);
      cfg_sel = CFG_WEIGHT;
      foreach (m.w[a]) begin
        m.w[a] = (l == 0) ? hash_range(100, a, 60, 200) : hash_range(100 + l, a, W_LO, W_HI);
        cfg_addr = CFG_ADDR_W'(a); cfg_data = CFG_DATA_W'(longint'(m.w[a]));
        @(negedge clk);
      end
      cfg_sel = CFG_BIAS;
      foreach (m.bias[c]) begin
        m.bias[c] = hash_range(200 + l, c, -40, 20);
        cfg_addr = CFG_ADDR_W'(c); cfg_data = CFG_DATA_W'(longint'(m.bias[c]));
        @(negedge clk);
      end
      m.thresh = 256 + 16 * (l % 3);
      cfg_sel = CFG_THRESH; cfg_addr = '0; cfg_data = CFG_DATA_W'(m.thresh);
      @(negedge clk);
      m.decay = (l % 4 == 3) ? 256 : 160 + 8 * l;   // some IF layers, others leaky
      cfg_sel = CFG_DECAY; cfg_data = CFG_DATA_W'(m.decay);
      @(negedge clk);
      cfg_we = 0;
    end
  endtask

  initial begin
    ref_tok_t ev[$];
    longint t0;
    in_valid = 0; in_tok = '0;
    cfg_we = 0; cfg_layer = '0; cfg_sel = CFG_WEIGHT; cfg_addr = '0; cfg_data = '0;
    for (int l = 0; l < NUM_LAYERS; l++)
      ml[l] = new(int'(NET[l].cin), int'(NET[l].cout), int'(NET[l].k), int'(NET[l].s),
                  int'(NET[l].p), int'(NET[l].ih), int'(NET[l].iw));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    wait (busy == '0);
    t0 = cyc;
    load_config();
    $display("configuration loaded in %0d cycles", cyc - t0);

    for (int f = 0; f < FRAMES; f++) begin
      bit used[int];
      ev.delete();
      used.delete();
      // random distinct events of a binary two-polarity frame
      while (ev.size() < EVENTS) begin
        int c, y, x, key;
        c = $urandom_range(int'(NET[0].cin) - 1); y = $urandom_range(int'(NET[0].ih) - 1); x = $urandom_range(int'(NET[0].iw) - 1);
        key = (c * 512 + y) * 512 + x;
        if (!used.exists(key)) begin
          used[key] = 1;
          ev.push_back('{0, c, y, x});
        end
      end
      model_frame(ev);
      $display("frame %0d modelled at cycle %0d", f, cyc);
      t0 = cyc;
      foreach (ev[i]) send(TOK_SPIKE, ev[i].ch, ev[i].y, ev[i].x);
      send(TOK_EOT, 0, 0, 0);
      n_in_events += ev.size();
      if (f == CLEAR_AFTER - 1) begin
        model_clear();
        send(TOK_CLEAR, 0, 0, 0);
      end
      $display("frame %0d sent (%0d cycles to accept its input)", f, cyc - t0);
      $fflush();
    end
    t0 = cyc;
    // Block the host for a while once the deep layers are busy, so the tap FIFOs fill.
    bp_pct = 100;
    repeat (1000000) @(negedge clk);
    bp_pct = 20;
    while (exp_pending() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (busy != '0) begin failures++; $display("FAIL accelerator still busy"); end

    for (int l = 0; l < NUM_LAYERS; l++) begin
      n_fire += ml[l].n_fire;
      n_leak += ml[l].n_leak;
      $display("layer %0d: %0d spikes fired, %0d synaptic updates", l, ml[l].n_fire, ml[l].n_updates);
    end
    $display("mechanisms: events=%0d fires=%0d leaks=%0d last-layer-spikes=%0d clears=%0d parallel-cycles=%0d layer-stall-cycles=%0d fmap-stall-cycles=%0d tap-fifo-stall-cycles=%0d tokens=%0d",
             n_in_events, n_fire, n_leak, n_last_layer_spikes, n_clear_out, n_parallel, n_layer_stall, n_fmap_stall, n_tap_stall, n_tokens_out);
    checks += 9;
    if (n_in_events == 0)         begin failures++; $display("FAIL no input events"); end
    if (n_fire == 0)              begin failures++; $display("FAIL no neuron fired"); end
    if (n_leak == 0)              begin failures++; $display("FAIL no leak applied"); end
    if (n_last_layer_spikes == 0) begin failures++; $display("FAIL no spike reached the last layer"); end
    if (n_clear_out == 0)         begin failures++; $display("FAIL clear never propagated"); end
    if (n_parallel == 0)          begin failures++; $display("FAIL NPUs never worked concurrently"); end
    if (n_layer_stall == 0)       begin failures++; $display("FAIL no inter-layer backpressure"); end
    if (n_fmap_stall == 0)        begin failures++; $display("FAIL no feature-map backpressure"); end
    if (n_tap_stall == 0)         begin failures++; $display("FAIL no tap FIFO ever filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
