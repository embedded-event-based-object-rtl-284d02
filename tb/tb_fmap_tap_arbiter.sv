// tb_fmap_tap_arbiter -- self-checking test of the feature-map merge: per-source order,
// layer tag, masked inputs never granted, and round-robin fairness (a waiting source is
// served within N transfers).
module tb_fmap_tap_arbiter;
  import spleat_pkg::*;
  localparam int N = 5;
  localparam logic [N-1:0] MASK = 5'b11011;
  logic clk = 0, rst_n = 0;
  spike_tok_t [N-1:0] in_tok;
  logic [N-1:0] in_valid, in_ready;
  spike_tok_t out_tok;
  logic [LID_W-1:0] out_layer;
  logic out_valid, out_ready;
  spike_tok_t src_q[N][$];
  int wait_cnt[N];
  int checks = 0, failures = 0, served = 0;

  fmap_tap_arbiter #(.N(N), .MASK(MASK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; in_tok = '0; out_ready = 0;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (src_q[i].size() < 4 && $urandom_range(99) < 40) begin
          spike_tok_t t;
          t.kind = TOK_SPIKE; t.ch = CH_W'($urandom); t.y = Y_W'($urandom); t.x = X_W'($urandom);
          src_q[i].push_back(t);
        end
        in_valid[i] = src_q[i].size() > 0;
        in_tok[i]   = (src_q[i].size() > 0) ? src_q[i][0] : '0;
      end
      out_ready = ($urandom_range(99) < 70);
      #1;
      if (out_valid && out_ready) begin
        int l;
        l = int'(out_layer);
        checks += 2;
        if (!MASK[l]) begin failures++; $display("FAIL masked input %0d granted", l); end
        else if (src_q[l].size() == 0 || out_tok !== src_q[l][0]) begin failures++; $display("FAIL data from %0d", l); end
        checks++;
        if (!in_ready[l] || $countones(in_ready) != 1) begin failures++; $display("FAIL ready"); end
        for (int i = 0; i < N; i++) begin
          if (i == l) wait_cnt[i] = 0;
          else if (MASK[i] && src_q[i].size() > 0) begin
            wait_cnt[i]++;
            checks++;
            if (wait_cnt[i] > N) begin failures++; $display("FAIL starvation of %0d", i); end
          end
        end
        void'(src_q[l].pop_front());
        served++;
      end else if (out_valid == 0) begin
        // nothing valid among the masked inputs
        for (int i = 0; i < N; i++) if (MASK[i] && src_q[i].size() > 0) begin
          failures++; checks++; $display("FAIL idle with input %0d waiting", i);
        end
      end
    end
    checks++;
    if (served < 1000) begin failures++; $display("FAIL only %0d served", served); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
