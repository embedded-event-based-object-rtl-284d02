// tb_conv_addr_gen -- self-checking test of the spike-to-synapse expansion.
// For random spikes, the list of (weight address, potential address) pairs issued by
// the DUT is compared with a brute-force search over every output neuron and kernel tap,
// and the cycles spent per spike are compared with (COUT per landing tap, 1 otherwise).
// Two geometries: a padded 3x3 stride-2 layer and a 4x4 stride-4 patchify stem.
module tb_conv_addr_gen;
  import spleat_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // geometry A
  localparam int CA = 3, OA = 4, KA = 3, SA = 2, PA = 1, HA = 7, WA = 9;
  // geometry B
  localparam int CB = 2, OB = 3, KB = 4, SB = 4, PB = 0, HB = 8, WB = 12;

  logic sa, ba, ua, sb, bb, ub;
  logic [CH_W-1:0] ch; logic [Y_W-1:0] y; logic [X_W-1:0] x;
  logic [CH_W-1:0] coa, cob;
  logic [$clog2(OA*CA*KA*KA)-1:0] wa; logic [$clog2(OA*4*5)-1:0] va;
  logic [$clog2(OB*CB*KB*KB)-1:0] wb; logic [$clog2(OB*2*3)-1:0] vb;

  conv_addr_gen #(.CIN(CA), .COUT(OA), .K(KA), .S(SA), .P(PA), .IH(HA), .IW(WA)) dut_a (
    .clk, .rst_n, .start(sa), .ch, .y, .x, .busy(ba), .upd_valid(ua), .w_addr(wa), .v_addr(va), .co(coa));
  conv_addr_gen #(.CIN(CB), .COUT(OB), .K(KB), .S(SB), .P(PB), .IH(HB), .IW(WB)) dut_b (
    .clk, .rst_n, .start(sb), .ch, .y, .x, .busy(bb), .upd_valid(ub), .w_addr(wb), .v_addr(vb), .co(cob));

  // Expected pairs, encoded as w*65536+v, and expected cycle count.
  task automatic expect_list(int cin, int cout, int k, int s, int p, int ih, int iw,
                             int ci, int iy, int ix, ref int exp_q[$], output int cycles);
    int oh, ow;
    oh = (ih + 2*p - k)/s + 1; ow = (iw + 2*p - k)/s + 1;
    cycles = 0;
    for (int ky = 0; ky < k; ky++)
      for (int kx = 0; kx < k; kx++) begin
        int lands = 0;
        for (int oy = 0; oy < oh; oy++)
          for (int ox = 0; ox < ow; ox++)
            if (oy*s - p + ky == iy && ox*s - p + kx == ix) begin
              lands = 1;
              for (int co = 0; co < cout; co++)
                exp_q.push_back((((co*cin + ci)*k + ky)*k + kx) * 65536 + (co*oh + oy)*ow + ox);
            end
        cycles += lands ? cout : 1;
      end
  endtask

  task automatic run_a(int ci, int iy, int ix);
    int exp_q[$], got_q[$], cyc, n;
    expect_list(CA, OA, KA, SA, PA, HA, WA, ci, iy, ix, exp_q, cyc);
    @(negedge clk); sa = 1; ch = CH_W'(ci); y = Y_W'(iy); x = X_W'(ix);
    @(negedge clk); sa = 0; n = 0;
    while (ba) begin
      if (ua) got_q.push_back(int'(wa) * 65536 + int'(va));
      n++;
      @(negedge clk);
    end
    checks += 2;
    if (got_q != exp_q) begin failures++; $display("FAIL A list (%0d,%0d,%0d): %0d vs %0d entries", ci, iy, ix, got_q.size(), exp_q.size()); end
    if (n != cyc) begin failures++; $display("FAIL A cycles %0d vs %0d", n, cyc); end
  endtask

  task automatic run_b(int ci, int iy, int ix);
    int exp_q[$], got_q[$], cyc, n;
    expect_list(CB, OB, KB, SB, PB, HB, WB, ci, iy, ix, exp_q, cyc);
    @(negedge clk); sb = 1; ch = CH_W'(ci); y = Y_W'(iy); x = X_W'(ix);
    @(negedge clk); sb = 0; n = 0;
    while (bb) begin
      if (ub) got_q.push_back(int'(wb) * 65536 + int'(vb));
      n++;
      @(negedge clk);
    end
    checks += 2;
    if (got_q != exp_q) begin failures++; $display("FAIL B list (%0d,%0d,%0d)", ci, iy, ix); end
    if (n != cyc) begin failures++; $display("FAIL B cycles %0d vs %0d", n, cyc); end
  endtask

  initial begin
    sa = 0; sb = 0; ch = '0; y = '0; x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // every input position of A, random channel
    for (int iy = 0; iy < HA; iy++)
      for (int ix = 0; ix < WA; ix++) run_a($urandom_range(CA-1), iy, ix);
    for (int iy = 0; iy < HB; iy++)
      for (int ix = 0; ix < WB; ix++) run_b($urandom_range(CB-1), iy, ix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
