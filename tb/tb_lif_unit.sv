// tb_lif_unit -- self-checking test of the neuron arithmetic against integer formulas:
// saturating add, threshold test, hard reset to 0 and floor(H*decay/256) leak in Q8.8.
module tb_lif_unit;
  logic signed [15:0] v_in, w_in, thresh, acc_out, v_next;
  logic [8:0] decay;
  logic fire;
  int checks = 0, failures = 0;

  lif_unit #(.V_W(16), .W_W(16), .FRAC(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int satv(longint a);
    if (a > 32767) return 32767;
    if (a < -32768) return -32768;
    return int'(a);
  endfunction

  task automatic one(int v, int w, int t, int d);
    int h, en, ef;
    v_in = 16'(v); w_in = 16'(w); thresh = 16'(t); decay = 9'(d);
    #1;
    h  = satv(longint'(v) + longint'(w));
    ef = (h >= t);
    en = ef ? 0 : satv((longint'(h) * longint'(d)) >>> 8);
    checks += 3;
    if (int'(acc_out) != h)  begin failures++; $display("FAIL acc %0d+%0d got %0d exp %0d", v, w, acc_out, h); end
    if (int'(fire) != ef)    begin failures++; $display("FAIL fire h=%0d t=%0d", h, t); end
    if (int'(v_next) != en)  begin failures++; $display("FAIL next h=%0d d=%0d got %0d exp %0d", h, d, v_next, en); end
  endtask

  initial begin
    // directed: Q8.8 values
    one(256, 256, 512, 256);        // 1.0 + 1.0 reaches threshold 2.0 -> fire, reset
    one(256, 255, 512, 128);        // just below -> leak by half
    one(-300, -5, 256, 128);        // negative, floor rounding
    one(32000, 1000, 32767, 256);   // positive saturation
    one(-32000, -1000, 0, 200);     // negative saturation
    one(100, 0, 256, 256);          // IF: no leak
    for (int n = 0; n < 20000; n++)
      one($signed(16'($urandom)), $signed(16'($urandom)) >>> ($urandom_range(8)),
          $signed(16'($urandom)), $urandom_range(256));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
