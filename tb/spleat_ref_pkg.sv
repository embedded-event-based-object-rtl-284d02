// spleat_ref_pkg -- behavioural reference model of one convolutional spiking layer,
// used by the testbenches to predict what the RTL must produce.
//
// The model keeps weights, biases and potentials in plain integer arrays and applies the
// neuron rules directly: a spike adds the weight of every tap it reaches to the target
// potential (saturating to the signed V_W range), and the fire step computes H = V + bias,
// spikes and resets to 0 when H >= threshold, otherwise stores floor(H * decay / 2^FRAC).
// Spikes are produced in (channel, row, column) order.  Counters record how often each
// rule was exercised so that the testbenches can check coverage.
package spleat_ref_pkg;

  typedef struct {
    int kind;   // 0 spike, 1 end of step, 2 clear (same numbering as the RTL)
    int ch;
    int y;
    int x;
  } ref_tok_t;

  // Deterministic pseudo-random value in [lo, hi] from a seed and an index.
  function automatic int hash_range(int seed, int idx, int lo, int hi);
    int unsigned h;
    h = 32'(idx) * 32'd2654435761 + 32'(seed) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return lo + int'(h % 32'(hi - lo + 1));
  endfunction

  class layer_model;
    int cin, cout, k, s, p, ih, iw, oh, ow;
    int vw, frac;
    int w[];
    int bias[];
    int v[];
    int thresh, decay;
    // coverage counters
    int n_updates, n_sat, n_fire, n_leak, n_pad_skips;

    function new(int cin_, int cout_, int k_, int s_, int p_, int ih_, int iw_, int vw_ = 16, int frac_ = 8);
      cin = cin_; cout = cout_; k = k_; s = s_; p = p_; ih = ih_; iw = iw_;
      vw = vw_; frac = frac_;
      oh = (ih + 2 * p - k) / s + 1;
      ow = (iw + 2 * p - k) / s + 1;
      w    = new[cout * cin * k * k];
      bias = new[cout];
      v    = new[cout * oh * ow];
      thresh = 1 << frac;
      decay  = 1 << frac;
      foreach (v[i]) v[i] = 0;
      foreach (bias[i]) bias[i] = 0;
    endfunction

    function int sat(longint a);
      longint mx, mn;
      mx = (longint'(1) << (vw - 1)) - 1;
      mn = -(longint'(1) << (vw - 1));
      if (a > mx) begin n_sat++; return int'(mx); end
      if (a < mn) begin n_sat++; return int'(mn); end
      return int'(a);
    endfunction

    function int widx(int co, int ci, int ky, int kx);
      return ((co * cin + ci) * k + ky) * k + kx;
    endfunction

    function void integrate(int ci, int y, int x);
      for (int ky = 0; ky < k; ky++) begin
        for (int kx = 0; kx < k; kx++) begin
          int ty, tx, oy, ox;
          ty = y + p - ky;
          tx = x + p - kx;
          if (ty < 0 || tx < 0 || (ty % s) != 0 || (tx % s) != 0) continue;
          oy = ty / s;
          ox = tx / s;
          if (oy >= oh || ox >= ow) begin n_pad_skips++; continue; end
          for (int co = 0; co < cout; co++) begin
            int a;
            a = (co * oh + oy) * ow + ox;
            v[a] = sat(longint'(v[a]) + longint'(w[widx(co, ci, ky, kx)]));
            n_updates++;
          end
        end
      end
    endfunction

    // Fire step; appends the spikes and the closing end-of-step token to q.
    function void fire(ref ref_tok_t q[$]);
      for (int co = 0; co < cout; co++)
        for (int oy = 0; oy < oh; oy++)
          for (int ox = 0; ox < ow; ox++) begin
            int a, h;
            longint lk;
            a = (co * oh + oy) * ow + ox;
            h = sat(longint'(v[a]) + longint'(bias[co]));
            if (h >= thresh) begin
              q.push_back('{0, co, oy, ox});
              v[a] = 0;
              n_fire++;
            end else begin
              lk = (longint'(h) * longint'(decay)) >>> frac;
              v[a] = sat(lk);
              if (decay != (1 << frac) && h != 0) n_leak++;
            end
          end
      q.push_back('{1, 0, 0, 0});
    endfunction

    function void clear(ref ref_tok_t q[$]);
      foreach (v[i]) v[i] = 0;
      q.push_back('{2, 0, 0, 0});
    endfunction
  endclass

endpackage
