// tb_hdc_ref_pkg -- reference model of the encoder datapath for the
// testbenches. It restates each stage as a plain function on W-bit vectors
// (the wiring functions of hdc_pkg define which random permutation is
// meant; everything else is written here independently of the RTL).
package tb_hdc_ref_pkg;
  import hdc_pkg::*;

  class ref_model #(int W = 256);
    typedef logic [W-1:0] vec_t;
    static function int lw();
      return $clog2(W);
    endfunction

    static function vec_t seed();
      vec_t v;
      for (int i = 0; i < W; i++) v[i] = seed_bit(i);
      return v;
    endfunction

    // y[i] = x[p(i)] ; inverse: y[p(i)] = x[i]
    static function vec_t perm(vec_t x, int unsigned s, bit inv);
      vec_t y;
      for (int i = 0; i < W; i++) begin
        int p;
        p = perm_idx(i, s, lw());
        if (inv) y[p] = x[i];
        else     y[i] = x[p];
      end
      return y;
    endfunction

    static function vec_t mix(vec_t x, bit en, bit inv, bit sel);
      if (!en) return x;
      return perm(x, sel ? PI1_SEED : PI0_SEED, inv);
    endfunction

    static function vec_t sm_mask(int w);
      vec_t spread;
      int rep;
      rep = W / 128;
      for (int i = 0; i < W; i++) spread[i] = ((i / rep) < w);
      return perm(spread, SM_SEED, 1'b0);
    endfunction

    static function vec_t sm(vec_t x, bit en, int w);
      return en ? (x ^ sm_mask(w)) : x;
    endfunction

    // Item vector of word w with n bits: pi_{w_k} applied LSB first.
    static function vec_t im_map(vec_t start, int unsigned w, int n);
      vec_t v;
      v = start;
      for (int k = 0; k < n; k++) v = mix(v, 1'b1, 1'b0, w[k]);
      return v;
    endfunction

    // Bitwise majority of a list of vectors as a 5-bit saturating counter
    // would give it (counter > 0 -> 1).
    static function vec_t bundle(vec_t vs[$]);
      vec_t r;
      for (int i = 0; i < W; i++) begin
        int c;
        c = 0;
        foreach (vs[j]) begin
          if (vs[j][i]) begin if (c < 15) c++; end
          else begin if (c > -16) c--; end
        end
        r[i] = (c > 0);
      end
      return r;
    endfunction
  endclass
endpackage
