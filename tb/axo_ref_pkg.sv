// axo_ref_pkg: integer reference model of the AXOL1TL datapath for the
// testbenches. It recomputes the encoder, the score and the seeds with 64-bit
// integers straight from the arithmetic definition (acc = b + sum w*x, floor
// shift by W_FRAC, ReLU on hidden layers, clamp to ACT_W bits; score =
// sum mu^2), independently of the RTL's loop structure and word widths. It
// also counts how often ReLU clipped and saturation occurred so a testbench
// can prove those paths were exercised.
package axo_ref_pkg;
  import axo_pkg::*;

  class axo_model;
    longint w1 [H1][N_IN];
    longint b1 [H1];
    longint w2 [H2][H1];
    longint b2 [H2];
    longint w3 [N_LATENT][H2];
    longint b3 [N_LATENT];
    int     n_relu;
    int     n_sat;

    function new();
      n_relu = 0;
      n_sat  = 0;
      foreach (w1[o, i]) w1[o][i] = 0;
      foreach (w2[o, i]) w2[o][i] = 0;
      foreach (w3[o, i]) w3[o][i] = 0;
      foreach (b1[o]) b1[o] = 0;
      foreach (b2[o]) b2[o] = 0;
      foreach (b3[o]) b3[o] = 0;
    endfunction

    static function longint rnd(longint lo, longint hi);
      return lo + longint'({$urandom, $urandom} % longint'(hi - lo + 1));
    endfunction

    function void randomize_net(longint wmax, longint bmax);
      foreach (w1[o, i]) w1[o][i] = rnd(-wmax, wmax);
      foreach (w2[o, i]) w2[o][i] = rnd(-wmax, wmax);
      foreach (w3[o, i]) w3[o][i] = rnd(-wmax, wmax);
      foreach (b1[o]) b1[o] = rnd(-bmax, bmax);
      foreach (b2[o]) b2[o] = rnd(-bmax, bmax);
      foreach (b3[o]) b3[o] = rnd(-bmax, bmax);
    endfunction

    // Configuration word for layer l (1..3) at local index idx.
    function longint cfg_value(int l, int idx);
      int ni, no;
      ni = (l == 1) ? N_IN : (l == 2) ? H1 : H2;
      no = (l == 1) ? H1   : (l == 2) ? H2 : N_LATENT;
      if (idx < ni * no) begin
        case (l)
          1: return w1[idx / ni][idx % ni];
          2: return w2[idx / ni][idx % ni];
          default: return w3[idx / ni][idx % ni];
        endcase
      end
      case (l)
        1: return b1[idx - ni * no];
        2: return b2[idx - ni * no];
        default: return b3[idx - ni * no];
      endcase
    endfunction

    function longint requant(longint acc, bit relu);
      longint v, hi, lo;
      hi = (longint'(1) << (ACT_W - 1)) - 1;
      lo = -(longint'(1) << (ACT_W - 1));
      // floor division by 2^W_FRAC
      v = (acc >= 0) ? acc / (longint'(1) << W_FRAC)
                     : -((-acc + (longint'(1) << W_FRAC) - 1) / (longint'(1) << W_FRAC));
      if (relu && v < 0) begin v = 0; n_relu++; end
      if (v > hi) begin v = hi; n_sat++; end
      if (v < lo) begin v = lo; n_sat++; end
      return v;
    endfunction

    function void encode(input longint x [N_IN], output longint mu [N_LATENT]);
      longint h1 [H1];
      longint h2 [H2];
      longint acc;
      for (int o = 0; o < H1; o++) begin
        acc = b1[o];
        for (int i = 0; i < N_IN; i++) acc += w1[o][i] * x[i];
        h1[o] = requant(acc, 1'b1);
      end
      for (int o = 0; o < H2; o++) begin
        acc = b2[o];
        for (int i = 0; i < H1; i++) acc += w2[o][i] * h1[i];
        h2[o] = requant(acc, 1'b1);
      end
      for (int o = 0; o < N_LATENT; o++) begin
        acc = b3[o];
        for (int i = 0; i < H2; i++) acc += w3[o][i] * h2[i];
        mu[o] = requant(acc, 1'b0);
      end
    endfunction

    static function longint score(longint mu [N_LATENT]);
      longint s;
      s = 0;
      for (int i = 0; i < N_LATENT; i++) s += mu[i] * mu[i];
      return s;
    endfunction
  endclass

endpackage
