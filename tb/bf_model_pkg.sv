// bf_model_pkg: software reference for the testbenches of the layered BIKE
// bit-flipping decoder.
//
// It draws random circulant keys and error vectors, forms the syndrome
// s = H e, and decodes with the column-layered new BF algorithm written
// directly from its definition (no pipelining, no banks): per block of L
// columns count sigma with the current s, flip columns with sigma >= T,
// XOR the flipped columns into s at once, track |s| by |s| += d - 2 sigma.
// Thresholds use exact integer arithmetic on the fixed-point coefficients:
// T = ceil(max(f(|s|), T_i)) with f(x) = (A_MANT*x)/2^A_FRAC + B_FIX/2^B_FRAC.
package bf_model_pkg;

  typedef int unsigned uint_q[$];

  // d distinct row indices in [0, r), ascending if sorted is set
  function automatic void gen_support(input int r, input int d, output int sup[], input bit sorted = 1'b0);
    bit used[];
    used = new[r];
    sup  = new[d];
    for (int k = 0; k < d; k++) begin
      int p;
      do p = int'($urandom_range(r - 1, 0)); while (used[p]);
      used[p] = 1'b1;
      sup[k]  = p;
    end
    if (sorted) sup.sort();
  endfunction

  // Make sup[j] = sup[i] + 1 (mod r), keeping the entries distinct: the
  // diagonals of entries i and j then share syndrome words.
  function automatic void force_neighbour(ref int sup[], input int i, input int j, input int r);
    int v, k;
    v = (sup[i] + 1) % r;
    k = -1;
    foreach (sup[n]) if (sup[n] == v) k = n;
    if (k >= 0) begin
      sup[k] = sup[j];
      sup[j] = v;
    end else sup[j] = v;
  endfunction

  // ceil(num / den) for num >= 0
  function automatic longint ceil_div(input longint num, input longint den);
    return (num + den - 1) / den;
  endfunction

  function automatic int threshold(input int it, input longint w, input longint tp_fx,
                                   input int a_mant, input int a_frac, input int b_fix,
                                   input int b_frac, input int m, input int delta);
    longint one, f_fx, cf, ci;
    one  = longint'(1) << a_frac;
    if (w < 0) w = 0;
    f_fx = longint'(a_mant) * w + (longint'(b_fix) << (a_frac - b_frac));
    cf   = ceil_div(f_fx, one);
    case (it)
      1:       ci = ceil_div(tp_fx, one) + delta;
      2:       ci = ceil_div(2 * tp_fx + longint'(m) * one, 3 * one) + delta;
      3:       ci = ceil_div(tp_fx + longint'(2 * m) * one, 3 * one) + delta;
      default: ci = m + delta;
    endcase
    return int'((cf > ci) ? cf : ci);
  endfunction

  // Syndrome of error vector e (length 2r) for column-0 supports h0, h1.
  function automatic void syndrome(input int r, input int h0[], input int h1[],
                                   input bit e[], output bit s[]);
    s = new[r];
    for (int j = 0; j < 2 * r; j++)
      if (e[j]) begin
        int c = (j < r) ? j : j - r;
        for (int k = 0; k < h0.size(); k++)
          s[(((j < r) ? h0[k] : h1[k]) + c) % r] ^= 1'b1;
      end
  endfunction

  // Layered decode. thr_log[i-1] = threshold of iteration i.
  function automatic void decode(input int r, input int l, input int imax,
                                 input int a_mant, input int a_frac, input int b_fix,
                                 input int b_frac, input int delta,
                                 input int h0[], input int h1[], input bit s_in[],
                                 output bit e[], output bit succ, output int thr_log[],
                                 output int flips, output int multi_flip_blocks);
    bit s[];
    int d, m, w, nblk, sig[];
    longint tp_fx;
    d = h0.size();
    m = (d + 1) / 2;
    s = s_in;
    e = new[2 * r];
    sig = new[l];
    thr_log = new[imax];
    nblk = 2 * r / l;
    flips = 0;
    multi_flip_blocks = 0;
    w = 0;
    foreach (s[i]) w += s[i];
    tp_fx = longint'(a_mant) * w + (longint'(b_fix) << (a_frac - b_frac));
    for (int it = 1; it <= imax; it++) begin
      int t = threshold(it, w, tp_fx, a_mant, a_frac, b_fix, b_frac, m, delta);
      thr_log[it-1] = t;
      for (int b = 0; b < nblk; b++) begin
        int nf = 0;
        for (int ln = 0; ln < l; ln++) begin
          int j = b * l + ln;
          int c = (j < r) ? j : j - r;
          sig[ln] = 0;
          for (int k = 0; k < d; k++)
            sig[ln] += s[(((j < r) ? h0[k] : h1[k]) + c) % r];
        end
        for (int ln = 0; ln < l; ln++)
          if (sig[ln] >= t) begin
            int j = b * l + ln;
            int c = (j < r) ? j : j - r;
            nf++;
            e[j] ^= 1'b1;
            for (int k = 0; k < d; k++)
              s[(((j < r) ? h0[k] : h1[k]) + c) % r] ^= 1'b1;
            w += d - 2 * sig[ln];
          end
        flips += nf;
        if (nf > 1) multi_flip_blocks++;
      end
    end
    succ = 1'b1;
    foreach (s[i]) if (s[i]) succ = 1'b0;
  endfunction

endpackage
