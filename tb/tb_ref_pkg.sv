// tb_ref_pkg: bit-exact reference model of the canceller's arithmetic, written
// independently of the RTL for the self-checking testbenches.
//
// Numbers are signed Q-bit fixed point with FRAC fractional bits, carried in
// longint. A product is truncated by FRAC bits and saturated; every
// accumulation step in a PE saturates; the sums across PEs plus the bias are
// exact and saturated once. The layer models follow the documented PE
// assignment of the NBN and IBI schedules, because saturation makes the result
// depend on which products share a partial sum.
package tb_ref_pkg;

  function automatic longint sat(longint v, int q);
    longint mx, mn;
    mx = (longint'(1) <<< (q - 1)) - 1;
    mn = -(longint'(1) <<< (q - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic longint mul(longint a, longint b, int q, int frac);
    return sat((a * b) >>> frac, q);
  endfunction

  function automatic longint add(longint a, longint b, int q);
    return sat(a + b, q);
  endfunction

  // Dense layer in the NBN schedule. w[n*ne_in + i], b[n].
  function automatic void nbn_ref(input longint x[], input longint w[], input longint b[],
                                  input int ne_in, input int ne_out, input int npe,
                                  input int q, input int frac, input bit relu,
                                  output longint y[]);
    int k, ppn, cpg;
    k   = (npe > ne_in) ? npe / ne_in : 1;
    ppn = npe / k;
    cpg = (ne_in + ppn - 1) / ppn;
    y = new[ne_out];
    for (int n = 0; n < ne_out; n++) begin
      longint tot;
      tot = b[n];
      for (int ln = 0; ln < ppn; ln++) begin
        longint acc;
        acc = 0;
        for (int c = 0; c < cpg; c++) begin
          int i;
          i = c * ppn + ln;
          if (i < ne_in) acc = add(acc, mul(x[i], w[n*ne_in + i], q, frac), q);
        end
        tot += acc;
      end
      tot = sat(tot, q);
      if (relu && tot < 0) tot = 0;
      y[n] = tot;
    end
  endfunction

  // Dense layer in the IBI schedule. w[n*ne_in + i], b[n].
  function automatic void ibi_ref(input longint x[], input longint w[], input longint b[],
                                  input int ne_in, input int ne_out, input int npe,
                                  input int q, input int frac, input bit relu,
                                  output longint y[]);
    int k, nib;
    k   = (npe > ne_out) ? npe / ne_out : 1;
    nib = (ne_in + k - 1) / k;
    y = new[ne_out];
    for (int n = 0; n < ne_out; n++) begin
      longint tot;
      tot = b[n];
      for (int s = 0; s < k; s++) begin
        longint acc;
        acc = 0;
        for (int bt = 0; bt < nib; bt++) begin
          int i;
          i = bt * k + s;
          if (i < ne_in) acc = add(acc, mul(x[i], w[n*ne_in + i], q, frac), q);
        end
        tot += acc;
      end
      tot = sat(tot, q);
      if (relu && tot < 0) tot = 0;
      y[n] = tot;
    end
  endfunction

  // Complex product in the textbook four-multiplier form.
  function automatic void cmul(input longint ar, input longint ai, input longint br, input longint bi,
                               input int q, input int frac, output longint pr, output longint pi);
    pr = sat((ar * br - ai * bi) >>> frac, q);
    pi = sat((ar * bi + ai * br) >>> frac, q);
  endfunction

  // Linear canceller with ncpe complex PEs, tap l handled by PE l % ncpe.
  function automatic void lin_ref(input longint xr[], input longint xi[],
                                  input longint hr[], input longint hi[],
                                  input int l_taps, input int ncpe, input int q, input int frac,
                                  output longint yr, output longint yi);
    longint tr, ti;
    tr = 0;
    ti = 0;
    for (int c = 0; c < ncpe; c++) begin
      longint ar, ai, pr, pi;
      ar = 0;
      ai = 0;
      for (int l = c; l < l_taps; l += ncpe) begin
        cmul(xr[l], xi[l], hr[l], hi[l], q, frac, pr, pi);
        ar = add(ar, pr, q);
        ai = add(ai, pi, q);
      end
      tr += ar;
      ti += ai;
    end
    yr = sat(tr, q);
    yi = sat(ti, q);
  endfunction

  function automatic longint denorm(longint v, int s, int q);
    if (s >= 0) return sat(v * (longint'(1) <<< s), q);
    else        return sat(v >>> (-s), q);
  endfunction

  // Random signed value of about `bits` bits of magnitude.
  function automatic longint rnd(int bits);
    longint r;
    r = longint'($urandom_range(0, (1 << bits) - 1)) - longint'(1 << (bits - 1));
    return r;
  endfunction

endpackage
