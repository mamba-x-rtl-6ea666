// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL.
// Rounding right shifts are computed in double precision as floor(x / 2^s + 0.5), table
// lookups by linear search, the scan by the plain sequential recurrence or an explicit
// Kogge-Stone tree. Values stay far below 2^53, so the doubles are exact.
package tb_ref_pkg;

  function automatic longint rshift(longint x, int s);
    real r;
    if (s > 0) begin
      r = $floor(real'(x) / (2.0 ** s) + 0.5);
      return longint'(r);
    end
    return x * (longint'(1) << (-s));
  endfunction

  function automatic longint clamp(longint x, longint lo, longint hi);
    if (x < lo) return lo;
    if (x > hi) return hi;
    return x;
  endfunction

  function automatic longint c8(longint x);  return clamp(x, -128, 127);       endfunction
  function automatic longint c16(longint x); return clamp(x, -32768, 32767);   endfunction
  function automatic longint cq(longint x);  return clamp(x, -(1 << 23), (1 << 23) - 1); endfunction

  // one scan step: earlier (pl, ql), later (ph, qh)
  function automatic void spe_ref(input longint pl, ql, ph, qh, input int k,
                                  output longint po, qo);
    po = c8(rshift(pl * ph, k));
    qo = cq(rshift(ph * ql, k) + qh);
  endfunction

  // Kogge-Stone scan over n positions, Q given on the INT8 grid, result with 2 frac bits
  function automatic void ks_ref(input int n, input longint p[], input longint q[], input int k,
                                 output longint pp[], output longint qs[]);
    longint pc[], qc[], pn[], qn[];
    pc = new[n]; qc = new[n]; pn = new[n]; qn = new[n];
    for (int i = 0; i < n; i++) begin pc[i] = p[i]; qc[i] = q[i] * 4; end
    for (int d = 1; d < n; d = d * 2) begin
      for (int i = 0; i < n; i++) begin
        if (i >= d) spe_ref(pc[i-d], qc[i-d], pc[i], qc[i], k, pn[i], qn[i]);
        else begin pn[i] = pc[i]; qn[i] = qc[i]; end
      end
      pc = pn; qc = qn;
      pn = new[n]; qn = new[n];
    end
    pp = pc; qs = qc;
  endfunction

  // piecewise-linear function: bp[0..ne-2], a[0..ne-1] (Q4.12), b[0..ne-1] (Q8.8), x Q8.8
  function automatic longint pwl_ref(input longint x, input int ne, input longint bp[],
                                     input longint a[], input longint b[]);
    int seg;
    seg = 0;
    for (int i = 0; i < ne - 1; i++) if (x >= bp[i]) seg = i + 1;
    return c16(rshift(a[seg] * x, 12) + b[seg]);
  endfunction

  // 16-entry chord table of exp over [-8.5, 0] in the SFU formats (bp, b: Q8.8; a: Q4.12)
  function automatic void exp_table(output longint bp[], output longint ca[], output longint cb[]);
    real h, xl, xr, a;
    bp = new[31]; ca = new[32]; cb = new[32];
    for (int i = 0; i < 31; i++) bp[i] = 0;
    for (int i = 0; i < 32; i++) begin ca[i] = 0; cb[i] = 0; end
    h = 8.5 / 14.0;
    for (int i = 0; i < 15; i++) bp[i] = longint'($floor((-8.5 + i * h) * 256.0 + 0.5));
    for (int s = 0; s < 16; s++) begin
      if (s == 0) begin xl = -8.5; a = 0.0; end
      else if (s == 15) begin xl = 0.0; a = 0.0; end
      else begin
        xl = real'(bp[s-1]) / 256.0; xr = real'(bp[s]) / 256.0;
        a = ($exp(xr) - $exp(xl)) / (xr - xl);
      end
      ca[s] = longint'($floor(a * 4096.0 + 0.5));
      cb[s] = longint'($floor(($exp(xl) - a * xl) * 256.0 + 0.5));
    end
  endfunction

  // Selective SSM of one channel over nseg segments of 128 positions (8 chunks of 16),
  // bit-exact to the datapath: exp by table, P on the 2^-k grid, Kogge-Stone inside each
  // chunk, chunk-to-chunk and segment-to-segment carry, MAC over 16 state rows, times Z.
  // dl/ul/zl[s*128+l], bm/cm[(s*16+m)*128+l], am[m]. y_seq is the same computation with
  // a plain sequential recurrence in floating point (for a loose cross-check).
  function automatic void ssm_ref(input int nseg, input longint dl[], input longint ul[],
      input longint zl[], input longint bm[], input longint cm[], input longint am[],
      input int sh0, input int sh1, input int sh2, input int k,
      input longint bp[], input longint ca[], input longint cb[],
      output longint y[], output longint y_seq[]);
    longint carry [16], acc [128], p [128], q [128], pj[], qj[], pp[], qs[], st, c;
    real    sr [16], accr [128], yr;
    y = new[nseg * 128]; y_seq = new[nseg * 128];
    for (int m = 0; m < 16; m++) begin carry[m] = 0; sr[m] = 0.0; end
    for (int s = 0; s < nseg; s++) begin
      for (int l = 0; l < 128; l++) begin acc[l] = 0; accr[l] = 0.0; end
      for (int m = 0; m < 16; m++) begin
        for (int l = 0; l < 128; l++) begin
          longint x16, e, d;
          d = dl[s*128+l];
          x16 = c16(rshift(d * am[m], sh0));
          e = pwl_ref(x16, 16, bp, ca, cb);
          p[l] = c8(rshift(e, 8 - k));
          q[l] = c8(rshift(d * bm[(s*16+m)*128+l] * ul[s*128+l], sh1));
        end
        c = carry[m];
        for (int j = 0; j < 8; j++) begin
          pj = new[16]; qj = new[16];
          for (int i = 0; i < 16; i++) begin pj[i] = p[j*16+i]; qj[i] = q[j*16+i]; end
          ks_ref(16, pj, qj, k, pp, qs);
          for (int i = 0; i < 16; i++) begin
            st = cq(rshift(pp[i] * c, k) + qs[i]);
            acc[j*16+i] += st * cm[(s*16+m)*128+j*16+i];
            if (i == 15) c = st;
          end
        end
        carry[m] = c;
        for (int l = 0; l < 128; l++) begin
          sr[m] = real'(p[l]) / (2.0 ** k) * sr[m] + 4.0 * real'(q[l]);
          accr[l] += sr[m] * real'(cm[(s*16+m)*128+l]);
        end
      end
      for (int l = 0; l < 128; l++) begin
        y[s*128+l] = c8(rshift(acc[l] * zl[s*128+l], sh2));
        yr = $floor(accr[l] * real'(zl[s*128+l]) / (2.0 ** sh2) + 0.5);
        if (yr > 127.0) yr = 127.0;
        if (yr < -128.0) yr = -128.0;
        y_seq[s*128+l] = longint'(yr);
      end
    end
  endfunction

endpackage
