// dbu_ref_pkg: reference models used by the testbenches.
//
// Bit-exact integer models of the merged Householder stage and the phase
// module, written directly from the arithmetic definition (inner products,
// merged-stage coefficients, rounding to nearest with ties up, saturation),
// plus floating-point helpers for the ideal transform and random stimulus.
// Complex vectors are kept as separate int arrays of real and imaginary
// parts, in the integer units of their fixed-point format.
package dbu_ref_pkg;

  // round a value with in_f fraction bits to out_w bits / out_f fraction bits
  function automatic longint rq(longint v, int in_f, int out_w, int out_f);
    longint r, mx, mn;
    int sh = in_f - out_f;
    if (sh > 0) r = (v + (longint'(1) << (sh - 1))) >>> sh;
    else        r = v;
    mx = (longint'(1) << (out_w - 1)) - 1;
    mn = -(longint'(1) << (out_w - 1));
    if (r > mx) return mx;
    if (r < mn) return mn;
    return r;
  endfunction

  // bit-exact merged Householder stage: y = H_second H_first x
  function automatic void hh_model(input int n, input bit rev,
                                   ref int u1r[], ref int u1i[], ref int u2r[], ref int u2i[],
                                   ref int xr[], ref int xi[], ref int yr[], ref int yi[]);
    longint rr = 0, ri = 0, a1r = 0, a1i = 0, a2r = 0, a2i = 0;
    longint q_rr, q_ri, q1r, q1i, q2r, q2i, fr, fi, sr, si, er, ei, pr, pi;
    longint cfr, cfi, csr, csi, c1r, c1i, c2r, c2i, mr, mi, cr, ci;
    for (int k = 0; k < n; k++) begin
      // conj(u2) * u1
      rr += longint'(u2r[k]) * u1r[k] + longint'(u2i[k]) * u1i[k];
      ri += longint'(u2r[k]) * u1i[k] - longint'(u2i[k]) * u1r[k];
      // conj(u) * x
      a1r += longint'(u1r[k]) * xr[k] + longint'(u1i[k]) * xi[k];
      a1i += longint'(u1r[k]) * xi[k] - longint'(u1i[k]) * xr[k];
      a2r += longint'(u2r[k]) * xr[k] + longint'(u2i[k]) * xi[k];
      a2i += longint'(u2r[k]) * xi[k] - longint'(u2i[k]) * xr[k];
    end
    q_rr = rq(rr, 20, 12, 6);  q_ri = rq(ri, 20, 12, 6);
    q1r  = rq(a1r, 16, 12, 6); q1i  = rq(a1i, 16, 12, 6);
    q2r  = rq(a2r, 16, 12, 6); q2i  = rq(a2i, 16, 12, 6);
    if (!rev) begin fr = q1r; fi = q1i; sr = q2r; si = q2i; er = q_rr; ei = q_ri;  end
    else      begin fr = q2r; fi = q2i; sr = q1r; si = q1i; er = q_rr; ei = -q_ri; end
    pr  = fr * er - fi * ei;                 // 12 fraction bits
    pi  = fr * ei + fi * er;
    cfr = rq(2 * fr, 6, 12, 6);
    cfi = rq(2 * fi, 6, 12, 6);
    csr = rq(2 * sr * 64 - 4 * pr, 12, 12, 6);
    csi = rq(2 * si * 64 - 4 * pi, 12, 12, 6);
    if (!rev) begin c1r = cfr; c1i = cfi; c2r = csr; c2i = csi; end
    else      begin c1r = csr; c1i = csi; c2r = cfr; c2i = cfi; end
    for (int k = 0; k < n; k++) begin
      mr = c1r * u1r[k] - c1i * u1i[k] + c2r * u2r[k] - c2i * u2i[k];
      mi = c1r * u1i[k] + c1i * u1r[k] + c2r * u2i[k] + c2i * u2r[k];
      cr = rq(mr, 16, 12, 6);
      ci = rq(mi, 16, 12, 6);
      yr[k] = int'(rq(longint'(xr[k]) - cr, 6, 10, 6));
      yi[k] = int'(rq(longint'(xi[k]) - ci, 6, 10, 6));
    end
  endfunction

  // bit-exact phase module: y = p x or conj(p) x
  function automatic void phase_model(input int n, input bit cj, ref int pr[], ref int pi[],
                                      ref int xr[], ref int xi[], ref int yr[], ref int yi[]);
    longint ai, mr, mi;
    for (int k = 0; k < n; k++) begin
      ai = cj ? -pi[k] : pi[k];
      mr = longint'(pr[k]) * xr[k] - ai * xi[k];
      mi = longint'(pr[k]) * xi[k] + ai * xr[k];
      yr[k] = int'(rq(mr, 16, 10, 6));
      yi[k] = int'(rq(mi, 16, 10, 6));
    end
  endfunction

  // uniform real in [-1, 1)
  function automatic real urand_pm1();
    return (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
  endfunction

  // random unit-norm complex vector in Q(12,10) integer units
  function automatic void rand_unit(input int n, ref int ur[], ref int ui[]);
    real vr[], vi[];
    real nrm = 0.0;
    vr = new[n]; vi = new[n];
    for (int k = 0; k < n; k++) begin
      vr[k] = urand_pm1(); vi[k] = urand_pm1();
      nrm += vr[k] * vr[k] + vi[k] * vi[k];
    end
    nrm = $sqrt(nrm);
    for (int k = 0; k < n; k++) begin
      ur[k] = $rtoi(vr[k] / nrm * 1024.0 + (vr[k] >= 0 ? 0.5 : -0.5));
      ui[k] = $rtoi(vi[k] / nrm * 1024.0 + (vi[k] >= 0 ? 0.5 : -0.5));
    end
  endfunction

  // random 16QAM sample (unit average power) in Q(10,6) integer units
  function automatic int qam16_q6();
    int lv = ($urandom % 4);
    real a = (2.0 * lv - 3.0) / $sqrt(10.0);
    return $rtoi(a * 64.0 + (a >= 0 ? 0.5 : -0.5));
  endfunction

  // ideal (double precision) Householder reflection y = x - 2 u (u^H x)
  function automatic void hh_ideal(input int n, ref real ur[], ref real ui[], ref real xr[], ref real xi[]);
    real ar = 0.0, ai = 0.0, tr, ti;
    for (int k = 0; k < n; k++) begin
      ar += ur[k] * xr[k] + ui[k] * xi[k];
      ai += ur[k] * xi[k] - ui[k] * xr[k];
    end
    for (int k = 0; k < n; k++) begin
      tr = ur[k] * ar - ui[k] * ai;
      ti = ur[k] * ai + ui[k] * ar;
      xr[k] -= 2.0 * tr;
      xi[k] -= 2.0 * ti;
    end
  endfunction

endpackage
