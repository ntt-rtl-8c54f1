// ntt_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL's constant functions. It models the
// Cooley-Tukey flow (natural-order input, bit-reversed output) with the
// twiddle zeta[k] = psi^brv_S(k) mod Q, the iNTT procedure (bit-reversed
// input load, inverted twiddles, scaling by 2^-S), and, as a second
// independent check of the forward transform, direct evaluation of the
// polynomial at the odd powers psi^(2*brv(i)+1).
package ntt_ref_pkg;

  function automatic longint unsigned rpow(input longint unsigned b, input longint unsigned e,
                                           input longint unsigned q);
    longint unsigned r = 1;
    for (longint unsigned i = 0; i < e; i++) r = (r * b) % q;   // plain repeated product
    return r;
  endfunction

  function automatic longint unsigned rinv(input longint unsigned a, input longint unsigned q);
    // extended Euclid
    longint t = 0, nt = 1, r = longint'(q), nr = longint'(a), qq, tmp;
    while (nr != 0) begin
      qq = r / nr;
      tmp = t - qq * nt; t = nt; nt = tmp;
      tmp = r - qq * nr; r = nr; nr = tmp;
    end
    if (t < 0) t += longint'(q);
    return longint'(t);
  endfunction

  function automatic int unsigned rbrv(input int unsigned x, input int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) if (x & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // in-place Cooley-Tukey flow over `stages` stages
  function automatic void ct_flow(ref longint unsigned a [], input longint unsigned q,
                                  input longint unsigned psi, input int unsigned stages,
                                  input bit inverse);
    int unsigned n = a.size();
    int unsigned k = 0;
    int unsigned len = n / 2;
    longint unsigned z, t;
    for (int unsigned s = 0; s < stages; s++) begin
      for (int unsigned st = 0; st < n; st += 2 * len) begin
        k++;
        z = rpow(psi, rbrv(k, stages), q);
        if (inverse) z = rinv(z, q);
        for (int unsigned j = st; j < st + len; j++) begin
          t = (z * a[j + len]) % q;
          a[j + len] = (a[j] + q - t) % q;
          a[j] = (a[j] + t) % q;
        end
      end
      len = len / 2;
    end
  endfunction

  // expected output of the accelerator for one input vector
  function automatic void model(ref longint unsigned a [], input longint unsigned q,
                                input longint unsigned psi, input int unsigned stages,
                                input bit intt);
    int unsigned n = a.size();
    int unsigned lg = 0;
    longint unsigned b [];
    longint unsigned ninv;
    while ((1 << lg) < n) lg++;
    if (intt) begin
      b = new[n];
      for (int unsigned j = 0; j < n; j++) b[j] = a[rbrv(j, lg)];
      a = b;
    end
    ct_flow(a, q, psi, stages, intt);
    if (intt) begin
      ninv = rinv((longint'(1) << stages) % q, q);
      foreach (a[i]) a[i] = (a[i] * ninv) % q;
    end
  endfunction

  // forward transform by definition. With `stages` = log2 N (Dilithium):
  //   out[i] = a(x_i), x_i = psi^(2*brv(i)+1), a root of X^N + 1.
  // With one stage fewer (Kyber): out[2m+e] is coefficient e of
  //   a(X) mod (X^2 - x_m), x_m = psi^(2*brv(m)+1), i.e. sum_j a[2j+e] x_m^j.
  function automatic longint unsigned def_point(const ref longint unsigned a [],
                                                input longint unsigned q,
                                                input longint unsigned psi, input int unsigned stages,
                                                input int unsigned i);
    int unsigned n = a.size();
    int unsigned step = n >> stages;          // 1 (full depth) or 2
    int unsigned m = i / step, e = i % step;
    longint unsigned x = rpow(psi, 2 * rbrv(m, stages) + 1, q);
    longint unsigned acc = 0;
    for (int j = n / step - 1; j >= 0; j--) acc = (acc * x + a[step * j + e]) % q;   // Horner
    return acc;
  endfunction

endpackage
