// ntt_pkg: design-time constant arithmetic shared by the constant-optimized
// NTT datapath.
//
// Every value the datapath treats as a constant -- the modulus width n, the
// Barrett factor R = floor(4^n / Q), each butterfly's twiddle factor and its
// modular inverse, the iNTT normalization factor and the signed-digit recoding
// of every constant multiplier -- is computed here by constant functions while
// the design elaborates, so no twiddle table or constant register exists in
// the hardware. The functions are only evaluated at elaboration time.
//
// Twiddle convention (the published 8-point flow, Cooley-Tukey, natural-order input,
// bit-reversed output): stage s (0-based) of an S-stage transform uses the
// constants zeta[k] = psi^brv_S(k) mod Q for k = 2^s .. 2^(s+1)-1, where psi
// is a primitive 2^(S+1)-th root of unity. This is the ordering of the
// Dilithium/Kyber reference transforms; the choice of psi is the user's.
package ntt_pkg;

  // Ring of the main configuration: ML-DSA (Dilithium), Q = 8380417, N = 256.
  localparam longint unsigned DILITHIUM_Q   = 64'd8380417;
  localparam int unsigned     DILITHIUM_N   = 256;
  localparam int unsigned     DILITHIUM_S   = 8;
  localparam longint unsigned DILITHIUM_PSI = 64'd1753;   // primitive 512th root

  // Second evaluated ring: ML-KEM (Kyber), Q = 3329, N = 256, seven stages.
  localparam longint unsigned KYBER_Q   = 64'd3329;
  localparam int unsigned     KYBER_N   = 256;
  localparam int unsigned     KYBER_S   = 7;
  localparam longint unsigned KYBER_PSI = 64'd17;         // primitive 256th root

  // n = ceil(log2 Q)
  function automatic int unsigned mod_bits(input longint unsigned q);
    int unsigned b;
    b = 0;
    while ((64'd1 << b) < q) b++;
    return b;
  endfunction

  // R = floor(4^n / Q), the Barrett factor
  function automatic longint unsigned barrett_r(input longint unsigned q);
    return (64'd1 << (2 * mod_bits(q))) / q;
  endfunction

  // (a * b) mod q for a, b < q < 2^32
  function automatic longint unsigned mulmod(input longint unsigned a,
                                             input longint unsigned b,
                                             input longint unsigned q);
    return (a * b) % q;
  endfunction

  function automatic longint unsigned powmod(input longint unsigned base,
                                             input longint unsigned e,
                                             input longint unsigned q);
    longint unsigned r, b, x;
    r = 64'd1 % q;
    b = base % q;
    x = e;
    while (x != 0) begin
      if (x[0]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
      x = x >> 1;
    end
    return r;
  endfunction

  // modular inverse by Fermat's little theorem (q prime)
  function automatic longint unsigned invmod(input longint unsigned a,
                                             input longint unsigned q);
    return powmod(a, q - 2, q);
  endfunction

  // reverse the low `bits` bits of x
  function automatic int unsigned bitrev(input int unsigned x, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  // forward twiddle of butterfly group k (1 <= k < 2^S)
  function automatic longint unsigned twiddle(input longint unsigned q,
                                              input longint unsigned psi,
                                              input int unsigned stages,
                                              input int unsigned k);
    return powmod(psi, longint'(bitrev(k, stages)), q);
  endfunction

  // Canonical signed-digit recoding of a constant: digit i is +1 where
  // pos[i] is set, -1 where neg[i] is set. No two adjacent digits are
  // non-zero, so the number of adders/subtractors is minimal among all
  // single-constant signed-binary forms (not in general over all
  // shift-add graphs).
  function automatic longint unsigned csd_pos(input longint unsigned c);
    longint unsigned x, p;
    p = 0;
    x = c;
    for (int i = 0; i < 63; i++) begin
      if (x[0]) begin
        if (x[1]) x = x + 1;            // digit -1
        else begin p[i] = 1'b1; x = x - 1; end
      end
      x = x >> 1;
    end
    return p;
  endfunction

  function automatic longint unsigned csd_neg(input longint unsigned c);
    longint unsigned x, m;
    m = 0;
    x = c;
    for (int i = 0; i < 63; i++) begin
      if (x[0]) begin
        if (x[1]) begin m[i] = 1'b1; x = x + 1; end
        else x = x - 1;
      end
      x = x >> 1;
    end
    return m;
  endfunction

  // number of adders/subtractors of the CSD shift-add form of c
  function automatic int unsigned csd_adders(input longint unsigned c);
    longint unsigned d;
    int unsigned cnt;
    d = csd_pos(c) | csd_neg(c);
    cnt = 0;
    for (int i = 0; i < 64; i++) cnt += int'(d[i]);
    return (cnt == 0) ? 0 : cnt - 1;
  endfunction

endpackage
