// tb_ref_pkg: software reference models for the HF-NTT testbenches.
//
// Plain integer arithmetic, independent of the RTL: modular power and
// multiply, bit reversal, the negacyclic forward NTT (Cooley-Tukey, natural in,
// bit-reversed out), the inverse NTT (Gentleman-Sande, bit-reversed in,
// natural out, scaled by 1/N) and the schoolbook product modulo x^N + 1.
// Test moduli: two NTT-friendly primes with q = 1 mod 8192 and a primitive
// 8192-th root of unity for each, so every N up to 4096 is covered
// (psi_N = psi_4096^(4096/N)). The workload sets (wl_q, wl_psi) add the
// 14-bit prime 12289, six 30-bit primes whose product is a 180-bit RNS
// modulus, and a 32-bit prime with roots of unity up to order 2^17.
package tb_ref_pkg;

  localparam longint unsigned Q0    = 64'd4294828033;  // 0xfffde001, 32 bits
  localparam longint unsigned PSI0  = 64'd1953722822;  // order 8192 mod Q0
  localparam longint unsigned Q1    = 64'd1073692673;  // 0x3fff4001, 30 bits
  localparam longint unsigned PSI1  = 64'd510015274;   // order 8192 mod Q1

  function automatic longint unsigned mulm(longint unsigned a, longint unsigned b,
                                           longint unsigned q);
    return (a * b) % q;  // a, b < 2^32
  endfunction

  function automatic longint unsigned powm(longint unsigned b, longint unsigned e,
                                           longint unsigned q);
    longint unsigned r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = mulm(r, b, q);
      b = mulm(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic int unsigned brv(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  function automatic int unsigned clog2(int unsigned x);
    int unsigned r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  // Primitive 2N-th root for a test modulus.
  function automatic longint unsigned psi_for(longint unsigned q, longint unsigned psi8192,
                                              int unsigned n_len);
    return powm(psi8192, 4096 / n_len, q);
  endfunction

  // Barrett constants of the RTL: k = ceil(log2 q), m = floor(2^(2k) / q).
  function automatic int unsigned k_of(longint unsigned q);
    int unsigned k = 0;
    while ((64'd1 << k) < q) k++;
    return k;
  endfunction

  function automatic longint unsigned m_of(longint unsigned q);
    int unsigned k = k_of(q);
    // 2^(2k) does not fit in 64 bits for k = 32: divide in two steps.
    longint unsigned hi = (64'd1 << k) / q;
    longint unsigned rem = (64'd1 << k) % q;
    longint unsigned acc = hi << k;
    // (rem * 2^k) / q, computed bit by bit
    for (int i = 0; i < int'(k); i++) begin
      rem = rem << 1;
      acc = acc + (((rem >= q) ? 64'd1 : 64'd0) << (k - 1 - i));
      if (rem >= q) rem = rem - q;
    end
    return acc;
  endfunction

  // Forward negacyclic NTT, CT, in place: out[j] in bit-reversed order.
  function automatic void ntt(ref longint unsigned a[], input longint unsigned q,
                              input longint unsigned psi);
    int unsigned n_len = a.size();
    int unsigned lg = clog2(n_len);
    int unsigned t = n_len;
    for (int unsigned mm = 1; mm < n_len; mm = mm * 2) begin
      t = t / 2;
      for (int unsigned i = 0; i < mm; i++) begin
        longint unsigned w = powm(psi, brv(mm + i, lg), q);
        for (int unsigned j = 2 * i * t; j < 2 * i * t + t; j++) begin
          longint unsigned u = a[j];
          longint unsigned v = mulm(a[j + t], w, q);
          a[j]     = (u + v) % q;
          a[j + t] = (u + q - v) % q;
        end
      end
    end
  endfunction

  // Inverse negacyclic NTT, GS, in place: bit-reversed in, natural out, times 1/N.
  function automatic void intt(ref longint unsigned a[], input longint unsigned q,
                               input longint unsigned psi);
    int unsigned n_len = a.size();
    int unsigned lg = clog2(n_len);
    int unsigned t = 1;
    longint unsigned ninv = powm(n_len, q - 2, q);
    for (int unsigned mm = n_len / 2; mm >= 1; mm = mm / 2) begin
      for (int unsigned i = 0; i < mm; i++) begin
        longint unsigned w = powm(psi, 2 * n_len - brv(mm + i, lg), q);
        for (int unsigned j = 2 * i * t; j < 2 * i * t + t; j++) begin
          longint unsigned u = a[j];
          longint unsigned v = a[j + t];
          a[j]     = (u + v) % q;
          a[j + t] = mulm((u + q - v) % q, w, q);
        end
      end
      t = t * 2;
    end
    foreach (a[i]) a[i] = mulm(a[i], ninv, q);
  endfunction

  // Workload moduli. Set 0: q = 12289 (14 bits), root of order 2048.
  // Set 1: six 30-bit primes = 1 mod 8192, roots of order 8192.
  // Set 2: q = 4293918721 (32 bits), root of order 2^17.
  function automatic longint unsigned wl_q(int unsigned set, int unsigned l);
    longint unsigned q1 [6] = '{64'd1073692673, 64'd1073668097, 64'd1073651713,
                                64'd1073643521, 64'd1073569793, 64'd1073479681};
    case (set)
      0:       return 64'd12289;
      1:       return q1[l % 6];
      default: return 64'd4293918721;
    endcase
  endfunction

  // Primitive 2N-th root of unity for workload modulus wl_q(set, l).
  function automatic longint unsigned wl_psi(int unsigned set, int unsigned l,
                                             int unsigned n_len);
    longint unsigned p1 [6] = '{64'd510015274, 64'd1047115509, 64'd724005969,
                                64'd917716233, 64'd1067926601, 64'd371836615};
    case (set)
      0:       return powm(64'd1945, 1024 / n_len, 64'd12289);
      1:       return powm(p1[l % 6], 4096 / n_len, wl_q(1, l));
      default: return powm(64'd2928850483, 65536 / n_len, 64'd4293918721);
    endcase
  endfunction

  // Schoolbook product modulo x^N + 1.
  function automatic void negacyclic(ref longint unsigned c[], input longint unsigned a[],
                                     input longint unsigned b[], input longint unsigned q);
    int unsigned n_len = a.size();
    c = new[n_len];
    foreach (c[i]) c[i] = 0;
    for (int unsigned i = 0; i < n_len; i++)
      for (int unsigned j = 0; j < n_len; j++) begin
        longint unsigned p = mulm(a[i], b[j], q);
        if (i + j < n_len) c[i + j] = (c[i + j] + p) % q;
        else               c[i + j - n_len] = (c[i + j - n_len] + q - p) % q;
      end
  endfunction

endpackage
