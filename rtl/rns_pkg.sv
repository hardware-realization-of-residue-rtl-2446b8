// rns_pkg - shared types and elaboration-time arithmetic for the residue
// number system (RNS) datapath.
//
// Nothing in here becomes hardware by itself. The functions are evaluated
// while the design elaborates: they compute the constants the modular
// reduction needs (2^k mod P, modular inverses for the Chinese remainder
// reconstruction) and the worst-case value of every intermediate sum, from
// which each stage's bit width and the number of reduction stages follow.
// Constants are held as 64-bit unsigned numbers, so every modulus, and the
// product of all moduli, must stay below 2^63. Products are formed in 128 bits.
//
// The default moduli set {461, 977, 2011, 4051} is the set of moduli for
// which X mod P was characterised; they are primes, hence pairwise co-prime.
package rns_pkg;

  typedef longint unsigned u64_t;
  typedef logic [127:0] u128_t;

  // Operation carried out by every per-modulus channel.
  typedef enum logic {
    OP_ADD = 1'b0,
    OP_MUL = 1'b1
  } rns_op_e;

  localparam int unsigned NUM_MODULI = 4;
  typedef u64_t moduli_t [NUM_MODULI];
  localparam moduli_t DEFAULT_MODULI = '{64'd461, 64'd977, 64'd2011, 64'd4051};

  // Number of bits needed to hold the value v (at least 1).
  function automatic int unsigned bits_for(u64_t v);
    int unsigned n = 1;
    while (n < 64 && (v >> n) != 0) n++;
    return n;
  endfunction

  function automatic u64_t min64(u64_t a, u64_t b);
    return (a < b) ? a : b;
  endfunction

  // (a * b) mod p, exact for any 64-bit a, b and p > 0.
  function automatic u64_t mulmod(u64_t a, u64_t b, u64_t p);
    return u64_t'((u128_t'(a) * u128_t'(b)) % u128_t'(p));
  endfunction

  // 2^k mod p by square and multiply.
  function automatic u64_t pow2mod(int unsigned k, u64_t p);
    u64_t r = 64'd1 % p;
    u64_t b = 64'd2 % p;
    int unsigned e = k;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, p);
      b = mulmod(b, b, p);
      e = e >> 1;
    end
    return r;
  endfunction

  // Multiplicative inverse of a modulo p (a and p co-prime), extended Euclid.
  function automatic u64_t invmod(u64_t a, u64_t p);
    longint r0 = longint'(p);
    longint r1 = longint'(a % p);
    longint t0 = 0;
    longint t1 = 1;
    longint q, tmp;
    while (r1 != 0) begin
      q   = r0 / r1;
      tmp = r0 - q * r1; r0 = r1; r1 = tmp;
      tmp = t0 - q * t1; t0 = t1; t1 = tmp;
    end
    if (t0 < 0) t0 = t0 + longint'(p);
    return u64_t'(t0);
  endfunction

  // Largest value a quantity can take: xmax if it is known (non-zero),
  // otherwise every combination of its xw bits (xw below 64).
  function automatic u64_t range_max(int unsigned xw, u64_t xmax);
    if (xmax != 0) return xmax;
    return (xw >= 64) ? ~64'd0 : ((64'd1 << xw) - 64'd1);
  endfunction

  // Worst-case output of one fold (see mod_fold): the low `low` bits pass
  // unchanged, every `sub`-bit subvector above them contributes at most
  // min(P-1, max_subvector * (2^offset mod P)). xmax == 0 means that all xw
  // input bits are free.
  function automatic u64_t fold_bound(int unsigned xw, u64_t xmax, u64_t p,
                                      int unsigned low, int unsigned sub);
    bit          full = (xmax == 0);
    int unsigned lo_w = (low < xw) ? low : xw;
    u64_t        s    = (64'd1 << lo_w) - 64'd1;
    u128_t       t;
    if (!full) s = min64(s, xmax);
    for (int unsigned off = low; off < xw; off += sub) begin
      int unsigned h = (xw - off < sub) ? (xw - off) : sub;
      u64_t cmax = (64'd1 << h) - 64'd1;
      if (!full) cmax = (off >= 64) ? 64'd0 : min64(cmax, xmax >> off);
      t = u128_t'(cmax) * u128_t'(pow2mod(off, p));
      s = s + ((t > u128_t'(p) - 1) ? (p - 1) : t[63:0]);
    end
    return s;
  endfunction

  // Number of subvectors one fold splits an xw-bit input into.
  function automatic int unsigned fold_chunks(int unsigned xw, int unsigned low,
                                              int unsigned sub);
    return (xw <= low) ? 1 : 1 + (xw - low + sub - 1) / sub;
  endfunction

  // Worst-case value after `k` folds of an xw-bit input bounded by xmax
  // (xmax == 0: all bits free). For k == 0 this is the input's own bound.
  function automatic u64_t stage_max(int unsigned xw, u64_t xmax, u64_t p,
                                     int unsigned low, int unsigned sub, int unsigned k);
    int unsigned w = xw;
    u64_t        m = xmax;
    for (int unsigned i = 0; i < k; i++) begin
      m = fold_bound(w, m, p, low, sub);
      w = bits_for(m);
    end
    return range_max(w, m);
  endfunction

  // Number of folds before the final correction: fold while the word is
  // wider than the unreduced low part, its worst case is still at least 2P
  // and one more fold lowers that worst case.
  function automatic int unsigned num_folds(int unsigned xw, u64_t xmax, u64_t p,
                                            int unsigned low, int unsigned sub);
    int unsigned w = xw;
    u64_t        m = xmax;
    int unsigned n = 0;
    bit          wide;
    u64_t        inmax, nxt;
    for (int unsigned guard = 0; guard < 64; guard++) begin
      wide  = (w >= 64) && (m == 0);
      inmax = range_max(w, m);
      nxt   = fold_bound(w, m, p, low, sub);
      if (!((w > low) && (wide || ((inmax >= 2 * p) && (nxt < inmax))))) break;
      n++;
      m = nxt;
      w = bits_for(nxt);
    end
    return n;
  endfunction

  // Widest residue of a moduli set.
  function automatic int unsigned residue_width(moduli_t m);
    int unsigned w = 1;
    foreach (m[i]) if (bits_for(m[i] - 1) > w) w = bits_for(m[i] - 1);
    return w;
  endfunction

  // Dynamic range M = p_1 * p_2 * ... * p_m.
  function automatic u64_t moduli_product(moduli_t m);
    u64_t r = 1;
    foreach (m[i]) r = r * m[i];
    return r;
  endfunction

endpackage
