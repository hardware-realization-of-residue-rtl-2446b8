// rns_reverse - converter of modular representation to a positional number.
//
// Chinese remainder reconstruction: with M = p_1 * ... * p_m, M_i = M / p_i
// and C_i = M_i * (M_i^-1 mod p_i), the number is
//     y = (S_1 * C_1 + S_2 * C_2 + ... + S_m * C_m) mod M.
// The same subvector technique as for X mod P is used: every residue S_i is
// cut into RSUB-bit subvectors, and each subvector feeds a mulmod_rom truth
// table returning S_i,k * C_i * 2^(RSUB*k) mod M, a value below M. The terms
// are added and the sum, below (number of terms) * M, is reduced modulo M by
// xmodp, whose last step subtracts the multiple of M (the "P * r" term).
// RSUB = 4 keeps every table at 16 rows; the C_i are computed at elaboration.
// Only the function (the weighted sum reduced mod M) is published; the CRT
// weights, the table construction and RSUB are this design's choices.
//
// Interface: s (NUM_MODULI residues of RW bits, each below its modulus) in;
// y (bits(M-1) bits) out, 0 <= y < M. Purely combinational.
module rns_reverse
  import rns_pkg::*;
#(
  parameter moduli_t     MODULI = DEFAULT_MODULI,
  parameter int unsigned RSUB   = 4,
  localparam int unsigned RW    = residue_width(MODULI),
  localparam u64_t        M     = moduli_product(MODULI),
  localparam int unsigned MW    = bits_for(M - 1)
) (
  input  logic [NUM_MODULI-1:0][RW-1:0] s,
  output logic [MW-1:0]                 y
);

  localparam int unsigned NSUB = (RW + RSUB - 1) / RSUB;
  localparam int unsigned NT   = NUM_MODULI * NSUB;

  // CRT weight C_i.
  function automatic u64_t crt_weight(int unsigned i);
    u64_t mi = M / MODULI[i];
    return mulmod(mi, invmod(mi % MODULI[i], MODULI[i]), M);
  endfunction

  // Worst case of the sum of all terms.
  function automatic u64_t sum_bound();
    u64_t  acc = 0;
    u128_t t;
    for (int unsigned i = 0; i < NUM_MODULI; i++) begin
      for (int unsigned k = 0; k < NSUB; k++) begin
        u64_t vmax = min64((MODULI[i] - 1) >> (RSUB * k), (64'd1 << RSUB) - 1);
        t = u128_t'(vmax) * u128_t'(mulmod(crt_weight(i), pow2mod(RSUB * k, M), M));
        acc = acc + ((t > u128_t'(M) - 1) ? (M - 1) : t[63:0]);
      end
    end
    return acc;
  endfunction

  localparam u64_t        SMAX = sum_bound();
  localparam int unsigned SW   = bits_for(SMAX);

  logic [NT-1:0][MW-1:0] term;
  logic [SW-1:0]         sum;

  for (genvar i = 0; i < NUM_MODULI; i++) begin : g_mod
    for (genvar k = 0; k < NSUB; k++) begin : g_sub
      localparam int unsigned H = (RW - k * RSUB < RSUB) ? (RW - k * RSUB) : RSUB;
      mulmod_rom #(
        .IW (H),
        .P  (M),
        .C  (mulmod(crt_weight(i), pow2mod(RSUB * k, M), M)),
        .OW (MW)
      ) u_rom (
        .x (s[i][k*RSUB +: H]),
        .y (term[i*NSUB + k])
      );
    end
  end

  always_comb begin
    sum = '0;
    for (int unsigned k = 0; k < NT; k++) sum = sum + SW'(term[k]);
  end

  xmodp #(
    .XW   (SW),
    .XMAX (SMAX),
    .P    (M),
    .LOW  (MW),
    .SUB  (RSUB)
  ) u_reduce (
    .x (sum),
    .r (y)
  );

endmodule
