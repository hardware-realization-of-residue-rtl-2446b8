// modmul - combinational modular multiplier, s = (a * b) mod P.
//
// Both operands are cut into SW-bit subvectors, A = (A_D, ..., A_1) and
// B = (B_D, ..., B_1), A_1 and B_1 holding the least significant bits and
// the top subvector possibly shorter. Every pair (A_i, B_j) feeds its own
// pair_mulmod_rom truth table, which returns A_i * B_j * 2^(SW*(i+j-2)) mod P
// directly, so the first iteration is D*D small tables and an adder tree
// producing S_temp, congruent to a * b mod P. The second iteration reduces
// S_temp with xmodp using SW-bit subvectors (S_temp[3:1] unchanged, then
// S_temp[6:4] * 2^3 mod P, S_temp[9:7] * 2^6 mod P, ...) and ends with the
// compare against P and the subtraction of P.
//
// For P = 47 and 6-bit operands, a = 45 and b = 15 give the largest S_temp,
// 158; the second iteration turns it into 64, and 64 - 47 = 17.
// Both iterations and the 3-bit subvectors follow the published multiplier;
// the automatic extra folds for moduli where one iteration and one
// subtraction do not suffice are this design's own.
//
// Interface: a, b (W bits each, any value, not only residues) in, s
// (bits(P-1) bits) out. Purely combinational.
module modmul
  import rns_pkg::*;
#(
  parameter u64_t        P  = 64'd47,
  parameter int unsigned W  = bits_for(P - 1),
  parameter int unsigned SW = 3,
  localparam int unsigned RW = bits_for(P - 1)
) (
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  output logic [RW-1:0] s
);

  localparam int unsigned D = (W + SW - 1) / SW;

  // Worst case of S_temp: every partial product table is below P and also
  // below its largest unreduced product.
  function automatic u64_t stemp_bound();
    u64_t  acc = 0;
    u128_t t;
    for (int unsigned i = 0; i < D; i++) begin
      for (int unsigned j = 0; j < D; j++) begin
        int unsigned ha = (W - i * SW < SW) ? (W - i * SW) : SW;
        int unsigned hb = (W - j * SW < SW) ? (W - j * SW) : SW;
        t = ((u128_t'(1) << ha) - 1) * ((u128_t'(1) << hb) - 1)
            * u128_t'(pow2mod(SW * (i + j), P));
        acc = acc + ((t > u128_t'(P) - 1) ? (P - 1) : t[63:0]);
      end
    end
    return acc;
  endfunction

  localparam u64_t        TMAX = stemp_bound();
  localparam int unsigned TW   = bits_for(TMAX);

  logic [D*D-1:0][RW-1:0] pp;
  logic [TW-1:0]          s_temp;

  for (genvar i = 0; i < D; i++) begin : g_a
    for (genvar j = 0; j < D; j++) begin : g_b
      localparam int unsigned HA = (W - i * SW < SW) ? (W - i * SW) : SW;
      localparam int unsigned HB = (W - j * SW < SW) ? (W - j * SW) : SW;
      pair_mulmod_rom #(
        .AW (HA),
        .BW (HB),
        .P  (P),
        .C  (pow2mod(SW * (i + j), P)),
        .OW (RW)
      ) u_pp (
        .a (a[i*SW +: HA]),
        .b (b[j*SW +: HB]),
        .y (pp[i*D + j])
      );
    end
  end

  always_comb begin
    s_temp = '0;
    for (int unsigned k = 0; k < D * D; k++) s_temp = s_temp + TW'(pp[k]);
  end

  // Second iteration and final correction.
  xmodp #(
    .XW   (TW),
    .XMAX (TMAX),
    .P    (P),
    .LOW  (SW),
    .SUB  (SW)
  ) u_reduce (
    .x (s_temp),
    .r (s)
  );

endmodule
