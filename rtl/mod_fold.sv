// mod_fold - one iteration of the subvector reduction of X mod P.
//
// The input x is cut into subvectors: the LOW least significant bits X_1,
// then SUB-bit subvectors X_2, X_3, ... (the top one may be shorter). Since
// x = sum X_i * 2^(offset_i), the value
//     s = X_1 + sum_{i>1} ( X_i * (2^(offset_i) mod P) ) mod P
// is congruent to x modulo P. X_1 is passed on unchanged; every other
// subvector goes through its own mulmod_rom truth table, so each term is
// below P, and an adder tree sums the terms. With LOW = SUB = bits(P-1) this
// is one application of X mod P = sum X_i * (2^(delta*(i-1)) mod P).
//
// XMAX is the largest value x can carry (0: all XW bits free). The worst-case
// sum SMAX and hence the output width SW_OUT are derived from it at
// elaboration, so that a chain of folds shrinks the word step by step.
// The split and the weights 2^(delta*(i-1)) mod P follow the published
// method; reducing each term below P inside its table follows its truth-table
// description (the published worked example instead bounds the sum with
// unreduced products). The bound bookkeeping is this design's own.
//
// Interface: x (XW bits) in, s (SW_OUT bits) out. Purely combinational.
module mod_fold
  import rns_pkg::*;
#(
  parameter int unsigned XW   = 18,
  parameter u64_t        XMAX = 64'd0,
  parameter u64_t        P    = 64'd47,
  parameter int unsigned LOW  = bits_for(P - 1),
  parameter int unsigned SUB  = LOW,
  localparam u64_t        SMAX   = fold_bound(XW, XMAX, P, LOW, SUB),
  localparam int unsigned SW_OUT = bits_for(SMAX)
) (
  input  logic [XW-1:0]     x,
  output logic [SW_OUT-1:0] s
);

  localparam int unsigned PW  = bits_for(P - 1);
  localparam int unsigned NCH = fold_chunks(XW, LOW, SUB);
  localparam int unsigned LW  = (LOW < XW) ? LOW : XW;

  // term[0] is X_1, term[k] the reduced weight of subvector k.
  logic [NCH-1:0][SW_OUT-1:0] term;

  assign term[0] = SW_OUT'(x[LW-1:0]);

  for (genvar k = 1; k < NCH; k++) begin : g_sub
    localparam int unsigned OFF = LOW + (k - 1) * SUB;
    localparam int unsigned H   = (XW - OFF < SUB) ? (XW - OFF) : SUB;
    logic [PW-1:0] y;
    mulmod_rom #(
      .IW (H),
      .P  (P),
      .C  (pow2mod(OFF, P)),
      .OW (PW)
    ) u_rom (
      .x (x[OFF +: H]),
      .y (y)
    );
    assign term[k] = SW_OUT'(y);
  end

  always_comb begin
    s = '0;
    for (int unsigned k = 0; k < NCH; k++) s = s + term[k];
  end

endmodule
