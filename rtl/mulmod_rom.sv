// mulmod_rom - truth table of one subvector times a constant, modulo P.
//
// y = (x * C) mod P for an IW-bit subvector x. This is the building block of
// the whole design: instead of a multiplier followed by a divider, every
// "subvector times a power of two modulo P" term is a small Boolean function
// of IW inputs whose IW-bit to OW-bit truth table is fixed by P and C. Its
// output never exceeds P-1, so OW = bits of (P-1) output columns suffice.
// The table is written here through its defining formula, evaluated on
// constants only; a synthesis tool flattens it into a minimised two-level or
// multi-level function of x (the sum-of-products form the method relies on).
// With P = 13, C = 9 and IW = 4 this is the table X * 2^8 mod 13.
//
// From the published method: one truth table per subvector, outputs already
// reduced below P. This design's choice: the table is given by its formula,
// not as a pre-minimised sum of products, and minimisation is left to the
// synthesis tool.
//
// Interface: x (IW bits) in, y (OW bits) out. Purely combinational.
// Limits (this implementation): IW + bits(P) must not exceed 64.
module mulmod_rom
  import rns_pkg::*;
#(
  parameter int unsigned IW = 4,
  parameter u64_t        P  = 64'd13,
  parameter u64_t        C  = 64'd9,
  parameter int unsigned OW = bits_for(P - 1)
) (
  input  logic [IW-1:0] x,
  output logic [OW-1:0] y
);

  localparam u64_t CM = C % P;

  if (IW + bits_for(P) > 64) begin : g_too_wide
    $error("mulmod_rom: IW + bits(P) exceeds 64");
  end

  always_comb y = OW'((64'(x) * CM) % P);

endmodule
