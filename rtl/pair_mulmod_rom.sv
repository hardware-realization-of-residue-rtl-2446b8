// pair_mulmod_rom - truth table of one partial product of the modular
// multiplier: y = (a * b * C) mod P.
//
// a and b are subvectors of the two operands (A_i and B_j), and C is the
// constant 2^(SW*(i+j)) mod P that places their product at its bit position.
// The AW+BW input bits fully determine the output, so the product is one
// small Boolean function (a truth table of 2^(AW+BW) rows and bits(P-1)
// output columns), written here through its defining formula; synthesis turns
// it into a minimised logic function. The output is already reduced (< P).
// The per-pair table follows the published multiplier; stating it by formula
// is this design's choice.
//
// Interface: a (AW bits), b (BW bits) in, y (OW bits) out. Combinational.
module pair_mulmod_rom
  import rns_pkg::*;
#(
  parameter int unsigned AW = 3,
  parameter int unsigned BW = 3,
  parameter u64_t        P  = 64'd47,
  parameter u64_t        C  = 64'd8,
  parameter int unsigned OW = bits_for(P - 1)
) (
  input  logic [AW-1:0] a,
  input  logic [BW-1:0] b,
  output logic [OW-1:0] y
);

  localparam u64_t CM = C % P;

  if (AW + BW + bits_for(P) > 64) begin : g_too_wide
    $error("pair_mulmod_rom: AW + BW + bits(P) exceeds 64");
  end

  always_comb y = OW'((64'(a) * 64'(b) * CM) % P);

endmodule
