// modadd - modular adder, s = (x_1 + x_2 + ... + x_N) mod P.
//
// The N operands are added in plain binary and the sum is reduced by xmodp,
// which knows the sum's worst case N*(2^W - 1). For two residues of a
// modulus near a power of two this leaves only the compare with P and one
// subtraction; wider or more numerous operands add folds automatically.
// Only the function (modular summation) is published; this construction is
// the simplest one that reuses the published reduction.
//
// Interface: x (N words of W bits; any value) in, s (bits(P-1) bits) out.
// Purely combinational.
module modadd
  import rns_pkg::*;
#(
  parameter u64_t        P  = 64'd4051,
  parameter int unsigned N  = 2,
  parameter int unsigned W  = bits_for(P - 1),
  localparam int unsigned RW = bits_for(P - 1)
) (
  input  logic [N-1:0][W-1:0] x,
  output logic [RW-1:0]       s
);

  localparam u64_t        SMAX = u64_t'(N) * ((64'd1 << W) - 1);
  localparam int unsigned SW   = bits_for(SMAX);

  logic [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < N; i++) sum = sum + SW'(x[i]);
  end

  xmodp #(
    .XW   (SW),
    .XMAX (SMAX),
    .P    (P)
  ) u_reduce (
    .x (sum),
    .r (s)
  );

endmodule
