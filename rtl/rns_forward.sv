// rns_forward - converter of positional numbers to modular representation.
//
// Each of the N operands (XW-bit unsigned integers) is reduced modulo every
// modulus of the set MODULI by its own xmodp unit, N * NUM_MODULI units in
// all, working side by side. With the defaults (two 400-bit operands and
// moduli 461, 977, 2011 and 4051) these are exactly four 400-bit X mod P
// circuits per operand.
// Forward conversion by X mod P is published; using the four characterised
// moduli together as one moduli set is this design's choice.
//
// Interface: x (N words of XW bits) in; res[i][n] = x[n] mod MODULI[i], each
// zero-extended to RW bits, out. Purely combinational.
module rns_forward
  import rns_pkg::*;
#(
  parameter int unsigned XW      = 400,
  parameter int unsigned N       = 2,
  parameter moduli_t     MODULI  = DEFAULT_MODULI,
  localparam int unsigned RW     = residue_width(MODULI)
) (
  input  logic [N-1:0][XW-1:0]                 x,
  output logic [NUM_MODULI-1:0][N-1:0][RW-1:0] res
);

  for (genvar i = 0; i < NUM_MODULI; i++) begin : g_mod
    localparam int unsigned PW = bits_for(MODULI[i] - 1);
    for (genvar n = 0; n < N; n++) begin : g_op
      logic [PW-1:0] r;
      xmodp #(
        .XW (XW),
        .P  (MODULI[i])
      ) u_xmodp (
        .x (x[n]),
        .r (r)
      );
      assign res[i][n] = RW'(r);
    end
  end

endmodule
