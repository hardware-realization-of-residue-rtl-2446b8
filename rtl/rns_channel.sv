// rns_channel - the adder/multiplier for one modulus p_i of the RNS.
//
// Takes the residues of the N operands with respect to p_i and returns either
// their sum or their product modulo p_i, as selected by op. The sum is one
// modadd; the product is a chain of N-1 modmul units, each multiplying the
// running product by the next residue. Both results are computed and op
// selects one (no state, no clock). The residues must be below P; the
// forward converter guarantees that.
// The unit's place in the datapath (one adder/multiplier per modulus, all
// operands' residues in) is published; the op select and the product chain
// for more than two operands are this design's choices.
//
// Interface: op (rns_op_e), x (N residues of bits(P-1) bits) in,
// s (bits(P-1) bits) out. Purely combinational.
module rns_channel
  import rns_pkg::*;
#(
  parameter u64_t        P  = 64'd4051,
  parameter int unsigned N  = 2,
  parameter int unsigned SW = 3,
  localparam int unsigned RW = bits_for(P - 1)
) (
  input  rns_op_e              op,
  input  logic [N-1:0][RW-1:0] x,
  output logic [RW-1:0]        s
);

  logic [RW-1:0]         sum;
  logic [N-1:0][RW-1:0]  prod;  // prod[k]: product of x[0..k] mod P

  modadd #(
    .P (P),
    .N (N),
    .W (RW)
  ) u_add (
    .x (x),
    .s (sum)
  );

  assign prod[0] = x[0];
  for (genvar k = 1; k < N; k++) begin : g_mul
    modmul #(
      .P  (P),
      .W  (RW),
      .SW (SW)
    ) u_mul (
      .a (prod[k-1]),
      .b (x[k]),
      .s (prod[k])
    );
  end

  assign s = (op == OP_ADD) ? sum : prod[N-1];

endmodule
