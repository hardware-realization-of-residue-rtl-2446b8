// xmodp - combinational X mod P for an arbitrary modulus P.
//
// The reduction is a chain of NF mod_fold stages followed by a final
// correction. Each fold replaces the word by the sum of its low subvector
// and the table-reduced weights of its upper subvectors; the result is
// congruent to the input mod P and narrower. Folding is repeated while the
// worst-case value is still at least 2P and a further fold still lowers it,
// so the number of folds and the width of every intermediate word follow
// from XW and P at elaboration (three folds for an 18-bit input and P = 47,
// for instance). The remaining value, below 2P in the usual case, is compared
// with P and P is subtracted when it is not smaller. Should the worst case
// remain at or above 2P (possible when LOW is small), the correction becomes
// a short ladder that subtracts P*2^j, j = J..0, wherever it fits.
//
// The subvector width defaults to delta = bits(P-1), the width of a residue.
// LOW sets how many least significant bits stay unreduced in every fold;
// the modular multiplier uses LOW = SUB = 3 for its second iteration.
// The fold-until-below-2P scheme and the final compare follow the published
// method (the compare here uses >= so that x = P gives 0); deciding the fold
// count from worst-case bounds and the subtract ladder are this design's own.
//
// Interface: x (XW bits) in, r = x mod P (bits(P-1) bits) out. XMAX is the
// largest value x can take (0: all XW bits free). Purely combinational.
module xmodp
  import rns_pkg::*;
#(
  parameter int unsigned XW   = 400,
  parameter u64_t        XMAX = 64'd0,
  parameter u64_t        P    = 64'd4051,
  parameter int unsigned LOW  = bits_for(P - 1),
  parameter int unsigned SUB  = LOW,
  localparam int unsigned RW  = bits_for(P - 1)
) (
  input  logic [XW-1:0] x,
  output logic [RW-1:0] r
);

  localparam int unsigned NF   = num_folds(XW, XMAX, P, LOW, SUB);
  localparam u64_t        FMAX = stage_max(XW, XMAX, P, LOW, SUB, NF);
  // J = floor(log2(FMAX / P)): 0 whenever FMAX < 2P.
  localparam int unsigned J    = bits_for(FMAX / P) - 1;

  if (NF == 0 && XW > 64) begin : g_bad
    $error("xmodp: a word wider than 64 bits must be folded at least once");
  end

  // stage[k] holds the word after k folds (stage[0] only for narrow inputs).
  logic [NF:0][63:0] stage;

  if (XW <= 64) begin : g_narrow
    assign stage[0] = 64'(x);
  end else begin : g_wide
    assign stage[0] = '0;
  end

  for (genvar k = 0; k < NF; k++) begin : g_fold
    localparam int unsigned WI = (k == 0) ? XW : bits_for(stage_max(XW, XMAX, P, LOW, SUB, k));
    localparam u64_t        MI = (k == 0) ? XMAX : stage_max(XW, XMAX, P, LOW, SUB, k);
    localparam int unsigned WO = bits_for(stage_max(XW, XMAX, P, LOW, SUB, k + 1));
    logic [WI-1:0] xi;
    logic [WO-1:0] s;
    if (k == 0) begin : g_in
      assign xi = x;
    end else begin : g_mid
      assign xi = stage[k][WI-1:0];
    end
    mod_fold #(
      .XW   (WI),
      .XMAX (MI),
      .P    (P),
      .LOW  (LOW),
      .SUB  (SUB)
    ) u_fold (
      .x (xi),
      .s (s)
    );
    assign stage[k+1] = 64'(s);
  end

  logic [63:0] v;
  always_comb begin
    v = stage[NF];
    for (int j = int'(J); j >= 0; j--) begin
      if (v >= (P << j)) v = v - (P << j);
    end
    r = v[RW-1:0];
  end

  always_comb begin
    assert (v < P) else $error("xmodp: result %0d not below P = %0d", v, P);
  end

endmodule
