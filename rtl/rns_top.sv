// rns_top - residue number system datapath: forward conversion, per-modulus
// arithmetic, reverse conversion.
//
// N positional operands of XW bits enter together with an operation (add or
// multiply). rns_forward reduces every operand modulo each of the moduli
// p_1..p_m; one rns_channel per modulus adds or multiplies the operands'
// residues modulo its p_i, all channels in parallel and independent of each
// other; rns_reverse rebuilds the positional result from the m channel
// results by Chinese remainder reconstruction. The result is exact modulo the
// dynamic range M = p_1 * ... * p_m: y = (x_1 op x_2 op ... op x_N) mod M.
// With the default moduli {461, 977, 2011, 4051}, M = 3,669,186,634,717
// (42 bits); larger operands or results wrap modulo M.
//
// Every unit is combinational. Three register stages, one after each of
// the three steps, make the whole a pipeline: an operation presented with
// in_valid at a rising edge appears on y with out_valid after the third
// rising edge from and including that one (latency 3), and a new operation
// can enter at every edge. rst_n is an active-low synchronous reset that
// clears the valid bits only.
// The three-step structure follows the published RNS block diagram; the
// pipeline registers, the valid/reset handling, N = 2 and the moduli set are
// this design's choices (the published units are purely combinational).
module rns_top
  import rns_pkg::*;
#(
  parameter int unsigned XW     = 400,
  parameter int unsigned N      = 2,
  parameter moduli_t     MODULI = DEFAULT_MODULI,
  parameter int unsigned SW     = 3,
  parameter int unsigned RSUB   = 4,
  localparam int unsigned RW    = residue_width(MODULI),
  localparam u64_t        M     = moduli_product(MODULI),
  localparam int unsigned MW    = bits_for(M - 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  rns_op_e                              in_op,
  input  logic [N-1:0][XW-1:0]                 in_x,
  output logic                                 out_valid,
  output logic [NUM_MODULI-1:0][RW-1:0]        out_res,
  output logic [MW-1:0]                        y
);

  // Step 1: positional to modular.
  logic [NUM_MODULI-1:0][N-1:0][RW-1:0] fwd_res;
  rns_forward #(
    .XW     (XW),
    .N      (N),
    .MODULI (MODULI)
  ) u_forward (
    .x   (in_x),
    .res (fwd_res)
  );

  logic                                 s1_valid;
  rns_op_e                              s1_op;
  logic [NUM_MODULI-1:0][N-1:0][RW-1:0] s1_res;
  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
    if (in_valid) begin
      s1_op  <= in_op;
      s1_res <= fwd_res;
    end
  end

  // Step 2: one adder/multiplier per modulus.
  logic [NUM_MODULI-1:0][RW-1:0] ch_res;
  for (genvar i = 0; i < NUM_MODULI; i++) begin : g_ch
    localparam int unsigned PW = bits_for(MODULI[i] - 1);
    logic [N-1:0][PW-1:0] xi;
    logic [PW-1:0]        si;
    for (genvar n = 0; n < N; n++) begin : g_op
      assign xi[n] = s1_res[i][n][PW-1:0];
    end
    rns_channel #(
      .P  (MODULI[i]),
      .N  (N),
      .SW (SW)
    ) u_channel (
      .op (s1_op),
      .x  (xi),
      .s  (si)
    );
    assign ch_res[i] = RW'(si);
  end

  logic                          s2_valid;
  logic [NUM_MODULI-1:0][RW-1:0] s2_res;
  always_ff @(posedge clk) begin
    if (!rst_n) s2_valid <= 1'b0;
    else        s2_valid <= s1_valid;
    if (s1_valid) s2_res <= ch_res;
  end

  // Step 3: modular to positional.
  logic [MW-1:0] rev_y;
  rns_reverse #(
    .MODULI (MODULI),
    .RSUB   (RSUB)
  ) u_reverse (
    .s (s2_res),
    .y (rev_y)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s2_valid;
    if (s2_valid) begin
      y       <= rev_y;
      out_res <= s2_res;
    end
  end

  // The residues leaving the channels are below their moduli.
  always_ff @(posedge clk) begin
    if (rst_n && s2_valid) begin
      for (int i = 0; i < NUM_MODULI; i++) begin
        assert (u64_t'(s2_res[i]) < MODULI[i])
          else $error("rns_top: residue %0d out of range", i);
      end
    end
  end

endmodule
