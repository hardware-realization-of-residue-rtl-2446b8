// xmodp_tb - self-checking testbench for xmodp.
//
// Three instances: the 18-bit, P = 47 example (three folds, then one
// compare), a 400-bit input with P = 4051 (the default size) and a 500-bit
// input with P = 461. Every result is compared with the % operator applied to
// the full-width input, for corner values (0, all ones, multiples of P and
// their neighbours) and random words. The watchdog ends the run after
// 100000 cycles of its 10 ns clock.
module xmodp_tb;
  import rns_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [17:0]  x18;
  logic [5:0]   r18;
  logic [399:0] x400;
  logic [11:0]  r400;
  logic [499:0] x500;
  logic [8:0]   r500;

  xmodp #(.XW(18),  .P(64'd47))   dut18  (.x(x18),  .r(r18));
  xmodp #(.XW(400), .P(64'd4051)) dut400 (.x(x400), .r(r400));
  xmodp #(.XW(500), .P(64'd461))  dut500 (.x(x500), .r(r500));

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [511:0] got, input logic [511:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic logic [399:0] rand400();
    logic [399:0] v;
    for (int i = 0; i < 13; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  function automatic logic [499:0] rand500();
    logic [499:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    // 18-bit example: X = 2^18 - 1.
    x18 = '1; #1;
    check(512'(r18), 512'((2**18 - 1) % 47), "x18 all ones");
    // Exhaustive over all 2^18 inputs.
    for (int v = 0; v < 2**18; v++) begin
      x18 = 18'(v); #1;
      check(512'(r18), 512'(v % 47), "x18 exhaustive");
    end
    // 400-bit corners.
    x400 = '0; #1; check(512'(r400), 512'(0), "x400 zero");
    x400 = '1; #1; check(512'(r400), 512'(x400 % 400'd4051), "x400 ones");
    x400 = 400'd4051; #1; check(512'(r400), 512'(0), "x400 = P");
    x400 = 400'd4050; #1; check(512'(r400), 512'(4050), "x400 = P-1");
    x400 = 400'd8101; #1; check(512'(r400), 512'(8101 % 4051), "x400 = 2P-1");
    x500 = '1; #1; check(512'(r500), 512'(x500 % 500'd461), "x500 ones");
    x500 = 500'd922; #1; check(512'(r500), 512'(0), "x500 = 2P");
    for (int n = 0; n < 3000; n++) begin
      x400 = rand400();
      x500 = rand500();
      if (n % 3 == 1) x400 = x400 - (x400 % 400'd4051);  // a multiple of P
      if (n % 3 == 2) x500 = x500 >> (n % 500);          // short words
      #1;
      check(512'(r400), 512'(x400 % 400'd4051), "x400 random");
      check(512'(r500), 512'(x500 % 500'd461), "x500 random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
