// pair_mulmod_rom_tb - self-checking testbench for pair_mulmod_rom.
//
// The four partial products of the 6-bit example with P = 47, a = 45 and
// b = 15 (subvectors 5, 5 and 7, 1) are checked against their printed
// values 35, 40, 45 and 38; then every input pair of the 3x3-bit tables with
// weights 1, 8 and 64 is checked against a reference built by modular
// addition.
module pair_mulmod_rom_tb;
  int checks = 0;
  int failures = 0;

  logic [2:0] a, b;
  logic [5:0] y1, y8, y64;

  pair_mulmod_rom #(.AW(3), .BW(3), .P(64'd47), .C(64'd1))  dut1  (.a(a), .b(b), .y(y1));
  pair_mulmod_rom #(.AW(3), .BW(3), .P(64'd47), .C(64'd8))  dut8  (.a(a), .b(b), .y(y8));
  pair_mulmod_rom #(.AW(3), .BW(3), .P(64'd47), .C(64'd17)) dut64 (.a(a), .b(b), .y(y64));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // (v * c) mod 47 by repeated modular addition.
  function automatic int ref47(int v, int c);
    int r = 0;
    for (int i = 0; i < v; i++) begin
      r = r + c;
      while (r >= 47) r = r - 47;
    end
    return r;
  endfunction

  initial begin
    a = 3'd5; b = 3'd7; #1; check(int'(y1), 35, "A1*B1");
    a = 3'd5; b = 3'd1; #1; check(int'(y8), 40, "A1*B2*2^3");
    a = 3'd5; b = 3'd7; #1; check(int'(y8), 45, "A2*B1*2^3");
    a = 3'd5; b = 3'd1; #1; check(int'(y64), 38, "A2*B2*2^6");
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        a = 3'(i); b = 3'(j); #1;
        check(int'(y1),  ref47(i * j, 1),  "weight 1");
        check(int'(y8),  ref47(i * j, 8),  "weight 8");
        check(int'(y64), ref47(i * j, 17), "weight 64");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
