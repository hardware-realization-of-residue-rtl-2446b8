// modmul_tb - self-checking testbench for modmul.
//
// P = 47, 6-bit operands: the example a = 45, b = 15 must give S_temp = 158
// after the first iteration, 64 after the second and 17 at the output; then
// all 64 x 64 operand pairs are checked against a * b mod 47. A 9-bit
// instance with P = 461 (three 3-bit subvectors per operand) is checked
// exhaustively, and a 12-bit instance with P = 4051 (four subvectors) on
// corner and random operands.
module modmul_tb;
  int checks = 0;
  int failures = 0;

  logic [5:0]  a6, b6, s6;
  logic [8:0]  a9, b9, s9;
  logic [11:0] a12, b12, s12;

  modmul #(.P(64'd47))   dut47   (.a(a6),  .b(b6),  .s(s6));
  modmul #(.P(64'd461))  dut461  (.a(a9),  .b(b9),  .s(s9));
  modmul #(.P(64'd4051)) dut4051 (.a(a12), .b(b12), .s(s12));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    a6 = 6'd45; b6 = 6'd15; #1;
    check(int'(dut47.s_temp), 158, "S_temp of 45*15");
    check(int'(dut47.u_reduce.stage[1]), 64, "S_temp_2 of 45*15");
    check(int'(s6), 17, "45*15 mod 47");
    for (int i = 0; i < 64; i++) begin
      for (int j = 0; j < 64; j++) begin
        a6 = 6'(i); b6 = 6'(j); #1;
        check(int'(s6), (i * j) % 47, "6-bit exhaustive");
      end
    end
    for (int i = 0; i < 512; i++) begin
      for (int j = 0; j < 512; j++) begin
        a9 = 9'(i); b9 = 9'(j); #1;
        check(int'(s9), (i * j) % 461, "9-bit exhaustive");
      end
    end
    a12 = '1; b12 = '1; #1; check(int'(s12), (4095 * 4095) % 4051, "4095*4095");
    a12 = 12'd4050; b12 = 12'd4050; #1; check(int'(s12), 1, "(P-1)^2");
    for (int n = 0; n < 20000; n++) begin
      a12 = 12'($urandom()); b12 = 12'($urandom()); #1;
      check(int'(s12), (int'(a12) * int'(b12)) % 4051, "12-bit random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
