// modadd_tb - self-checking testbench for modadd.
//
// Two residues modulo 4051 (corners and random words, including values that
// are not reduced) and three 6-bit words modulo 47 (exhaustive) are added and
// compared with the sum reduced by %.
module modadd_tb;
  int checks = 0;
  int failures = 0;

  logic [1:0][11:0] x2;
  logic [11:0]      s2;
  logic [2:0][5:0]  x3;
  logic [5:0]       s3;

  modadd #(.P(64'd4051), .N(2)) dut2 (.x(x2), .s(s2));
  modadd #(.P(64'd47),   .N(3)) dut3 (.x(x3), .s(s3));

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
    x2 = '{12'd4050, 12'd4050}; #1; check(int'(s2), 4049, "(P-1)+(P-1)");
    x2 = '{12'd4050, 12'd1};    #1; check(int'(s2), 0, "(P-1)+1");
    x2 = '{12'd4095, 12'd4095}; #1; check(int'(s2), 8190 % 4051, "all ones");
    for (int n = 0; n < 20000; n++) begin
      x2[0] = 12'($urandom()); x2[1] = 12'($urandom()); #1;
      check(int'(s2), (int'(x2[0]) + int'(x2[1])) % 4051, "two operands");
    end
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++)
        for (int k = 0; k < 64; k++) begin
          x3 = {6'(k), 6'(j), 6'(i)}; #1;
          check(int'(s3), (i + j + k) % 47, "three operands");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
