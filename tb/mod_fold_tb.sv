// mod_fold_tb - self-checking testbench for mod_fold.
//
// The 18-bit input with P = 47 is cut into X_1 = x[5:0], X_2 = x[11:6] and
// X_3 = x[17:12]; with 2^6 mod 47 = 17 and 2^12 mod 47 = 7 one fold must give
// exactly X_1 + (X_2 * 17 mod 47) + (X_3 * 7 mod 47). All 2^18 inputs are
// checked against that sum, which the testbench forms with its own
// arithmetic, and against the congruence with x mod 47.
module mod_fold_tb;
  int checks = 0;
  int failures = 0;

  logic [17:0] x;
  logic [7:0]  s;  // worst case 63 + 46 + 46 = 155

  mod_fold #(.XW(18), .P(64'd47)) dut (.x(x), .s(s));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int v = 0; v < 2**18; v++) begin
      x = 18'(v); #1;
      exp = (v & 63) + (((v >> 6) & 63) * 17) % 47 + (((v >> 12) & 63) * 7) % 47;
      checks++;
      if (int'(s) != exp || (int'(s) % 47) != (v % 47)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d: got %0d expected %0d", v, s, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
