// mulmod_rom_tb - self-checking testbench for mulmod_rom.
//
// First the table X * 9 mod 13 (9 = 2^8 mod 13), checked row by row against
// a literal copy of its output column for X = 2..12 and against the values
// 0 and 9 for X = 0 and X = 1, and against the published minimised
// sum-of-products cover of the same table (inputs x3 x2 x1 x0 written as
// a2 a1 b2 b1 there, '-' a free input). Then a 12-bit instance (P = 4051,
// C = 2^12 mod 4051 = 45) is checked exhaustively against a reference that
// multiplies by repeated modular addition instead of using %.
module mulmod_rom_tb;
  int checks = 0;
  int failures = 0;

  logic [3:0]  x4;
  logic [3:0]  y4;
  logic [11:0] x12;
  logic [11:0] y12;

  mulmod_rom #(.IW(4),  .P(64'd13),   .C(64'd9),  .OW(4))  dut13   (.x(x4),  .y(y4));
  mulmod_rom #(.IW(12), .P(64'd4051), .C(64'd45), .OW(12)) dut4051 (.x(x12), .y(y12));

  // Output column of the X * 9 mod 13 table for X = 0 .. 12.
  localparam logic [3:0] TABLE13 [13] = '{4'b0000, 4'b1001, 4'b0101, 4'b0001, 4'b1010,
                                          4'b0110, 4'b0010, 4'b1011, 4'b0111, 4'b0011,
                                          4'b1100, 4'b1000, 4'b0100};

  // Published cover, one cube list per output bit.
  function automatic logic cube(logic [3:0] v, string c);
    for (int i = 0; i < 4; i++)
      if (c[i] != "-" && v[3-i] != (c[i] == "1")) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [3:0] sop(logic [3:0] v);
    logic [3:0] r;
    r[3] = cube(v, "0100") | cube(v, "101-") | cube(v, "0001") | cube(v, "0111");
    r[2] = cube(v, "0101") | cube(v, "-010") | cube(v, "1-00");
    r[1] = cube(v, "100-") | cube(v, "01--");
    r[0] = cube(v, "-001") | cube(v, "100-") | cube(v, "0-11") | cube(v, "001-");
    return r;
  endfunction

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    for (int v = 0; v < 13; v++) begin
      x4 = 4'(v); #1;
      checks++;
      if (y4 !== TABLE13[v]) begin
        failures++;
        $display("FAIL x=%0d*9 mod 13: got %0d expected %0d", v, y4, TABLE13[v]);
      end
      checks++;
      if (y4 !== sop(4'(v))) begin
        failures++;
        $display("FAIL x=%0d*9 mod 13: got %0d, cover gives %0d", v, y4, sop(4'(v)));
      end
    end
    acc = 0;  // v * 45 mod 4051, built by modular addition
    for (int v = 0; v < 4096; v++) begin
      x12 = 12'(v); #1;
      checks++;
      if (int'(y12) != acc) begin
        failures++;
        $display("FAIL x=%0d*45 mod 4051: got %0d expected %0d", v, y12, acc);
      end
      acc = acc + 45;
      if (acc >= 4051) acc = acc - 4051;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
