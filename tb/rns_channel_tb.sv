// rns_channel_tb - self-checking testbench for rns_channel.
//
// A two-operand channel for p = 4051 and a three-operand channel for p = 461
// are driven with random residues and with the corner residues 0, 1 and
// p-1, in both operations; sums and products are checked against % in the
// testbench.
module rns_channel_tb;
  import rns_pkg::*;
  int checks = 0;
  int failures = 0;

  rns_op_e          op;
  logic [1:0][11:0] xa;
  logic [11:0]      sa;
  logic [2:0][8:0]  xb;
  logic [8:0]       sb;

  rns_channel #(.P(64'd4051), .N(2)) dut2 (.op(op), .x(xa), .s(sa));
  rns_channel #(.P(64'd461),  .N(3)) dut3 (.op(op), .x(xb), .s(sb));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int pick(int p);
    case ($urandom_range(0, 5))
      0: return 0;
      1: return 1;
      2: return p - 1;
      default: return int'($urandom_range(0, p - 1));
    endcase
  endfunction

  initial begin
    longint a, b, c;
    for (int n = 0; n < 20000; n++) begin
      a = pick(4051); b = pick(4051);
      xa = {12'(b), 12'(a)};
      a = pick(461); b = pick(461); c = pick(461);
      xb = {9'(c), 9'(b), 9'(a)};
      op = OP_ADD; #1;
      check(longint'(sa), (longint'(xa[0]) + longint'(xa[1])) % 4051, "add p=4051");
      check(longint'(sb), (a + b + c) % 461, "add p=461");
      op = OP_MUL; #1;
      check(longint'(sa), (longint'(xa[0]) * longint'(xa[1])) % 4051, "mul p=4051");
      check(longint'(sb), (a * b * c) % 461, "mul p=461");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
