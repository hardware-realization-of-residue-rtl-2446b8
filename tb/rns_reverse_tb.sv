// rns_reverse_tb - self-checking testbench for rns_reverse.
//
// Default moduli 461, 977, 2011, 4051 (M = 3,669,186,634,717). A number y
// below M is chosen (0, 1, M-1, the moduli themselves and random values), its
// residues are formed with % in the testbench, and the converter must return
// y itself.
module rns_reverse_tb;
  import rns_pkg::*;
  int checks = 0;
  int failures = 0;

  localparam longint unsigned MTOT = 64'd3669186634717;

  logic [NUM_MODULI-1:0][11:0] s;
  logic [41:0]                 y;

  rns_reverse dut (.s(s), .y(y));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input longint unsigned v);
    for (int i = 0; i < NUM_MODULI; i++) s[i] = 12'(v % DEFAULT_MODULI[i]);
    #1;
    checks++;
    if (longint'(y) != longint'(v)) begin
      failures++;
      if (failures < 20) $display("FAIL y=%0d: got %0d", v, y);
    end
  endtask

  initial begin
    run(0); run(1); run(MTOT - 1); run(461); run(977 * 2011); run(MTOT / 2);
    for (int n = 0; n < 20000; n++) begin
      run(({longint'($urandom()), 32'($urandom())}) % MTOT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
