// rns_forward_tb - self-checking testbench for rns_forward.
//
// Default size: two 400-bit operands, moduli 461, 977, 2011 and 4051. Random
// words, short words and all-ones words are converted and every residue is
// compared with the % operator applied to the full 400-bit operand.
module rns_forward_tb;
  import rns_pkg::*;
  int checks = 0;
  int failures = 0;

  logic [1:0][399:0]                x;
  logic [NUM_MODULI-1:0][1:0][11:0] res;

  rns_forward dut (.x(x), .res(res));

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [399:0] rand400();
    logic [399:0] v;
    for (int i = 0; i < 13; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    logic [399:0] exp;
    for (int n = 0; n < 2000; n++) begin
      x[0] = rand400();
      x[1] = (n % 4 == 0) ? '1 : rand400() >> $urandom_range(0, 399);
      #1;
      for (int i = 0; i < NUM_MODULI; i++) begin
        for (int k = 0; k < 2; k++) begin
          exp = x[k] % 400'(DEFAULT_MODULI[i]);
          checks++;
          if (400'(res[i][k]) != exp) begin
            failures++;
            if (failures < 20) $display("FAIL operand %0d mod %0d: got %0d expected %0d",
                                        k, DEFAULT_MODULI[i], res[i][k], exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
