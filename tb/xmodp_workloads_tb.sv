// xmodp_workloads_tb - X mod P at every size of the published comparison.
//
// Eight xmodp instances: input widths 400 and 500 bits, each with the moduli
// 461, 977, 2011 and 4051. Random words, all-ones words and exact multiples
// of each modulus are reduced and compared with the % operator on the full
// input.
module xmodp_workloads_tb;
  int checks = 0;
  int failures = 0;

  localparam longint unsigned PS [4] = '{64'd461, 64'd977, 64'd2011, 64'd4051};

  logic [399:0] x4;
  logic [499:0] x5;
  logic [3:0][11:0] r4, r5;

  for (genvar i = 0; i < 4; i++) begin : g_p
    localparam int unsigned RW = $clog2(PS[i]);
    logic [RW-1:0] a, b;
    xmodp #(.XW(400), .P(PS[i])) u400 (.x(x4), .r(a));
    xmodp #(.XW(500), .P(PS[i])) u500 (.x(x5), .r(b));
    assign r4[i] = 12'(a);
    assign r5[i] = 12'(b);
  end

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [499:0] rand500();
    logic [499:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      x5 = rand500();
      if (n == 0) x5 = '1;
      if (n % 5 == 1) x5 = x5 - (x5 % 500'(PS[n % 4]));
      x4 = x5[399:0];
      if (n % 5 == 2) x4 = x4 - (x4 % 400'(PS[n % 4]));
      #1;
      for (int i = 0; i < 4; i++) begin
        checks += 2;
        if (400'(r4[i]) != x4 % 400'(PS[i])) begin
          failures++;
          $display("FAIL 400-bit mod %0d", PS[i]);
        end
        if (500'(r5[i]) != x5 % 500'(PS[i])) begin
          failures++;
          $display("FAIL 500-bit mod %0d", PS[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
