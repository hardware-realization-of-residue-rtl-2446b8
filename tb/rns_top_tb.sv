// rns_top_tb - end-to-end testbench for rns_top at its default size.
//
// Two 400-bit operands per operation, moduli 461, 977, 2011 and 4051. The
// testbench issues a stream of additions and multiplications, some
// back to back, some with idle cycles between them, and one reset in the
// middle of the stream that must discard the operations in flight. Every
// result is compared with (x_1 op x_2) mod M formed with 800-bit arithmetic,
// and every per-modulus residue with (x_1 op x_2) mod p_i. The latency from
// issue to out_valid must be 3 cycles.
//
// Mechanisms counted, each of which must occur at least once: additions,
// multiplications, results that wrap around the dynamic range M, operations
// issued back to back, idle cycles in the stream, and operations dropped by
// reset.
module rns_top_tb;
  import rns_pkg::*;

  localparam int          LAT  = 3;
  localparam int unsigned NOPS = 400;

  int checks = 0;
  int failures = 0;

  logic               clk = 1'b0;
  logic               rst_n;
  logic               in_valid;
  rns_op_e            in_op;
  logic [1:0][399:0]  in_x;
  logic               out_valid;
  logic [NUM_MODULI-1:0][11:0] out_res;
  logic [41:0]        y;

  rns_top dut (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_op     (in_op),
    .in_x      (in_x),
    .out_valid (out_valid),
    .out_res   (out_res),
    .y         (y)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver side: exact x_1 op x_2 of each issued operation. Monitor side:
  // the cycle at which the DUT sampled each operation.
  logic [799:0] exp_q[$];
  int           cyc_q[$];
  int   cycle = 0;
  int   n_add = 0, n_mul = 0, n_wrap = 0, n_b2b = 0, n_idle = 0, n_flushed = 0;
  int   n_done = 0;

  localparam logic [799:0] MTOT = 800'(moduli_product(DEFAULT_MODULI));

  function automatic logic [399:0] rand400(int bits);
    logic [399:0] v;
    for (int i = 0; i < 13; i++) v[i*32 +: 32] = $urandom();
    return (bits >= 400) ? v : (v & ((400'd1 << bits) - 1));
  endfunction

  // Monitor: compare every result with the oldest expected one.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (in_valid && rst_n) cyc_q.push_back(cycle);
    if (out_valid && rst_n) begin  // register contents are arbitrary before reset
      logic [799:0] e;
      int           c;
      checks++;
      if (exp_q.size() == 0 || cyc_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result at cycle %0d", cycle);
      end else begin
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        if (800'(y) != e % MTOT) begin
          failures++;
          $display("FAIL result %0d: got %0d expected %0d", n_done, y, e % MTOT);
        end
        for (int i = 0; i < NUM_MODULI; i++) begin
          checks++;
          if (800'(out_res[i]) != e % 800'(DEFAULT_MODULI[i])) begin
            failures++;
            $display("FAIL residue %0d of result %0d", i, n_done);
          end
        end
        checks++;
        if (cycle - c != LAT) begin
          failures++;
          $display("FAIL latency %0d cycles, expected %0d", cycle - c, LAT);
        end
        if (e >= MTOT) n_wrap++;
        n_done++;
      end
    end
  end

  // Inputs change on the falling edge only, away from the sampling edge.
  task automatic issue(input rns_op_e op, input logic [399:0] a, input logic [399:0] b);
    @(negedge clk);
    in_valid = 1'b1;
    in_op    = op;
    in_x     = {b, a};
    exp_q.push_back((op == OP_ADD) ? (800'(a) + 800'(b)) : (800'(a) * 800'(b)));
    if (op == OP_ADD) n_add++; else n_mul++;
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      in_valid = 1'b0;
    end
  endtask

  initial begin
    int bits;
    bit prev_issue;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_op    = OP_ADD;
    in_x     = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Small operands first: results inside the dynamic range.
    issue(OP_ADD, 400'd45, 400'd15);
    issue(OP_MUL, 400'd45, 400'd15);
    issue(OP_MUL, 400'd1048575, 400'd1048575);
    issue(OP_ADD, 400'(64'd3669186634716), 400'd1);  // M-1 + 1 wraps to 0
    prev_issue = 1'b1;
    for (int n = 0; n < NOPS; n++) begin
      if ($urandom_range(0, 3) == 0) begin
        idle(1);
        n_idle++;
        prev_issue = 1'b0;
      end
      bits = (n % 3 == 0) ? 20 : ((n % 3 == 1) ? 41 : 400);
      if (prev_issue) n_b2b++;
      issue($urandom_range(0, 1) ? OP_MUL : OP_ADD, rand400(bits), rand400(bits));
      prev_issue = 1'b1;
    end
    idle(LAT + 2);
    // Reset with two operations in flight: both must be dropped.
    issue(OP_MUL, rand400(400), rand400(400));
    issue(OP_ADD, rand400(400), rand400(400));
    @(negedge clk);
    in_valid = 1'b0;
    rst_n    = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    n_flushed = exp_q.size();
    exp_q.delete();
    cyc_q.delete();
    issue(OP_MUL, '1, '1);
    idle(LAT + 2);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("mechanisms: add=%0d mul=%0d wrap=%0d back_to_back=%0d idle=%0d flushed=%0d results=%0d",
             n_add, n_mul, n_wrap, n_b2b, n_idle, n_flushed, n_done);
    checks++;
    if (n_add == 0 || n_mul == 0 || n_wrap == 0 || n_b2b == 0 || n_idle == 0 || n_flushed == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
