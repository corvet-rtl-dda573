// tb_iter_cordic_mac: self-checking test of the iterative CORDIC MAC.
//
// For random operands in 4-, 8- and 16-bit precision and for the paper's
// approximate and accurate iteration counts it checks
//   * the result bit-exactly against a reference model of signed-digit linear
//     CORDIC written here with integer arithmetic,
//   * the distance to the true product acc + a*b against the analytic bound
//     |a| * 2^(P-1) * 2^-(n-1),
//   * the latency: done must come exactly `iters` cycles after start
//     (4/5 cycles for 8-bit, 7/9 for 16-bit, 4 for 4-bit).
module tb_iter_cordic_mac;
  import corvet_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  precision_e prec;
  logic [IT_W-1:0] iters;
  logic [DW-1:0] a, b;
  logic signed [ACC_W-1:0] acc_in, acc_out;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  iter_cordic_mac dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(longint av, longint bv, longint acc, int p, int n);
    longint x, y, z, one;
    x = av * (longint'(1) <<< (p - 1));
    one = longint'(1) <<< 15;               // Q.15 fraction
    z = bv * (longint'(1) <<< (16 - p));     // b / 2^(p-1) in Q.15
    y = acc;
    for (int k = 0; k < n; k++) begin
      if (z >= 0) begin y = y + (x >>> k); z = z - (one >>> k); end
      else        begin y = y - (x >>> k); z = z + (one >>> k); end
    end
    return y;
  endfunction

  task automatic run_one(precision_e pr, int n, longint av, longint bv, longint acc);
    int p, cyc;
    longint exp_y, tru, err, bound;
    p = prec_bits(pr);
    @(negedge clk);
    prec = pr; iters = IT_W'(n);
    a = DW'(av); b = DW'(bv); acc_in = ACC_W'(acc);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_y = model(av, bv, acc, p, n);
    tru   = acc + av * bv;
    err   = longint'(acc_out) - tru;
    if (err < 0) err = -err;
    bound = (av < 0 ? -av : av) * (longint'(1) <<< (p - 1));
    bound = bound >>> (n - 1);
    checks += 3;
    if (longint'(acc_out) != exp_y) begin
      failures++;
      $display("FAIL model p=%0d n=%0d a=%0d b=%0d acc=%0d got=%0d exp=%0d", p, n, av, bv, acc, acc_out, exp_y);
    end
    if (err > bound + 1) begin
      failures++;
      $display("FAIL bound p=%0d n=%0d a=%0d b=%0d err=%0d bound=%0d", p, n, av, bv, err, bound);
    end
    if (cyc != n) begin
      failures++;
      $display("FAIL latency p=%0d n=%0d cycles=%0d", p, n, cyc);
    end
  endtask

  function automatic longint rnd(int p);
    longint v;
    v = longint'($urandom_range((1 << p) - 1, 0));
    return v - (longint'(1) <<< (p - 1));
  endfunction

  initial begin
    prec = PREC_8; iters = 4; a = 0; b = 0; acc_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // corner cases
    run_one(PREC_8, 5, 127, 127, 0);
    run_one(PREC_8, 5, -128, -128, 0);
    run_one(PREC_8, 4, -128, 127, 1000);
    run_one(PREC_16, 9, 32767, -32768, 0);
    run_one(PREC_4, 4, -8, 7, -5);
    for (int i = 0; i < 300; i++) begin
      run_one(PREC_4,  paper_iters(PREC_4, 1'b1),  rnd(4),  rnd(4),  longint'($urandom_range(2000, 0)) - 1000);
      run_one(PREC_8,  paper_iters(PREC_8, 1'b0),  rnd(8),  rnd(8),  longint'($urandom_range(2000, 0)) - 1000);
      run_one(PREC_8,  paper_iters(PREC_8, 1'b1),  rnd(8),  rnd(8),  longint'($urandom_range(2000, 0)) - 1000);
      run_one(PREC_16, paper_iters(PREC_16, 1'b0), rnd(16), rnd(16), longint'($urandom_range(2000, 0)) - 1000);
      run_one(PREC_16, paper_iters(PREC_16, 1'b1), rnd(16), rnd(16), longint'($urandom_range(2000, 0)) - 1000);
      run_one(PREC_16, 16, rnd(16), rnd(16), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
