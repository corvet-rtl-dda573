// tb_hyp_cordic: compares sinh/cosh from the CORDIC with the real-valued
// $sinh/$cosh for arguments across [-8, 8] (and beyond, where the clamp must
// hold the result at |x| = 8). Tolerance: 1e-3 relative plus 4 LSB. Also checks
// the 20-cycle latency.
module tb_hyp_cordic;
  import corvet_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [CW-1:0] theta = 0, sinh_o, cosh_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hyp_cordic dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(real xr);
    real xc, es, ec, gs, gc;
    int cyc;
    @(negedge clk);
    theta = CW'($rtoi(xr * 65536.0));
    start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    xc = (xr > 8.0) ? 8.0 : (xr < -8.0) ? -8.0 : real'(theta) / 65536.0;
    es = $sinh(xc); ec = $cosh(xc);
    gs = real'(sinh_o) / 65536.0; gc = real'(cosh_o) / 65536.0;
    checks += 3;
    if ((gs - es) > 1e-3 * (es < 0 ? -es : es) + 4.0 / 65536 || (es - gs) > 1e-3 * (es < 0 ? -es : es) + 4.0 / 65536) begin
      failures++; $display("FAIL sinh(%f) got %f exp %f", xc, gs, es);
    end
    if ((gc - ec) > 1e-3 * ec + 4.0 / 65536 || (ec - gc) > 1e-3 * ec + 4.0 / 65536) begin
      failures++; $display("FAIL cosh(%f) got %f exp %f", xc, gc, ec);
    end
    if (cyc != 20) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(0.0); one(1.0); one(-1.0); one(0.5); one(7.99); one(-7.99); one(9.5); one(-12.0);
    for (int i = 0; i < 300; i++) one((real'($urandom_range(16000, 0)) - 8000.0) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
