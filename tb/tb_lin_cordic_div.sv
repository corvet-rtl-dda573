// tb_lin_cordic_div: random dividends and positive divisors with |p/q| < 1.9,
// small and large divisors, checks p/q to 4e-5 + 2 LSB and the NIT+1 = 18 cycle
// latency.
module tb_lin_cordic_div;
  import corvet_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [CW-1:0] p = 0, q = 0, quot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lin_cordic_div dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(longint pv, longint qv);
    real e, g, err;
    int cyc;
    @(negedge clk);
    p = CW'(pv); q = CW'(qv); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = real'(pv) / real'(qv);
    g = real'(quot) / 65536.0;
    err = (g > e) ? g - e : e - g;
    checks += 2;
    if (err > 4e-5 + 2.0 / 65536) begin failures++; $display("FAIL %0d/%0d got %f exp %f", pv, qv, g, e); end
    if (cyc != 18) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(0, 65536); one(65536, 65536); one(-65536, 65536); one(1, 3);
    for (int i = 0; i < 400; i++) begin
      longint qv, pv;
      qv = (i % 2) ? longint'($urandom_range(400000, 20000)) : longint'($urandom) * 64 + 65536;
      pv = longint'($urandom_range(1900, 0) - 950) * qv / 1000;
      one(pv, qv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
