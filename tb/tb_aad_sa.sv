// tb_aad_sa: random and extreme input pairs; checks |a-b| and |a-b|/2 against
// integer arithmetic and the 2-cycle pipeline latency with back-to-back inputs.
module tb_aad_sa;
  import corvet_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [DW-1:0] a = 0, b = 0;
  logic [DW:0] absdiff;
  logic [DW-1:0] aad2;
  int checks = 0, failures = 0;
  int exp_q[$];
  int sent = 0;

  always #5 clk = ~clk;

  aad_sa dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard with latency check: output k must come 2 cycles after input k
  int in_cyc[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) in_cyc.push_back(cyc);
    if (rst_n && out_valid) begin
      int e, c;
      e = exp_q.pop_front();
      c = in_cyc.pop_front();
      checks += 3;
      if (int'(absdiff) != e) begin failures++; $display("FAIL absdiff %0d exp %0d", absdiff, e); end
      if (int'(aad2) != e / 2) begin failures++; $display("FAIL aad2 %0d exp %0d", aad2, e / 2); end
      if (cyc - c != 2) begin failures++; $display("FAIL latency %0d", cyc - c); end
    end
  end

  task automatic put(int av, int bv, logic v);
    @(negedge clk);
    a = DW'(av); b = DW'(bv); in_valid = v;
    if (v) begin
      exp_q.push_back((av > bv) ? av - bv : bv - av);
      sent++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    put(32767, -32768, 1); put(-32768, 32767, 1); put(5, 5, 1); put(0, -1, 1);
    for (int i = 0; i < 2000; i++)
      put(int'($urandom_range(65535, 0)) - 32768, int'($urandom_range(65535, 0)) - 32768, $urandom_range(3, 0) != 0);
    put(0, 0, 0);
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
