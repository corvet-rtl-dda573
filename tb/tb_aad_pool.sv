// tb_aad_pool: streams random values into the pooling unit, with random gaps
// (often none) and extreme values. It checks every window result against
// sum_{i<j}|x_i - x_j| / (N(N-1)), computed on the testbench's own copy of the
// window. Each result must arrive exactly 4 cycles after the value that
// completes its window, also when windows follow each other back to back.
// busy must be high exactly while a window is in flight. The test also checks
// the number of windows for the stride, and that clear restarts the window.
// NWIN and STRIDE are testbench parameters (defaults as the design).
module tb_aad_pool
  import corvet_pkg::*;
#(
  parameter int unsigned NWIN = 4,
  parameter int unsigned STRIDE = 4
);
  localparam int LAT = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, clear = 0, in_valid = 0, busy, out_valid;
  logic signed [DW-1:0] in_data = 0;
  logic [DW-1:0] out_data;
  int checks = 0, failures = 0;
  int ref_win[$];
  int exp_v[$], exp_due[$];
  int since = 0, windows = 0, expected_windows = 0, cyc = 0, back_to_back = 0;
  bit fired = 0;

  aad_pool #(.NWIN(NWIN), .STRIDE(STRIDE)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int aad(int w[$]);
    longint s = 0;
    for (int i = 0; i < int'(NWIN); i++)
      for (int j = i + 1; j < int'(NWIN); j++)
        s += (w[i] > w[j]) ? w[i] - w[j] : w[j] - w[i];
    return int'(s / (NWIN * (NWIN - 1)));
  endfunction

  // one clock; then compare the outputs with the expected queue
  task automatic step();
    @(negedge clk);
    cyc++;
    if (out_valid) begin
      check(exp_v.size() > 0, "unexpected result");
      if (exp_v.size() > 0) begin
        int v, d;
        v = exp_v.pop_front(); d = exp_due.pop_front();
        check(int'(out_data) == v, $sformatf("aad(%0d,%0d) got %0d exp %0d", NWIN, STRIDE, out_data, v));
        check(cyc == d, $sformatf("latency: result at %0d, due %0d", cyc, d));
        windows++;
      end
    end
    check(busy == (exp_v.size() > 0), "busy while a window is in flight");
  endtask

  task automatic push(int v);
    in_data = DW'(v); in_valid = 1;
    ref_win.push_back(v);
    if (ref_win.size() > int'(NWIN)) void'(ref_win.pop_front());
    since++;
    if (ref_win.size() == int'(NWIN) && (!fired || since == int'(STRIDE))) begin
      fired = 1; since = 0;
      expected_windows++;
      if (exp_v.size() > 0) back_to_back++;
      exp_v.push_back(aad(ref_win));
      exp_due.push_back(cyc + 1 + LAT);   // taken at the next edge, out LAT edges later
    end
    step();
    in_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 600; i++) begin
        push((i % 7 == 0) ? ((i % 2) ? 32767 : -32768) : int'($urandom_range(65535, 0)) - 32768);
        if ($urandom_range(1, 0)) repeat ($urandom_range(2, 1)) step();
      end
      repeat (LAT + 2) step();
      check(exp_v.size() == 0, "all results out");
      // clear restarts the window
      clear = 1; step(); clear = 0;
      ref_win.delete(); since = 0; fired = 0;
    end
    check(windows == expected_windows && windows > 0, $sformatf("windows %0d/%0d", windows, expected_windows));
    check(back_to_back > 0 || STRIDE == NWIN, "overlapping windows seen");
    $display("windows=%0d back_to_back=%0d", windows, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
