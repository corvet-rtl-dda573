// tb_input_preprocessor: tests the double-banked input buffer. Each round
// streams a vector of random length, with gaps, into the fill bank and checks
// the tracked count after every word. Some vectors are longer than J_MAX, to
// check that full rises and later words are dropped. The round then swaps the
// banks and reads back every position of the vector just loaded. While it reads,
// it streams the next vector into the other bank and checks that the read bank
// does not change. It also checks that a word sent in the swap cycle is dropped.
module tb_input_preprocessor;
  import corvet_pkg::*;
  localparam int unsigned J_MAX = 32, JW = 5;

  logic clk = 0, rst_n = 0, swap = 0, in_valid = 0, full;
  logic [DW-1:0] in_data = 0, rd_data;
  logic [JW:0] count;
  logic [JW-1:0] rd_idx = 0;
  logic [DW-1:0] fill_q [$], read_q [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  input_preprocessor #(.J_MAX(J_MAX)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // read back every position of the read bank
  task automatic read_all();
    for (int i = 0; i < read_q.size(); i++) begin
      rd_idx = JW'(i); #1;
      check(rd_data == read_q[i], $sformatf("rd %0d", i));
    end
    @(negedge clk);   // back in step with the clock
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(count == 0 && !full, "empty after reset");
    for (int r = 0; r < 30; r++) begin
      int len;
      len = (r % 5 == 4) ? 40 : $urandom_range(32, 1);
      for (int i = 0; i < len; i++) begin
        while ($urandom_range(2, 0) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_data = DW'($urandom);
        if (fill_q.size() < J_MAX) fill_q.push_back(in_data);
        @(negedge clk);
        in_valid = 0;
        check(int'(count) == fill_q.size(), $sformatf("count %0d exp %0d", count, fill_q.size()));
        // the read bank is untouched while the other one fills
        if (i % 7 == 0) read_all();
      end
      check(full == (fill_q.size() == J_MAX), "full flag");
      // swap; a word offered in the swap cycle is dropped
      swap = 1; in_valid = $urandom_range(1, 0); in_data = DW'($urandom);
      @(negedge clk);
      swap = 0; in_valid = 0;
      check(count == 0, "fill bank empty after swap");
      read_q = fill_q;
      fill_q.delete();
      read_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
