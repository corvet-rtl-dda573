// tb_kernel_mem_bank: writes random words to random addresses of the bank,
// keeps a shadow copy, and reads every address back, including after
// overwrites. Also checks that a write does not disturb other addresses.
module tb_kernel_mem_bank;
  localparam int unsigned W = 16, DEPTH = 128, AW = 7;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  kernel_mem_bank #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every address
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = W'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 4; r++) begin
      // random overwrites
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        we = 1; waddr = AW'($urandom_range(DEPTH - 1, 0)); wdata = W'($urandom);
        shadow[waddr] = wdata;
      end
      @(negedge clk); we = 0;
      for (int i = 0; i < DEPTH; i++) begin
        raddr = AW'(i);
        #1;
        checks++;
        if (rdata !== shadow[i]) begin
          failures++;
          $display("FAIL addr %0d got %h exp %h", i, rdata, shadow[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
