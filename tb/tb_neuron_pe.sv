// tb_neuron_pe: drives one PE with a weight memory and an input vector held in
// the testbench (indexed combinationally by the PE's read address and Index),
// then compares the neuron output with the integer reference model, in 4/8/16
// bit precision and approximate/accurate iteration counts, over several layers.
// It also checks the layer latency J*(iters+1) (+2 cycles of start/finish),
// that Index counts the MACs, and that ComputeDone stays low until the end.
module tb_neuron_pe;
  import corvet_pkg::*;
  import tb_model_pkg::*;

  localparam int unsigned J_MAX = 32, L_MAX = 4, LW = 2, JW = 5, XW = 6;

  logic clk = 0, rst_n = 0;
  logic b_we = 0; logic [LW-1:0] b_layer = 0; logic [DW-1:0] b_data = 0;
  logic compute_init = 0;
  layer_cfg_t cfg;
  logic [LW-1:0] layer = 0;
  logic [DW-1:0] x_in, w_rdata, y_out;
  logic [LW+JW-1:0] w_raddr;
  logic [XW-1:0] index;
  logic compute_done;

  logic [DW-1:0] wmem [L_MAX * J_MAX];
  logic [DW-1:0] xmem [J_MAX];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  neuron_pe #(.J_MAX(J_MAX), .L_MAX(L_MAX)) dut (.*);

  assign w_rdata = wmem[w_raddr];
  assign x_in    = xmem[JW'(cfg.n_inputs - 7'd1 - 7'(index))];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int l, int jn, precision_e pr, int n, int shift);
    longint w[], x[], bias, exp_y;
    int p, cyc, last_idx;
    p = prec_bits(int'(pr));
    w = new[jn]; x = new[jn];
    for (int j = 0; j < jn; j++) begin
      w[j] = longint'($urandom_range(65535, 0));
      x[j] = longint'($urandom_range(65535, 0));
      wmem[l * J_MAX + j] = DW'(w[j]);
      xmem[j] = DW'(x[j]);
    end
    bias = longint'($urandom_range(65535, 0));
    @(negedge clk);
    b_we = 1; b_layer = LW'(l); b_data = DW'(bias);
    @(negedge clk);
    b_we = 0;
    cfg.n_neurons = 1; cfg.n_inputs = 7'(jn); cfg.prec = pr; cfg.iters = IT_W'(n);
    cfg.out_shift = SH_W'(shift); cfg.af_en = 0; cfg.af_sel = AF_NONE;
    layer = LW'(l);
    compute_init = 1;
    @(negedge clk);
    compute_init = 0;
    cyc = 1; last_idx = 0;
    while (!compute_done) begin
      if (int'(index) < last_idx) begin failures++; $display("FAIL index went down"); end
      last_idx = int'(index);
      @(negedge clk); cyc++;
    end
    exp_y = neuron(w, x, bias, jn, p, n, shift);
    checks += 3;
    if (sext(longint'(y_out), p) != exp_y) begin
      failures++;
      $display("FAIL l=%0d J=%0d p=%0d n=%0d got=%0d exp=%0d", l, jn, p, n, sext(longint'(y_out), p), exp_y);
    end
    if (cyc != jn * (n + 1) + 2) begin
      failures++;
      $display("FAIL latency J=%0d n=%0d cycles=%0d exp=%0d", jn, n, cyc, jn * (n + 1) + 2);
    end
    if (int'(index) != jn) begin
      failures++;
      $display("FAIL index=%0d exp=%0d", index, jn);
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      run_layer(r % 4, $urandom_range(32, 1), PREC_8,  4, $urandom_range(8, 0));
      run_layer(r % 4, $urandom_range(32, 1), PREC_8,  5, $urandom_range(8, 0));
      run_layer(r % 4, $urandom_range(32, 1), PREC_16, 7, $urandom_range(16, 0));
      run_layer(r % 4, $urandom_range(32, 1), PREC_16, 9, $urandom_range(16, 0));
      run_layer(r % 4, $urandom_range(32, 1), PREC_4,  4, $urandom_range(4, 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
