// tb_multi_af: drives random Q7.8 values through every activation function and
// compares the result with real-valued math ($exp, $tanh): ReLU and identity
// must be exact and take 2 cycles; the CORDIC-based functions must be within
// 0.02 + 1% of the exact value (GELU is compared with its sigmoid form
// x*sigmoid(1.702x)). SoftMax vectors of random length are checked element by
// element in input order, and their sum must be close to 1.
module tb_multi_af;
  import corvet_pkg::*;

  logic clk = 0, rst_n = 0;
  af_sel_e sel_af = AF_RELU;
  logic in_valid = 0, in_last = 0, in_ready, out_valid, busy;
  logic [DW-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  int counted[8];

  always #5 clk = ~clk;

  multi_af dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sig(real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real clampx(real v);
    return v > 8.0 ? 8.0 : (v < -8.0 ? -8.0 : v);
  endfunction

  function automatic real expect_af(af_sel_e f, real x);
    case (f)
      AF_RELU:    return x > 0 ? x : 0.0;
      AF_SIGMOID: return sig(clampx(x));
      AF_TANH:    return $tanh(clampx(x));
      AF_GELU:    return x * sig(clampx(1.702 * x));
      AF_SWISH:   return x * sig(clampx(x));
      AF_SELU:    return x > 0 ? 1.0507 * x : 1.0507 * 1.67326 * ($exp(clampx(x)) - 1.0);
      default:    return x;
    endcase
  endfunction

  function automatic real q78(logic [DW-1:0] v);
    return real'($signed(v)) / 256.0;
  endfunction

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  // send one element, return the cycle count until out_valid
  task automatic send(af_sel_e f, logic [DW-1:0] d, logic last);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    sel_af = f; in_data = d; in_last = last; in_valid = 1;
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  task automatic one(af_sel_e f, logic [DW-1:0] d);
    int cyc;
    real e, g;
    send(f, d, 1'b0);
    cyc = 1;
    while (!out_valid) begin @(negedge clk); cyc++; end
    e = expect_af(f, q78(d));
    g = q78(out_data);
    if (e > 32767.0 / 256) e = 32767.0 / 256;
    if (e < -128.0) e = -128.0;
    checks++;
    counted[f]++;
    if (f == AF_RELU || f == AF_NONE) begin
      if (g != e) begin failures++; $display("FAIL fn %0d x=%f got %f exp %f", f, q78(d), g, e); end
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL bypass latency %0d", cyc); end
    end else if (absr(g - e) > 0.02 + 0.01 * absr(e)) begin
      failures++; $display("FAIL fn %0d x=%f got %f exp %f", f, q78(d), g, e);
    end
  endtask

  task automatic softmax(int n);
    logic [DW-1:0] v[$];
    real den, e, g, tot;
    int got;
    den = 0; tot = 0;
    for (int i = 0; i < n; i++) begin
      v.push_back(DW'($urandom_range(2048, 0) - 1024));   // [-4, 4]
      den += $exp(q78(v[i]));
    end
    fork
      for (int i = 0; i < n; i++) send(AF_SOFTMAX, v[i], i == n - 1);
      begin
        got = 0;
        while (got < n) begin
          @(negedge clk);
          if (out_valid) begin
            e = $exp(q78(v[got])) / den;
            g = q78(out_data);
            tot += g;
            checks++;
            if (absr(g - e) > 0.01) begin failures++; $display("FAIL softmax[%0d] got %f exp %f", got, g, e); end
            got++;
          end
        end
      end
    join
    checks++;
    counted[AF_SOFTMAX]++;
    if (absr(tot - 1.0) > 0.02 * n / 8 + 0.02) begin failures++; $display("FAIL softmax sum %f", tot); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after softmax"); end
  endtask

  initial begin
    af_sel_e f;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) if (k != AF_SOFTMAX) begin
      one(af_sel_e'(k), 16'h0000);
      one(af_sel_e'(k), 16'h0100);
      one(af_sel_e'(k), 16'hFF00);
      one(af_sel_e'(k), 16'h7FFF);
      one(af_sel_e'(k), 16'h8000);
    end
    for (int i = 0; i < 1500; i++) begin
      do f = af_sel_e'($urandom_range(7, 0)); while (f == AF_SOFTMAX);
      // mostly the interesting range [-8, 8], sometimes anywhere
      one(f, (i % 4 == 0) ? DW'($urandom) : DW'($urandom_range(4096, 0) - 2048));
    end
    softmax(1); softmax(2); softmax(64);
    for (int i = 0; i < 10; i++) softmax($urandom_range(64, 1));
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (counted[k] == 0) begin failures++; $display("FAIL function %0d never ran", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
