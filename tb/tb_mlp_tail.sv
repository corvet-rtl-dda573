// tb_mlp_tail: runs the part of a 196-64-32-32-10 multilayer perceptron that the
// default engine holds in one configuration: its last two weight layers,
// 32 -> 32 (ReLU) -> 10 (SoftMax). The first two layers need 196 and 64 inputs
// per neuron, more than the 32 a kernel bank holds, so they are left out.
//
// Both layers use 8-bit precision in accurate mode (5 CORDIC iterations per
// MAC). The weights and the inputs are random. The test loads the parameters
// once and then runs several inferences back to back. While each inference
// computes, the next input vector is streamed into the second input bank, so
// every start follows the previous DNNDone directly.
//
// Checks:
// - the hidden layer, bit-exact against the CORDIC neuron model followed by
//   ReLU;
// - the 10 SoftMax outputs against real-valued SoftMax of the model's
//   pre-activations, within the Q3.4 resolution of 8-bit words;
// - the hidden layer's compute time, J*(iters+1) + 2 cycles from start to its
//   ComputeDone, seen as the first AF input.
// It prints the cycles per inference, and fails unless ReLU both clipped and
// passed values and some output probabilities were non-zero.
module tb_mlp_tail;
  import corvet_pkg::*;
  import tb_model_pkg::sext;
  import tb_model_pkg::neuron;

  localparam int NP = N_PE_DEF;
  localparam int JM = J_MAX_DEF;
  localparam int LM = L_MAX_DEF;
  localparam int LW = $clog2(LM);
  localparam int JW = $clog2(JM);
  localparam int N_IN = 32, N_HID = 32, N_OUT = 10;
  localparam int P = 8, FB = P / 2, SHIFT = 3, RUNS = 6;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [LW:0] cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0;
  logic param_restart = 0, load_param_weight = 0;
  logic [DW-1:0] param_data = 0;
  logic [LW+1+$clog2(NP)+JW-1:0] param_addr;
  logic params_loaded;
  logic in_valid = 0;
  logic [DW-1:0] in_data = 0;
  logic [JW:0] in_count;
  logic in_full;
  logic start = 0, busy, layer_done, dnn_done, pool_valid;
  logic [LW-1:0] current_layer;
  logic [DW-1:0] dnn_out [NP];
  logic [7:0] out_count;
  logic [DW-1:0] pool_data;

  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  corvet_top dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    check(m_clip > 0 && m_pass > 0 && m_prob > 0, "ReLU clipping, ReLU pass-through and non-zero probabilities all seen");
    $display("clip=%0d pass=%0d prob=%0d", m_clip, m_pass, m_prob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  layer_cfg_t lc [2];
  longint w1 [N_HID][N_IN], b1 [N_HID];
  longint w2 [N_OUT][N_HID], b2 [N_OUT];
  longint xq [$];                     // queued input vectors, N_IN words each

  task automatic write_cfg(int addr, logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = (LW+1)'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic send_param(longint v);
    load_param_weight = 1; param_data = DW'(v);
    @(negedge clk);
    load_param_weight = 0;
  endtask

  task automatic send_input();
    for (int j = 0; j < N_IN; j++) begin
      longint v;
      v = longint'($urandom_range(127, 0)) - 64;
      xq.push_back(v);
      in_valid = 1; in_data = DW'(v);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  // time of the first AF input of each inference = ComputeDone of layer 0
  longint t_start, t_af;
  bit af_seen;
  bit loading = 1'b0;
  int m_clip = 0, m_pass = 0, m_prob = 0;   // ReLU clipped / passed, non-zero probabilities
  always @(posedge clk) if (dut.af_valid && dut.af_ready && !af_seen && current_layer == '0) begin
    af_seen <= 1'b1;
    t_af    <= cyc;
  end

  initial begin
    longint t_prev_done;
    repeat (3) @(negedge clk);
    rst_n = 1;
    lc[0] = '0;
    lc[0].n_neurons = 8'(N_HID); lc[0].n_inputs = 7'(N_IN); lc[0].prec = PREC_8;
    lc[0].iters = paper_iters(PREC_8, 1'b1); lc[0].out_shift = 5'(SHIFT);
    lc[0].af_en = 1'b1; lc[0].af_sel = AF_RELU;
    lc[1] = lc[0];
    lc[1].n_neurons = 8'(N_OUT); lc[1].n_inputs = 7'(N_HID); lc[1].af_sel = AF_SOFTMAX;
    write_cfg(0, CFG_W'(lc[0]));
    write_cfg(1, CFG_W'(lc[1]));
    write_cfg(LM, CFG_W'({1'b0, (LW+1)'(2)}));
    for (int n = 0; n < N_HID; n++) begin
      b1[n] = longint'($urandom_range(31, 0)) - 16;
      for (int j = 0; j < N_IN; j++) w1[n][j] = longint'($urandom_range(7, 0)) - 4;
    end
    for (int n = 0; n < N_OUT; n++) begin
      b2[n] = longint'($urandom_range(31, 0)) - 16;
      for (int j = 0; j < N_HID; j++) w2[n][j] = longint'($urandom_range(7, 0)) - 4;
    end
    @(negedge clk); param_restart = 1; @(negedge clk); param_restart = 0;
    for (int n = 0; n < N_HID; n++) for (int j = 0; j < N_IN; j++) send_param(w1[n][j]);
    for (int n = 0; n < N_HID; n++) send_param(b1[n]);
    for (int n = 0; n < N_OUT; n++) for (int j = 0; j < N_HID; j++) send_param(w2[n][j]);
    for (int n = 0; n < N_OUT; n++) send_param(b2[n]);
    @(negedge clk);
    check(params_loaded, "parameters loaded");
    send_input();
    t_prev_done = 0;
    for (int r = 0; r < RUNS; r++) begin
      longint x[], h[], z[];
      real den, e, g, tol;
      x = new[JM]; h = new[JM]; z = new[N_OUT];
      for (int j = 0; j < JM; j++) x[j] = (j < N_IN) ? xq.pop_front() : 0;
      @(negedge clk);
      start = 1; af_seen = 0; t_start = cyc;
      @(negedge clk); start = 0;
      // next vector into the second bank while this one computes
      if (r < RUNS - 1) begin
        loading = 1'b1;
        fork begin send_input(); loading = 1'b0; end join_none
      end
      // reference: hidden layer with ReLU, then the output pre-activations
      for (int n = 0; n < N_HID; n++) begin
        longint w[], y;
        w = new[N_IN];
        for (int j = 0; j < N_IN; j++) w[j] = w1[n][j];
        y = neuron(w, x, b1[n], N_IN, P, int'(lc[0].iters), SHIFT);
        h[n] = (y > 0) ? y : 0;
        if (y < 0) m_clip++;
        if (y > 0 && y < 127) m_pass++;
      end
      for (int j = N_HID; j < JM; j++) h[j] = 0;
      den = 0;
      for (int n = 0; n < N_OUT; n++) begin
        longint w[];
        w = new[N_HID];
        for (int j = 0; j < N_HID; j++) w[j] = w2[n][j];
        z[n] = neuron(w, h, b2[n], N_HID, P, int'(lc[1].iters), SHIFT);
        den += $exp(real'(z[n]) / real'(1 << FB) > 8.0 ? 8.0 : real'(z[n]) / real'(1 << FB));
      end
      while (!layer_done) @(negedge clk);
      for (int n = 0; n < N_HID; n++)
        check(sext(longint'(dnn_out[n]), 16) == h[n],
              $sformatf("run %0d hidden %0d got %0d exp %0d", r, n, sext(longint'(dnn_out[n]), 16), h[n]));
      check(t_af - t_start == longint'(N_IN) * (longint'(lc[0].iters) + 1) + 2 + 2,
            $sformatf("hidden layer compute time %0d", t_af - t_start));
      while (!dnn_done) @(negedge clk);
      while (loading) @(negedge clk);
      check(out_count == 8'(N_OUT), "out_count");
      for (int n = 0; n < N_OUT; n++) begin
        real zr;
        zr = real'(z[n]) / real'(1 << FB);
        e = $exp(zr > 8.0 ? 8.0 : (zr < -8.0 ? -8.0 : zr)) / den * real'(1 << FB);
        g = real'(sext(longint'(dnn_out[n]), 16));
        if (g > 0) m_prob++;
        tol = 1.5 + 0.01 * real'(1 << FB);
        check((g - e) <= tol && (e - g) <= tol, $sformatf("run %0d softmax %0d got %f exp %f", r, n, g, e));
      end
      if (r > 0) $display("inference %0d: %0d cycles from the previous DNNDone", r, cyc - t_prev_done);
      t_prev_done = cyc;
    end
    check(m_clip > 0 && m_pass > 0 && m_prob > 0, "ReLU clipping, ReLU pass-through and non-zero probabilities all seen");
    $display("clip=%0d pass=%0d prob=%0d", m_clip, m_pass, m_prob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
