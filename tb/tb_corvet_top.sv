// tb_corvet_top: end-to-end test of the full-size engine (default parameters:
// 64 PEs, 32 inputs per neuron, 4 layers).
//
// Each run builds a random network: 1..4 layers, random neuron and input counts,
// precision 4/8/16, approximate or accurate iteration count (sometimes another
// count), output shift, activation function and pooling. The test writes the
// configuration registers, streams every weight and bias in load order (with
// random gaps), streams the input vector and pulses start. At every LayerDone it
// compares the layer's outputs on dnn_out with a bit-exact model of the CORDIC
// MAC neurons. Layers with an activation function are compared with real-valued
// math within a tolerance (exact for ReLU and identity). The next layer's model
// then takes the engine's own outputs as its inputs.
//
// Latency: a layer without an activation function must take
// J*(iters+1) + 4 cycles from the previous LayerDone (+1 from start). At
// DNNDone the test checks out_count and the AAD pooling results. Some runs
// reuse the loaded parameters with a new input vector; that vector is either
// loaded after DNNDone or streamed into the second input bank while the previous
// run is still computing (prefetch).
//
// Mechanism counters (the test fails if any stays zero): multi-layer runs, each
// precision, approximate and accurate iteration counts and a change between
// them inside one run, idle lanes, each activation function (SoftMax through its
// FIFO), pooling windows, parameter reuse, input prefetch, and a start ignored while the
// parameters are incomplete.
module tb_corvet_top;
  import corvet_pkg::*;
  import tb_model_pkg::*;

  localparam int NP = N_PE_DEF;
  localparam int JM = J_MAX_DEF;
  localparam int LM = L_MAX_DEF;
  localparam int LW = $clog2(LM);
  localparam int JW = $clog2(JM);

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
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- network
  int        n_layers;
  bit        pool_on;
  layer_cfg_t lc [LM];
  longint    wt [LM][NP][JM];
  longint    bs [LM][NP];
  longint    xin [JM];

  // mechanism counters
  int m_multi, m_prec[3], m_approx, m_accurate, m_switch, m_idle, m_af[8];
  int m_pool, m_reuse, m_gated, m_layers, m_prefetch;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write_cfg(int addr, logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = (LW+1)'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic new_network();
    n_layers = $urandom_range(LM, 1);
    pool_on  = $urandom_range(1, 0);
    for (int l = 0; l < n_layers; l++) begin
      int p;
      bit acc_mode;
      lc[l] = '0;
      lc[l].n_neurons = 8'($urandom_range(NP, 1));
      if ($urandom_range(3, 0) == 0) lc[l].n_neurons = 8'(NP);
      if (l == 0) lc[l].n_inputs = 7'($urandom_range(JM, 1));
      else lc[l].n_inputs = 7'((lc[l-1].n_neurons < JM && $urandom_range(3, 0) != 0) ? lc[l-1].n_neurons : $urandom_range(JM, 1));
      p = $urandom_range(2, 0);
      lc[l].prec = precision_e'(p);
      acc_mode = $urandom_range(1, 0);
      lc[l].iters = paper_iters(precision_e'(p), acc_mode);
      if ($urandom_range(7, 0) == 0) lc[l].iters = 5'($urandom_range(16, 1));
      lc[l].out_shift = 5'($urandom_range((p == 0) ? 4 : (p == 1) ? 9 : 12, 0));
      lc[l].af_en = $urandom_range(2, 0) != 0;
      lc[l].af_sel = af_sel_e'($urandom_range(7, 0));
      for (int n = 0; n < NP; n++) begin
        bs[l][n] = longint'($urandom_range(65535, 0));
        for (int j = 0; j < JM; j++) wt[l][n][j] = longint'($urandom_range(65535, 0));
      end
    end
  endtask

  task automatic configure();
    for (int l = 0; l < n_layers; l++) write_cfg(l, CFG_W'(lc[l]));
    write_cfg(LM, CFG_W'({pool_on, (LW+1)'(n_layers)}));
  endtask

  task automatic load_params();
    @(negedge clk); param_restart = 1; @(negedge clk); param_restart = 0;
    check(!params_loaded, "params_loaded cleared by restart");
    // a start before the parameters are complete must be ignored
    start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    check(!busy, "start ignored without parameters");
    if (!busy) m_gated++;
    for (int l = 0; l < n_layers; l++) begin
      for (int n = 0; n < lc[l].n_neurons; n++)
        for (int j = 0; j < lc[l].n_inputs; j++) begin
          load_param_weight = 1; param_data = DW'(wt[l][n][j]);
          @(negedge clk);
          load_param_weight = 0;
          if ($urandom_range(15, 0) == 0) @(negedge clk);
        end
      for (int n = 0; n < lc[l].n_neurons; n++) begin
        load_param_weight = 1; param_data = DW'(bs[l][n]);
        @(negedge clk);
        load_param_weight = 0;
      end
    end
    @(negedge clk);
    check(params_loaded, "params_loaded after the last bias");
  endtask

  task automatic load_input();
    for (int j = 0; j < lc[0].n_inputs; j++) begin
      xin[j] = longint'($urandom_range(65535, 0));
      in_valid = 1; in_data = DW'(xin[j]);
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(3, 0) == 0) @(negedge clk);
    end
    check(32'(in_count) == 32'(lc[0].n_inputs), "input count");
  endtask

  function automatic real clamp8(real v);
    return v > 8.0 ? 8.0 : (v < -8.0 ? -8.0 : v);
  endfunction

  function automatic real af_real(af_sel_e f, real x);
    case (f)
      AF_RELU:    return x > 0 ? x : 0.0;
      AF_SIGMOID: return 1.0 / (1.0 + $exp(-clamp8(x)));
      AF_TANH:    return $tanh(clamp8(x));
      AF_GELU:    return x / (1.0 + $exp(-clamp8(1.702 * x)));
      AF_SWISH:   return x / (1.0 + $exp(-clamp8(x)));
      AF_SELU:    return x > 0 ? 1.0507 * x : 1.0507 * 1.67326 * ($exp(clamp8(x)) - 1.0);
      default:    return x;
    endcase
  endfunction

  // check the outputs of layer l, given its input vector x
  task automatic check_layer(int l, longint x[]);
    int p, nn, jn, fb;
    longint y [NP];
    real xr [NP];
    real den, e, g, tol, lim;
    p  = prec_bits(int'(lc[l].prec));
    nn = lc[l].n_neurons;
    jn = lc[l].n_inputs;
    fb = p / 2;
    lim = real'((longint'(1) <<< (p - 1)) - 1);
    den = 0;
    for (int n = 0; n < nn; n++) begin
      longint w[];
      w = new[jn];
      for (int j = 0; j < jn; j++) w[j] = wt[l][n][j];
      y[n] = neuron(w, x, bs[l][n], jn, p, int'(lc[l].iters), int'(lc[l].out_shift));
      xr[n] = real'(y[n]) / real'(1 << fb);
      den += $exp(clamp8(xr[n]));
    end
    for (int n = 0; n < NP; n++) begin
      longint got;
      got = sext(longint'(dnn_out[n]), 16);
      if (n >= nn) check(got == 0, $sformatf("idle lane %0d of layer %0d is zero", n, l));
      else if (!lc[l].af_en || lc[l].af_sel == AF_NONE) begin
        check(got == y[n], $sformatf("layer %0d neuron %0d got %0d exp %0d", l, n, got, y[n]));
      end else if (lc[l].af_sel == AF_RELU) begin
        check(got == (y[n] > 0 ? y[n] : 0), $sformatf("layer %0d relu %0d got %0d exp %0d", l, n, got, y[n]));
      end else begin
        e = (lc[l].af_sel == AF_SOFTMAX) ? $exp(clamp8(xr[n])) / den : af_real(lc[l].af_sel, xr[n]);
        e = e * real'(1 << fb);
        if (e > lim) e = lim;
        if (e < -lim - 1.0) e = -lim - 1.0;
        tol = 1.5 + (0.02 + 0.01 * (e < 0 ? -e : e) / real'(1 << fb)) * real'(1 << fb);
        if (lc[l].af_sel == AF_SOFTMAX) tol = 1.5 + 0.01 * real'(1 << fb);
        g = real'(got);
        check((g - e) <= tol && (e - g) <= tol,
              $sformatf("layer %0d af %0d neuron %0d x=%f got %f exp %f", l, lc[l].af_sel, n, xr[n], g, e));
      end
    end
    if (lc[l].af_en) m_af[lc[l].af_sel]++;
    m_prec[lc[l].prec]++;
    if (lc[l].iters == paper_iters(lc[l].prec, 1'b0)) m_approx++;
    if (lc[l].iters == paper_iters(lc[l].prec, 1'b1) && lc[l].prec != PREC_4) m_accurate++;
    if (nn < NP) m_idle++;
    if (l > 0 && lc[l].iters != lc[l-1].iters) m_switch++;
    m_layers++;
  endtask

  task automatic run_once(bit prefetch);
    longint x[];
    longint t_prev;
    int windows;
    logic [DW-1:0] pool_got[$];
    // start
    @(negedge clk);
    start = 1; t_prev = cyc;
    @(negedge clk); start = 0;
    x = new[JM];
    for (int j = 0; j < JM; j++) x[j] = (j < lc[0].n_inputs) ? xin[j] : 0;
    check(in_count == '0, "fill bank empty once start is taken");
    if (prefetch) fork load_input(); join_none
    for (int l = 0; l < n_layers; l++) begin
      longint expect_cyc;
      while (!layer_done) begin
        @(negedge clk);
        if (pool_valid) pool_got.push_back(pool_data);
      end
      expect_cyc = longint'(lc[l].n_inputs) * (longint'(lc[l].iters) + 1) + 4 + (l == 0 ? 1 : 0);
      if (!lc[l].af_en)
        check(cyc - t_prev == expect_cyc, $sformatf("layer %0d latency %0d exp %0d", l, cyc - t_prev, expect_cyc));
      check(32'(current_layer) == ((l == n_layers - 1) ? l : l + 1), "current_layer after LayerDone");
      t_prev = cyc;
      check_layer(l, x);
      for (int j = 0; j < JM; j++) x[j] = (j < NP) ? sext(longint'(dnn_out[j]), 16) : 0;
      @(negedge clk);
    end
    while (!dnn_done) begin
      @(negedge clk);
      if (pool_valid) pool_got.push_back(pool_data);
    end
    check(out_count == lc[n_layers-1].n_neurons, "out_count");
    if (prefetch) wait fork;
    else check(in_count == '0, "no input words arrived during the run");
    check(!busy, "idle after DNNDone");
    if (n_layers > 1) m_multi++;
    // pooling: windows of 4, stride 4, over the final vector
    windows = pool_on ? ((lc[n_layers-1].n_neurons >= 4) ? (lc[n_layers-1].n_neurons - 4) / 4 + 1 : 0) : 0;
    check(pool_got.size() == windows, $sformatf("pool windows %0d exp %0d", pool_got.size(), windows));
    for (int w = 0; w < windows && w < pool_got.size(); w++) begin
      longint s, a, b;
      s = 0;
      for (int i = 0; i < 4; i++)
        for (int j = i + 1; j < 4; j++) begin
          a = sext(longint'(dnn_out[4*w+i]), 16);
          b = sext(longint'(dnn_out[4*w+j]), 16);
          s += (a > b) ? a - b : b - a;
        end
      check(longint'(pool_got[w]) == s / 12, $sformatf("pool window %0d got %0d exp %0d", w, pool_got[w], s / 12));
      m_pool++;
    end
  endtask

  initial begin
    int runs;
    repeat (3) @(negedge clk);
    rst_n = 1;
    runs = 0;
    while (runs < 14 || m_af[AF_SOFTMAX] == 0 || m_pool == 0 || m_multi == 0 || m_prefetch == 0) begin
      new_network();
      // make sure every function appears early: cycle the first layer's function
      if (runs < 8) begin lc[0].af_en = 1'b1; lc[0].af_sel = af_sel_e'(runs); end
      configure();
      load_params();
      load_input();
      if ($urandom_range(1, 0) == 0) begin
        if ($urandom_range(1, 0) == 0) begin
          run_once(1'b1);
          m_prefetch++;
        end else begin
          run_once(1'b0);
          load_input();
        end
        run_once(1'b0);
        m_reuse++;
      end else run_once(1'b0);
      runs++;
      if (runs > 40) break;
    end
    check(m_multi > 0, "multi-layer run");
    for (int k = 0; k < 3; k++) check(m_prec[k] > 0, $sformatf("precision %0d used", k));
    check(m_approx > 0, "approximate mode");
    check(m_accurate > 0, "accurate mode");
    check(m_switch > 0, "iteration count changed between layers");
    check(m_idle > 0, "idle lanes");
    for (int k = 0; k < 8; k++) check(m_af[k] > 0, $sformatf("activation %0d used", k));
    check(m_pool > 0, "pooling windows");
    check(m_reuse > 0, "parameter reuse");
    check(m_prefetch > 0, "input prefetched during a run");
    check(m_gated > 0, "start gated by params_loaded");
    $display("runs=%0d layers=%0d pool=%0d reuse=%0d prefetch=%0d switch=%0d", runs, m_layers, m_pool, m_reuse, m_prefetch, m_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
