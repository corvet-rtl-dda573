// tb_control_engine: tests the layer controller on its own. The testbench plays
// the vector engine, the input buffer, the AF unit and the pooling unit:
//  - lanes: after ComputeInit the test checks that exactly lanes 0..N(l)-1 were
//    started, drives a random Index every cycle and raises ComputeDone after a
//    random delay (some idle lanes also show a stale ComputeDone, which must be
//    ignored);
//  - input muxing: x_in must be input position J-1-Index, taken from the input
//    buffer in layer 0 and from the previous layer's outputs later;
//  - AF: a model unit with random ready and delay returns a fixed bit function
//    of its input; the stored outputs must follow the Q-format scaling and
//    saturation;
//  - LayerDone, Current_Layer, the latency INIT -> LDONE for a given ComputeDone
//    time (2 cycles), pooling stream order and DNNDone only once the pooling
//    unit is idle, DNNDone, in_swap exactly in the
//    clock in which a start is taken (not for a gated start), and configuration
//    writes ignored while busy.
module tb_control_engine;
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
  layer_cfg_t cfg_regs [LM];
  logic [LW:0] num_layers;
  logic start = 0, params_loaded = 1, busy, layer_done, dnn_done;
  logic [LW-1:0] current_layer;
  logic [JW-1:0] in_rd_idx;
  logic [DW-1:0] in_rd_data;
  logic in_swap;
  logic [NP-1:0] compute_init, compute_done = '0;
  layer_cfg_t cur_cfg;
  logic [DW-1:0] x_in;
  logic [JW:0] index = 0;
  logic [DW-1:0] y_out [NP];
  af_sel_e af_sel;
  logic af_valid, af_last, af_ready = 0, af_out_valid = 0;
  logic [DW-1:0] af_data, af_out_data = 0;
  logic pool_clear, pool_valid, pool_busy = 0;
  logic [DW-1:0] pool_data;
  logic [DW-1:0] dnn_out [NP];
  logic [7:0] out_count;

  int checks = 0, failures = 0;
  logic [DW-1:0] inbuf [JM];
  logic [DW-1:0] prev [NP];
  int cur_l = 0;
  bit layer0 = 1;
  int m_af = 0, m_pool = 0, m_multi = 0, m_stale = 0, m_ignored = 0;

  always #5 clk = ~clk;

  control_engine dut (.*);

  assign in_rd_data = inbuf[in_rd_idx];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [DW-1:0] af_model(logic [DW-1:0] v);
    return v ^ 16'h0F35;
  endfunction

  function automatic logic [DW-1:0] exp_store(logic [DW-1:0] y, layer_cfg_t c);
    int p, s;
    longint a, r;
    p = prec_bits(int'(c.prec));
    if (!c.af_en) return DW'(sext(longint'(y), p));
    s = 8 - p / 2;
    a = sext(longint'(y), p) <<< s;
    r = sext(longint'(af_model(DW'(a))), 16) >>> s;
    return DW'(sat(r, p));
  endfunction

  // input-muxing check, every cycle while lanes run
  bit lanes_running = 0;
  always @(negedge clk) if (lanes_running) begin
    int pos;
    index = ($urandom_range(JM, 1) - 1) % cur_cfg.n_inputs;
    #1;
    pos = int'(cur_cfg.n_inputs) - 1 - int'(index);
    check(int'(in_rd_idx) == pos, "in_rd_idx = J-1-Index");
    if (layer0) check(x_in == inbuf[pos], "layer 0 input from the buffer");
    else check(x_in == ((pos < NP) ? prev[pos] : '0), "later layer input from the outputs");
  end

  // AF model: handshakes taken at the clock edge, random ready and delay, in order
  logic [DW-1:0] af_q[$];
  always @(posedge clk) if (af_valid && af_ready) af_q.push_back(af_model(af_data));
  always @(negedge clk) begin
    af_out_valid = 0;
    af_ready = $urandom_range(2, 0) == 0;
    if (af_q.size() > 0 && $urandom_range(2, 0) == 0) begin
      af_out_valid = 1; af_out_data = af_q.pop_front();
    end
  end

  // pool model: records what is sent; stays busy for a random time after each
  // value, and DNNDone must not come while it is busy
  logic [DW-1:0] pool_q[$];
  int pool_hold = 0;
  always @(posedge clk) if (pool_valid) begin
    pool_q.push_back(pool_data);
    pool_hold = $urandom_range(6, 1);
  end
  always @(negedge clk) begin
    if (pool_hold > 0) pool_hold--;
    pool_busy = (pool_hold > 0);
    if (dnn_done && !$past(dnn_done)) check(!pool_busy, "DNNDone only after the pooling unit is idle");
  end

  task automatic write_cfg(int addr, logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = (LW+1)'(addr); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run(int nl, bit pool_on);
    layer_cfg_t c [LM];
    logic [DW-1:0] yv [NP];
    for (int l = 0; l < nl; l++) begin
      c[l] = layer_cfg_t'(CFG_W'($urandom));
      c[l].n_neurons = 8'($urandom_range(NP, 1));
      c[l].n_inputs = 7'($urandom_range(JM, 1));
      c[l].prec = precision_e'($urandom_range(2, 0));
      write_cfg(l, CFG_W'(c[l]));
    end
    write_cfg(LM, CFG_W'({pool_on, (LW+1)'(nl)}));
    for (int j = 0; j < JM; j++) inbuf[j] = DW'($urandom);
    @(negedge clk); start = 1; #1;
    check(in_swap, "in_swap as the start is taken");
    @(negedge clk); start = 0; #1;
    check(!in_swap, "in_swap lasts one cycle");
    pool_q.delete();
    layer0 = 1;
    for (int l = 0; l < nl; l++) begin
      int d;
      longint t0, t1;
      cur_l = l;
      while (compute_init == '0) @(negedge clk);
      for (int g = 0; g < NP; g++) check(compute_init[g] == (g < c[l].n_neurons), "ComputeInit mask");
      check(int'(current_layer) == l, "Current_Layer");
      // a config write while busy must be ignored
      cfg_we = 1; cfg_addr = 0; cfg_wdata = '1;
      @(negedge clk);
      cfg_we = 0;
      check(cfg_regs[0] == c[0], "config write ignored while busy");
      m_ignored++;
      lanes_running = 1;
      for (int g = 0; g < NP; g++) begin
        yv[g] = DW'($urandom);
        y_out[g] = yv[g];
      end
      // stale ComputeDone on idle lanes
      compute_done = '0;
      for (int g = c[l].n_neurons; g < NP; g++) if ($urandom_range(1, 0)) begin compute_done[g] = 1; m_stale++; end
      d = $urandom_range(60, 1);
      repeat (d) begin
        @(negedge clk);
        check(!layer_done, "no LayerDone before all lanes are done");
      end
      lanes_running = 0;
      for (int g = 0; g < c[l].n_neurons; g++) compute_done[g] = 1;
      t0 = $time;
      while (!layer_done) @(negedge clk);
      t1 = $time;
      if (!c[l].af_en) check((t1 - t0) / 10 == 2, $sformatf("ComputeDone -> LayerDone %0d cycles", (t1 - t0) / 10));
      else m_af++;
      for (int g = 0; g < NP; g++) begin
        logic [DW-1:0] e;
        e = (g < c[l].n_neurons) ? exp_store(yv[g], c[l]) : '0;
        check(dnn_out[g] == e, $sformatf("layer %0d output %0d got %h exp %h", l, g, dnn_out[g], e));
        prev[g] = dnn_out[g];
      end
      compute_done = '0;
      layer0 = 0;
    end
    while (!dnn_done) begin
      check(!in_swap, "no in_swap during a run");
      @(negedge clk);
    end
    check(out_count == c[nl-1].n_neurons, "out_count");
    check(!busy, "idle at DNNDone");
    if (pool_on) begin
      check(pool_q.size() == c[nl-1].n_neurons, "pool stream length");
      for (int g = 0; g < pool_q.size(); g++) check(pool_q[g] == dnn_out[g], "pool stream order");
      m_pool++;
    end else check(pool_q.size() == 0, "no pool stream when disabled");
    if (nl > 1) m_multi++;
  endtask

  initial begin
    for (int g = 0; g < NP; g++) begin y_out[g] = '0; prev[g] = '0; end
    for (int j = 0; j < JM; j++) inbuf[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // start without parameters is ignored
    params_loaded = 0;
    @(negedge clk); start = 1; #1;
    check(!in_swap, "no in_swap for a gated start");
    @(negedge clk); start = 0;
    @(negedge clk);
    check(!busy, "start gated by params_loaded");
    params_loaded = 1;
    for (int r = 0; r < 40; r++) run($urandom_range(LM, 1), $urandom_range(1, 0));
    check(m_af > 0 && m_pool > 0 && m_multi > 0 && m_stale > 0 && m_ignored > 0, "all mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
