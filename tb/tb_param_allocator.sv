// tb_param_allocator: configures a random network of up to 4 layers, streams
// its parameters with load_param_weight (with random idle cycles), and checks
// every decoded write against the expected {layer, neuron, input} or bias
// target computed from the load order, the address fields of param_addr, the
// total number of writes, and that params_loaded rises after the last word and
// later words are ignored.
module tb_param_allocator;
  import corvet_pkg::*;

  localparam int unsigned N_PE = 64, J_MAX = 32, L_MAX = 4, LW = 2, JW = 5, PW = 6;
  localparam int unsigned ADDR_W = LW + 1 + PW + JW;

  logic clk = 0, rst_n = 0, restart = 0, load_param_weight = 0;
  logic [DW-1:0] param_data = 0;
  logic [LW:0] num_layers;
  layer_cfg_t cfg [L_MAX];
  logic [ADDR_W-1:0] param_addr;
  logic w_we, b_we, params_loaded;
  logic [PW-1:0] w_pe, b_pe;
  logic [LW+JW-1:0] w_addr;
  logic [LW-1:0] b_layer;
  logic [DW-1:0] w_data, b_data;
  int checks = 0, failures = 0;

  typedef struct { bit is_b; int l, n, j; logic [DW-1:0] d; } exp_t;
  exp_t q[$];

  always #5 clk = ~clk;

  param_allocator #(.N_PE(N_PE), .J_MAX(J_MAX), .L_MAX(L_MAX)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check writes as they come out
  always @(posedge clk) if (rst_n && (w_we || b_we)) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected write"); end
    else begin
      e = q.pop_front();
      if (w_we != !e.is_b || b_we != e.is_b) begin failures++; $display("FAIL kind"); end
      else if (!e.is_b && (int'(w_pe) != e.n || w_addr != {LW'(e.l), JW'(e.j)} || w_data != e.d)) begin
        failures++; $display("FAIL w: got pe%0d addr%0h exp n%0d l%0d j%0d", w_pe, w_addr, e.n, e.l, e.j);
      end else if (e.is_b && (int'(b_pe) != e.n || int'(b_layer) != e.l || b_data != e.d)) begin
        failures++; $display("FAIL b: got pe%0d l%0d exp n%0d l%0d", b_pe, b_layer, e.n, e.l);
      end
    end
  end

  task automatic send(bit is_b, int l, int n, int j);
    exp_t e;
    logic [ADDR_W-1:0] ea;
    while ($urandom_range(3, 0) == 0) begin
      @(negedge clk); load_param_weight = 0;
    end
    @(negedge clk);
    e.is_b = is_b; e.l = l; e.n = n; e.j = j; e.d = DW'($urandom);
    load_param_weight = 1; param_data = e.d;
    ea = is_b ? {LW'(l), 1'b1, 11'(n)} : {LW'(l), 1'b0, PW'(n), JW'(j)};
    #1;
    checks++;
    if (param_addr != ea) begin failures++; $display("FAIL addr %h exp %h", param_addr, ea); end
    q.push_back(e);
  endtask

  initial begin
    for (int r = 0; r < 6; r++) begin
      int nl;
      nl = $urandom_range(4, 1);
      num_layers = (LW+1)'(nl);
      for (int l = 0; l < L_MAX; l++) begin
        cfg[l] = '0;
        cfg[l].n_neurons = 8'($urandom_range(64, 1));
        cfg[l].n_inputs  = 7'($urandom_range(32, 1));
      end
      rst_n = (r != 0);
      restart = 1;
      @(negedge clk); restart = 0; rst_n = 1;
      for (int l = 0; l < nl; l++) begin
        for (int n = 0; n < int'(cfg[l].n_neurons); n++)
          for (int j = 0; j < int'(cfg[l].n_inputs); j++) send(0, l, n, j);
        for (int n = 0; n < int'(cfg[l].n_neurons); n++) send(1, l, n, 0);
      end
      @(negedge clk); load_param_weight = 0;
      checks++;
      if (!params_loaded) begin failures++; $display("FAIL params_loaded low"); end
      // extra words are ignored
      load_param_weight = 1;
      repeat (3) @(negedge clk);
      load_param_weight = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (q.size() != 0) begin failures++; $display("FAIL %0d writes missing", q.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
