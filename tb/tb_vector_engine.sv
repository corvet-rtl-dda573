// tb_vector_engine: loads random weights and biases into every lane of a
// reduced 8-lane engine through its write ports, runs layers with a random
// subset of lanes started (ComputeInit per lane), feeds the broadcast input by
// Index, and compares each started lane's output with the reference model.
// Lanes not started must keep ComputeDone low (idle-unit deactivation), and
// all started lanes must finish in the same cycle.
module tb_vector_engine;
  import corvet_pkg::*;
  import tb_model_pkg::*;

  localparam int unsigned N_PE = 8, J_MAX = 32, L_MAX = 4, LW = 2, JW = 5, PW = 3, XW = 6;

  logic clk = 0, rst_n = 0;
  logic w_we = 0; logic [PW-1:0] w_pe = 0; logic [LW+JW-1:0] w_addr = 0; logic [DW-1:0] w_data = 0;
  logic b_we = 0; logic [PW-1:0] b_pe = 0; logic [LW-1:0] b_layer = 0; logic [DW-1:0] b_data = 0;
  logic [N_PE-1:0] compute_init = 0, compute_done;
  layer_cfg_t cfg;
  logic [LW-1:0] layer = 0;
  logic [DW-1:0] x_in;
  logic [XW-1:0] index;
  logic [DW-1:0] y_out [N_PE];

  longint W [N_PE][L_MAX][J_MAX];
  longint Bv [N_PE][L_MAX];
  logic [DW-1:0] xmem [J_MAX];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  vector_engine #(.N_PE(N_PE), .J_MAX(J_MAX), .L_MAX(L_MAX)) dut (.*);

  assign x_in = xmem[JW'(cfg.n_inputs - 7'd1 - 7'(index))];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint wv[], xv[], e;
    logic [N_PE-1:0] mask;
    int jn, p, n, sh;
    precision_e pr;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load all parameters
    for (int g = 0; g < N_PE; g++)
      for (int l = 0; l < L_MAX; l++) begin
        for (int j = 0; j < J_MAX; j++) begin
          @(negedge clk);
          W[g][l][j] = longint'($urandom_range(65535, 0));
          w_we = 1; w_pe = PW'(g); w_addr = {LW'(l), JW'(j)}; w_data = DW'(W[g][l][j]);
        end
        @(negedge clk);
        w_we = 0;
        Bv[g][l] = longint'($urandom_range(65535, 0));
        b_we = 1; b_pe = PW'(g); b_layer = LW'(l); b_data = DW'(Bv[g][l]);
        @(negedge clk);
        b_we = 0;
      end
    for (int r = 0; r < 24; r++) begin
      int l;
      l = r % L_MAX;
      jn = $urandom_range(32, 1);
      pr = precision_e'(r % 3);
      p = prec_bits(int'(pr));
      n = (pr == PREC_4) ? 4 : (pr == PREC_8) ? 4 + (r & 1) : 7 + 2 * (r & 1);
      sh = $urandom_range(p, 0);
      for (int j = 0; j < J_MAX; j++) xmem[j] = DW'($urandom);
      mask = N_PE'($urandom_range(255, 1));
      cfg.n_inputs = 7'(jn); cfg.prec = pr; cfg.iters = IT_W'(n); cfg.out_shift = SH_W'(sh);
      layer = LW'(l);
      @(negedge clk);
      compute_init = mask;
      @(negedge clk);
      compute_init = '0;
      while ((compute_done & mask) != mask) begin
        checks++;
        if ((compute_done & mask) != '0) begin
          failures++; $display("FAIL lanes did not finish together");
        end
        @(negedge clk);
      end
      for (int g = 0; g < N_PE; g++) begin
        checks++;
        if (mask[g]) begin
          wv = new[jn]; xv = new[jn];
          for (int j = 0; j < jn; j++) begin wv[j] = W[g][l][j]; xv[j] = longint'(xmem[j]); end
          e = neuron(wv, xv, Bv[g][l], jn, p, n, sh);
          if (sext(longint'(y_out[g]), p) != e) begin
            failures++;
            $display("FAIL lane %0d l=%0d J=%0d p=%0d got %0d exp %0d", g, l, jn, p, sext(longint'(y_out[g]), p), e);
          end
        end else if (compute_done[g] && r == 0) begin
          failures++;
          $display("FAIL idle lane %0d reports done", g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
