// neuron_pe: one processing element (neuron) of the vector engine.
//
// A PE computes one neuron of the current layer:
//     y = sat_P( (bias << s + sum_j w_j * x_j) >>> s )
// where P is the layer's precision and s its output shift. It holds a bias
// register per layer, an accumulator and one iterative CORDIC MAC. On
// compute_init it latches the layer configuration, loads the accumulator with
// the bias and then issues one MAC per input. `index` counts the MACs finished
// in the active layer; the control engine uses it to put the matching input on
// the shared broadcast bus x_in, and the PE uses it to address its own kernel
// bank. When index reaches J(l) the PE raises compute_done (held until the next
// compute_init) with y_out valid.
//
// Operand order (LIFO): the parameter loader writes a neuron's weights in the
// order they arrive; the PE reads them back from the highest input position
// down (position J-1-index), so the word written last is used first. The input
// vector is read the same way by the control engine, so weight and input stored
// at the same position meet in the same MAC.
//
// Timing: one MAC every iters+1 cycles (iters cycles in the MAC and one cycle to
// write the accumulator back and present the next operands). w_rdata and x_in
// must be valid combinationally in the cycle after index changes.
//
// From the paper: ComputeInit/ComputeDone/Index, per-neuron weight segment,
// LIFO read order, runtime precision and iteration count. This design's own
// choices: bias scaling, requantisation by a right shift with saturation, and
// the one-cycle issue slot between MACs. The PE takes the whole layer record
// cfg but uses only n_inputs, prec, iters and out_shift; the neuron count and
// the activation fields are for the control engine (unused-bit lint note).
module neuron_pe
  import corvet_pkg::*;
#(
  parameter int unsigned J_MAX = J_MAX_DEF,
  parameter int unsigned L_MAX = L_MAX_DEF,
  parameter int unsigned LW    = (L_MAX > 1) ? $clog2(L_MAX) : 1,
  parameter int unsigned JW    = $clog2(J_MAX),
  parameter int unsigned XW    = JW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // bias store write
  input  logic             b_we,
  input  logic [LW-1:0]    b_layer,
  input  logic [DW-1:0]    b_data,
  // layer control
  input  logic             compute_init,
  input  layer_cfg_t       cfg,
  input  logic [LW-1:0]    layer,
  // operands
  input  logic [DW-1:0]    x_in,
  output logic [LW+JW-1:0] w_raddr,
  input  logic [DW-1:0]    w_rdata,
  // status / result
  output logic [XW-1:0]    index,
  output logic             compute_done,
  output logic [DW-1:0]    y_out
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_DONE} pe_state_e;

  pe_state_e            st;
  logic [DW-1:0]        bias_r [L_MAX];
  logic signed [ACC_W-1:0] acc_r, mac_out;
  logic [XW-1:0]        idx_r, nin_r;
  precision_e           prec_r;
  logic [IT_W-1:0]      iters_r;
  logic [SH_W-1:0]      shift_r;
  logic [LW-1:0]        layer_r;
  logic                 mac_start, mac_busy, mac_done;
  logic signed [DW-1:0] bias_s;
  logic [JW-1:0]        rd_pos;

  iter_cordic_mac u_mac (
    .clk, .rst_n,
    .start  (mac_start),
    .prec   (prec_r),
    .iters  (iters_r),
    .a      (w_rdata),
    .b      (x_in),
    .acc_in (acc_r),
    .busy   (mac_busy),
    .done   (mac_done),
    .acc_out(mac_out)
  );

  always_ff @(posedge clk) begin
    if (b_we) bias_r[b_layer] <= b_data;
  end

  assign bias_s    = sext_prec(bias_r[layer], cfg.prec);
  assign mac_start = (st == S_ISSUE);
  assign rd_pos    = JW'(nin_r - 1'b1 - idx_r);
  assign w_raddr   = {layer_r, rd_pos};
  assign index     = idx_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      acc_r        <= '0;
      idx_r        <= '0;
      nin_r        <= '0;
      prec_r       <= PREC_8;
      iters_r      <= '0;
      shift_r      <= '0;
      layer_r      <= '0;
      compute_done <= 1'b0;
      y_out        <= '0;
    end else if (compute_init) begin
      acc_r        <= ACC_W'(bias_s) <<< cfg.out_shift;
      idx_r        <= '0;
      nin_r        <= XW'(cfg.n_inputs);
      prec_r       <= cfg.prec;
      iters_r      <= cfg.iters;
      shift_r      <= cfg.out_shift;
      layer_r      <= layer;
      compute_done <= 1'b0;
      st           <= (cfg.n_inputs == '0) ? S_DONE : S_ISSUE;
    end else begin
      case (st)
        S_ISSUE: st <= S_WAIT;
        S_WAIT: if (mac_done) begin
          acc_r <= mac_out;
          idx_r <= idx_r + 1'b1;
          st    <= (idx_r + 1'b1 == nin_r) ? S_DONE : S_ISSUE;
        end
        S_DONE: if (!compute_done) begin
          compute_done <= 1'b1;
          y_out        <= sat_prec(acc_r >>> shift_r, prec_r);
        end
        default: ;
      endcase
    end
  end

  // The MAC must be free whenever the PE issues.
  a_issue_free: assert property (@(posedge clk) disable iff (!rst_n) mac_start |-> !mac_busy);

endmodule
