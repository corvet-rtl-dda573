// control_engine: configuration registers and layer-multiplexing controller.
//
// Runs a whole network on the one vector engine, one layer after another.
//
// Configuration registers: cfg_we writes cfg_wdata to register cfg_addr.
// Addresses 0..L_MAX-1 hold a layer_cfg_t per layer; address L_MAX holds
// {pool_en, num_layers} in its low bits. Writes are ignored while busy.
//
// Per layer l (Current_Layer):
//   INIT     ComputeInit goes, for one clock, to lanes 0..N(l)-1; the rest stay
//            idle.
//   COMPUTE  Input muxing: the shared bus x_in carries input position
//            J(l)-1-Index (LIFO order). For layer 0 it comes from the input
//            buffer; for later layers it comes from the intermediate output
//            registers. The state waits until every started lane has raised
//            ComputeDone (ComputeDoneArray).
//   AF       If the layer's af_en is set, the N(l) outputs are streamed in lane
//            order through the shared multi-AF unit and written back to the
//            intermediate registers (Output muxing). Otherwise they are copied
//            directly.
//   LDONE    LayerDone pulses; then either the next layer starts or the run
//            finishes.
// After the last layer, if pool_en is set, the final vector is streamed through
// the pooling unit, one value per clock (POOL), and the controller waits until
// the pooling unit has no window left in flight (PWAIT). Then DNNDone is raised and held until the
// next start, and dnn_out holds the final outputs (out_count of them).
// in_swap pulses when a start is taken: the input buffer hands the vector just
// loaded over for reading, and its other bank can take the next vector while
// this one is computed.
//
// Number format between PE and AF: a word of precision P is taken as fixed
// point with P/2 fraction bits (Q7.8, Q3.4, Q1.2). It is scaled to Q7.8 for the
// AF unit, and the AF result is scaled back and saturated to P bits.
//
// Timing: start is accepted when idle and params_loaded is set. A layer takes
// 1 (INIT) + J(l)*(iters+1)+2 (PEs) + 1 (copy), or the AF stream time, plus 1
// (LDONE) cycles.
//
// From the paper: ComputeInit, ComputeDone/ComputeDoneArray, Index, LayerDone,
// DNNDone, Current_Layer, Input muxing, Output muxing, the configuration
// registers, status flags and the FSM. This design's own choices: the register
// map, the order of the states, the AF number format, and running the AF after
// a layer's MACs rather than alongside them.
module control_engine
  import corvet_pkg::*;
#(
  parameter int unsigned N_PE  = N_PE_DEF,
  parameter int unsigned J_MAX = J_MAX_DEF,
  parameter int unsigned L_MAX = L_MAX_DEF,
  parameter int unsigned LW    = (L_MAX > 1) ? $clog2(L_MAX) : 1,
  parameter int unsigned JW    = $clog2(J_MAX),
  parameter int unsigned PW    = (N_PE > 1) ? $clog2(N_PE) : 1,
  parameter int unsigned XW    = JW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration registers
  input  logic             cfg_we,
  input  logic [LW:0]      cfg_addr,
  input  logic [CFG_W-1:0] cfg_wdata,
  output layer_cfg_t       cfg_regs [L_MAX],
  output logic [LW:0]      num_layers,
  // run control / status
  input  logic             start,
  input  logic             params_loaded,
  output logic             busy,
  output logic             layer_done,
  output logic             dnn_done,
  output logic [LW-1:0]    current_layer,
  // input buffer
  output logic [JW-1:0]    in_rd_idx,
  input  logic [DW-1:0]    in_rd_data,
  output logic             in_swap,
  // vector engine
  output logic [N_PE-1:0]  compute_init,
  output layer_cfg_t       cur_cfg,
  output logic [DW-1:0]    x_in,
  input  logic [XW-1:0]    index,
  input  logic [N_PE-1:0]  compute_done,
  input  logic [DW-1:0]    y_out [N_PE],
  // multi-AF unit
  output af_sel_e          af_sel,
  output logic             af_valid,
  output logic [DW-1:0]    af_data,
  output logic             af_last,
  input  logic             af_ready,
  input  logic             af_out_valid,
  input  logic [DW-1:0]    af_out_data,
  // pooling unit
  output logic             pool_clear,
  output logic             pool_valid,
  output logic [DW-1:0]    pool_data,
  input  logic             pool_busy,
  // results
  output logic [DW-1:0]    dnn_out [N_PE],
  output logic [7:0]       out_count
);

  typedef enum logic [2:0] {
    C_IDLE, C_INIT, C_COMPUTE, C_AF, C_LDONE, C_POOL, C_PWAIT, C_FIN
  } ctl_state_e;

  ctl_state_e      st;
  logic            pool_en;
  logic [LW-1:0]   layer;
  logic [8:0]      k_in, k_out;     // AF / pool stream counters
  logic [DW-1:0]   inter [N_PE];    // intermediate (and final) outputs
  logic [N_PE-1:0] mask;
  logic [8:0]      n_cur;
  logic            all_done;

  assign cur_cfg       = cfg_regs[layer];
  assign current_layer = layer;
  assign n_cur         = 9'(cur_cfg.n_neurons);
  assign busy          = (st != C_IDLE);
  assign dnn_out       = inter;

  always_comb
    for (int g = 0; g < int'(N_PE); g++) mask[g] = (9'(g) < n_cur);

  assign all_done     = ((compute_done & mask) == mask);
  assign compute_init = (st == C_INIT) ? mask : '0;

  // ---------------------------------------------------------------- input muxing
  logic [JW-1:0] rd_pos;
  assign rd_pos    = JW'(XW'(cur_cfg.n_inputs) - 1'b1 - index);
  assign in_rd_idx = rd_pos;

  always_comb begin
    if (layer == '0)                    x_in = in_rd_data;
    else if (32'(rd_pos) < N_PE)        x_in = inter[PW'(rd_pos)];
    else                                x_in = '0;
  end

  // ---------------------------------------------------------------- number format
  function automatic int unsigned af_shift(precision_e p);
    return AF_FRAC - prec_bits(p) / 2;
  endfunction

  function automatic logic [DW-1:0] to_af(logic [DW-1:0] w, precision_e p);
    return DW'(sext_prec(w, p) <<< af_shift(p));
  endfunction

  function automatic logic [DW-1:0] from_af(logic [DW-1:0] w, precision_e p);
    return sat_prec(ACC_W'($signed(w)) >>> af_shift(p), p);
  endfunction

  // ---------------------------------------------------------------- streams
  assign af_sel     = cur_cfg.af_sel;
  assign af_valid   = (st == C_AF) && (k_in < n_cur);
  assign af_data    = to_af(y_out[PW'(k_in)], cur_cfg.prec);
  assign af_last    = (k_in == n_cur - 1'b1);
  assign pool_valid = (st == C_POOL) && (k_in < n_cur);
  assign pool_data  = inter[PW'(k_in)];
  assign pool_clear = (st == C_IDLE) && start && params_loaded;
  assign in_swap    = (st == C_IDLE) && start && params_loaded;

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= C_IDLE; layer <= '0; k_in <= '0; k_out <= '0;
      layer_done <= 1'b0; dnn_done <= 1'b0;
      pool_en <= 1'b0; num_layers <= (LW+1)'(1); out_count <= '0;
      for (int l = 0; l < int'(L_MAX); l++) cfg_regs[l] <= '0;
      for (int g = 0; g < int'(N_PE); g++) inter[g] <= '0;
    end else begin
      layer_done <= 1'b0;
      if (cfg_we && st == C_IDLE) begin
        if (32'(cfg_addr) < L_MAX) cfg_regs[LW'(cfg_addr)] <= layer_cfg_t'(cfg_wdata);
        else {pool_en, num_layers} <= cfg_wdata[LW+1:0];
      end
      case (st)
        C_IDLE: if (start && params_loaded) begin
          layer    <= '0;
          dnn_done <= 1'b0;
          st       <= C_INIT;
        end
        C_INIT: st <= C_COMPUTE;
        C_COMPUTE: if (all_done) begin
          k_in <= '0; k_out <= '0;
          if (cur_cfg.af_en) st <= C_AF;
          else begin
            for (int g = 0; g < int'(N_PE); g++)
              inter[g] <= mask[g] ? DW'(sext_prec(y_out[g], cur_cfg.prec)) : '0;
            st <= C_LDONE;
          end
        end
        C_AF: begin
          if (af_valid && af_ready) k_in <= k_in + 1'b1;
          if (af_out_valid) begin
            inter[PW'(k_out)] <= DW'(sext_prec(from_af(af_out_data, cur_cfg.prec), cur_cfg.prec));
            k_out <= k_out + 1'b1;
            if (k_out + 1'b1 == n_cur) begin
              for (int g = 0; g < int'(N_PE); g++) if (!mask[g]) inter[g] <= '0;
              st <= C_LDONE;
            end
          end
        end
        C_LDONE: begin
          layer_done <= 1'b1;
          k_in       <= '0;
          if ((LW+1)'(layer) + 1'b1 >= num_layers) begin
            out_count <= cur_cfg.n_neurons;
            st <= pool_en ? C_POOL : C_FIN;
          end else begin
            layer <= layer + 1'b1;
            st    <= C_INIT;
          end
        end
        C_POOL: begin
          k_in <= k_in + 1'b1;
          if (k_in + 1'b1 >= n_cur) st <= C_PWAIT;
        end
        C_PWAIT: if (!pool_busy) st <= C_FIN;
        C_FIN: begin
          dnn_done <= 1'b1;
          st       <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // A run needs 1..L_MAX layers, and every layer 1..N_PE neurons and
  // 1..J_MAX inputs.
  a_layers:  assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_IDLE && start && params_loaded) |-> (num_layers != '0 && 32'(num_layers) <= L_MAX));
  a_neurons: assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_INIT) |-> (n_cur != '0 && 32'(n_cur) <= N_PE));
  a_inputs:  assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_INIT) |-> (cur_cfg.n_inputs != '0 && 32'(cur_cfg.n_inputs) <= J_MAX));

endmodule
