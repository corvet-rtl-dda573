// corvet_top: the CORVET vector-processing subsystem.
//
// Connects the blocks of the engine:
//   param_allocator     decodes the host's parameter stream (Fig. 4 address
//                       layout) into kernel-bank and bias writes;
//   input_preprocessor  buffers the input vector (data prefetcher);
//   control_engine      config registers, layer FSM, input/output muxing;
//   vector_engine       N_PE neurons, each with its own kernel memory bank and
//                       iterative CORDIC MAC;
//   multi_af            the shared time-multiplexed activation unit;
//   aad_pool            AAD pooling of the final output vector.
//
// Host sequence: write the layer configuration (cfg_we); pulse param_restart
// and stream every weight and bias with load_param_weight / param_data until
// params_loaded; stream the input vector with in_valid / in_data; pulse start.
// LayerDone pulses after each layer (current_layer tells which). DNNDone rises
// when the last layer, and the pooling if enabled, have finished. dnn_out then
// holds out_count results; pool results come as pool_valid pulses. The input
// buffer is double-banked: once start is taken, in_count is 0 again and the next
// vector can be streamed in during the run. Parameters stay loaded.
//
// From the paper: the block set and their connections (vector engine, control
// engine, data prefetcher, partitioned kernel banks, shared multi-AF, pooling),
// the control signals and the sizes (64 neurons, 32 weights per neuron). This
// design's own choices: the port list and the host sequence. The normalisation
// unit, off-chip memory and the host (AXI) interface are not part of this
// block.
module corvet_top
  import corvet_pkg::*;
#(
  parameter int unsigned N_PE   = N_PE_DEF,
  parameter int unsigned J_MAX  = J_MAX_DEF,
  parameter int unsigned L_MAX  = L_MAX_DEF,
  parameter int unsigned NWIN   = 4,
  parameter int unsigned STRIDE = 4,
  parameter int unsigned LW     = (L_MAX > 1) ? $clog2(L_MAX) : 1,
  parameter int unsigned JW     = $clog2(J_MAX),
  parameter int unsigned PW     = (N_PE > 1) ? $clog2(N_PE) : 1,
  parameter int unsigned XW     = JW + 1,
  parameter int unsigned ADDR_W = LW + 1 + PW + JW
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [LW:0]       cfg_addr,
  input  logic [CFG_W-1:0]  cfg_wdata,
  // parameter stream
  input  logic              param_restart,
  input  logic              load_param_weight,
  input  logic [DW-1:0]     param_data,
  output logic [ADDR_W-1:0] param_addr,
  output logic              params_loaded,
  // input stream
  input  logic              in_valid,
  input  logic [DW-1:0]     in_data,
  output logic [JW:0]       in_count,
  output logic              in_full,
  // run control / status
  input  logic              start,
  output logic              busy,
  output logic              layer_done,
  output logic [LW-1:0]     current_layer,
  output logic              dnn_done,
  // results
  output logic [DW-1:0]     dnn_out [N_PE],
  output logic [7:0]        out_count,
  output logic              pool_valid,
  output logic [DW-1:0]     pool_data
);

  layer_cfg_t          cfg_regs [L_MAX];
  layer_cfg_t          cur_cfg;
  logic [LW:0]         num_layers;

  logic                w_we, b_we;
  logic [PW-1:0]       w_pe, b_pe;
  logic [LW+JW-1:0]    w_addr;
  logic [LW-1:0]       b_layer;
  logic [DW-1:0]       w_data, b_data;

  logic [JW-1:0]       in_rd_idx;
  logic [DW-1:0]       in_rd_data;
  logic                in_swap;

  logic [N_PE-1:0]     compute_init, compute_done;
  logic [DW-1:0]       x_in;
  logic [XW-1:0]       index;
  logic [DW-1:0]       y_out [N_PE];

  af_sel_e             af_sel;
  logic                af_valid, af_last, af_ready, af_out_valid, af_busy;
  logic [DW-1:0]       af_data, af_out_data;

  logic                pool_clear, pool_in_valid, pool_busy;
  logic [DW-1:0]       pool_in_data;

  param_allocator #(.N_PE(N_PE), .J_MAX(J_MAX), .L_MAX(L_MAX)) u_alloc (
    .clk, .rst_n,
    .restart(param_restart), .load_param_weight, .param_data,
    .num_layers, .cfg(cfg_regs), .param_addr,
    .w_we, .w_pe, .w_addr, .w_data, .b_we, .b_pe, .b_layer, .b_data,
    .params_loaded
  );

  input_preprocessor #(.J_MAX(J_MAX)) u_inbuf (
    .clk, .rst_n, .swap(in_swap), .in_valid, .in_data,
    .count(in_count), .full(in_full), .rd_idx(in_rd_idx), .rd_data(in_rd_data)
  );

  control_engine #(.N_PE(N_PE), .J_MAX(J_MAX), .L_MAX(L_MAX)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_regs, .num_layers,
    .start, .params_loaded, .busy, .layer_done, .dnn_done, .current_layer,
    .in_rd_idx, .in_rd_data, .in_swap,
    .compute_init, .cur_cfg, .x_in, .index, .compute_done, .y_out,
    .af_sel, .af_valid, .af_data, .af_last, .af_ready, .af_out_valid, .af_out_data,
    .pool_clear, .pool_valid(pool_in_valid), .pool_data(pool_in_data), .pool_busy,
    .dnn_out, .out_count
  );

  vector_engine #(.N_PE(N_PE), .J_MAX(J_MAX), .L_MAX(L_MAX)) u_vec (
    .clk, .rst_n,
    .w_we, .w_pe, .w_addr, .w_data, .b_we, .b_pe, .b_layer, .b_data,
    .compute_init, .cfg(cur_cfg), .layer(current_layer), .x_in,
    .index, .compute_done, .y_out
  );

  multi_af #(.FIFO_DEPTH(N_PE)) u_af (
    .clk, .rst_n, .sel_af(af_sel),
    .in_valid(af_valid), .in_data(af_data), .in_last(af_last), .in_ready(af_ready),
    .out_valid(af_out_valid), .out_data(af_out_data), .busy(af_busy)
  );

  aad_pool #(.NWIN(NWIN), .STRIDE(STRIDE)) u_pool (
    .clk, .rst_n, .clear(pool_clear),
    .in_valid(pool_in_valid), .in_data(pool_in_data), .busy(pool_busy),
    .out_valid(pool_valid), .out_data(pool_data)
  );

  // The AF unit is empty whenever a layer finishes.
  a_af_idle: assert property (@(posedge clk) disable iff (!rst_n) layer_done |-> !af_busy);

endmodule
