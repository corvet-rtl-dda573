// vector_engine: the array of N_PE neuron processing elements.
//
// Each lane is a neuron_pe with its own kernel_mem_bank (the neuron's segment of
// the partitioned weight memory). All lanes share one broadcast input x_in and
// one layer configuration, so the lanes started together run in lock-step and
// their Index values are equal; the Index reported is that of the lowest lane
// started by the last ComputeInit. The
// multi-cycle latency of the iterative MACs is hidden by running all lanes in
// parallel: a layer of N neurons with J inputs takes J*(iters+1) cycles whatever
// N is, up to N_PE.
//
// Interface: a weight write port (w_we, w_pe, w_addr = {layer, input position},
// w_data) and a bias write port (b_we, b_pe, b_layer, b_data) driven by the
// parameter allocator; compute_init[N_PE] (ComputeInit, one bit per neuron so
// unused lanes stay idle); compute_done[N_PE] (ComputeDoneArray); y_out per lane.
//
// From the paper: N homogeneous PEs (64 by default, scalable to 256), one kernel
// bank per PE, broadcast input, lane-based execution. This design's own choices:
// the write ports and taking Index from the lowest started lane.
module vector_engine
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
  input  logic             w_we,
  input  logic [PW-1:0]    w_pe,
  input  logic [LW+JW-1:0] w_addr,
  input  logic [DW-1:0]    w_data,
  input  logic             b_we,
  input  logic [PW-1:0]    b_pe,
  input  logic [LW-1:0]    b_layer,
  input  logic [DW-1:0]    b_data,
  input  logic [N_PE-1:0]  compute_init,
  input  layer_cfg_t       cfg,
  input  logic [LW-1:0]    layer,
  input  logic [DW-1:0]    x_in,
  output logic [XW-1:0]    index,
  output logic [N_PE-1:0]  compute_done,
  output logic [DW-1:0]    y_out [N_PE]
);

  logic [XW-1:0] idx_lane [N_PE];

  for (genvar g = 0; g < N_PE; g++) begin : g_lane
    logic [LW+JW-1:0] raddr;
    logic [DW-1:0]    rdata;

    kernel_mem_bank #(.W(DW), .DEPTH(L_MAX * (1 << JW))) u_bank (
      .clk,
      .we   (w_we && w_pe == PW'(g)),
      .waddr(w_addr),
      .wdata(w_data),
      .raddr(raddr),
      .rdata(rdata)
    );

    neuron_pe #(.J_MAX(J_MAX), .L_MAX(L_MAX)) u_pe (
      .clk, .rst_n,
      .b_we        (b_we && b_pe == PW'(g)),
      .b_layer     (b_layer),
      .b_data      (b_data),
      .compute_init(compute_init[g]),
      .cfg         (cfg),
      .layer       (layer),
      .x_in        (x_in),
      .w_raddr     (raddr),
      .w_rdata     (rdata),
      .index       (idx_lane[g]),
      .compute_done(compute_done[g]),
      .y_out       (y_out[g])
    );
  end

  // Index comes from the lowest lane started by the last ComputeInit.
  logic [PW-1:0] lead_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lead_r <= '0;
    end else if (compute_init != '0) begin
      for (int i = N_PE - 1; i >= 0; i--)
        if (compute_init[i]) lead_r <= PW'(i);
    end
  end

  assign index = idx_lane[lead_r];

endmodule
