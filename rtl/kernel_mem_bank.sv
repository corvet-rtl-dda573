// kernel_mem_bank: one neuron's segment of the kernel (weight) memory.
//
// A plain RAM array of DEPTH words of W bits with one synchronous write port and
// one combinational read port. In the vector engine each processing element owns
// one bank, addressed by {layer, input index}, so all PEs read their own weight
// in the same cycle without sharing a port (the "partitioned kernel memory
// banks" of the architecture). Contents are not reset.
//
// Timing: a write with we=1 lands at the rising edge; rdata follows raddr in the
// same cycle (asynchronous read, maps to distributed RAM or a latch-free
// register file; a BRAM build would add one cycle of read latency).
//
// From the paper: one bank per neuron, written by the parameter loader, read by
// its PE. This design's own choice: the asynchronous read and the depth
// L_MAX*J_MAX (4 layers x 32 inputs).
module kernel_mem_bank #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
