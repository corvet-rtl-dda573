// param_allocator: turns the host's parameter stream into kernel-bank writes.
//
// The host sends weights and biases one word per cycle with the valid signal
// load_param_weight and no address. The allocator counts through the network
// layer by layer: for layer l it expects N(l)*J(l) weights (neuron-major, input
// position 0..J(l)-1 within a neuron) followed by N(l) biases, with N(l), J(l)
// taken from the layer configuration registers. For every word it forms the
// uniform parameter address
//     param_addr = { layer [LW] | select [1] | R field [PW+JW] }
// where select = 0 marks a weight (R = {neuron, input position}) and select = 1
// a bias (R = neuron in the low bits), and decodes that address into a write to
// the neuron's kernel bank or bias register. Widths follow the fixed-width rule
// Addr = ceil(log2 L) + 1 + max_l(ceil(log2 N(l)) + ceil(log2 J(l))).
//
// Because each PE reads its weights from position J-1 down to 0, the word a
// neuron receives last is the first one it uses: the host loads LIFO.
//
// Timing: the decoded write is registered, one cycle after the word is taken.
// params_loaded rises after the last bias of layer num_layers-1 and stays high
// until restart. Words sent after that are ignored.
//
// From the paper: the valid-qualified sequential load, the address fields
// (layer bits, one select bit, weight/bias RAM address with neuron above input)
// and the LIFO relation between write and read order. This design's own choice:
// the exact load order (weights of a layer, then its biases).
module param_allocator
  import corvet_pkg::*;
#(
  parameter int unsigned N_PE   = N_PE_DEF,
  parameter int unsigned J_MAX  = J_MAX_DEF,
  parameter int unsigned L_MAX  = L_MAX_DEF,
  parameter int unsigned LW     = (L_MAX > 1) ? $clog2(L_MAX) : 1,
  parameter int unsigned JW     = $clog2(J_MAX),
  parameter int unsigned PW     = (N_PE > 1) ? $clog2(N_PE) : 1,
  parameter int unsigned ADDR_W = LW + 1 + PW + JW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              load_param_weight,
  input  logic [DW-1:0]     param_data,
  input  logic [LW:0]       num_layers,
  input  layer_cfg_t        cfg [L_MAX],
  output logic [ADDR_W-1:0] param_addr,
  output logic              w_we,
  output logic [PW-1:0]     w_pe,
  output logic [LW+JW-1:0]  w_addr,
  output logic [DW-1:0]     w_data,
  output logic              b_we,
  output logic [PW-1:0]     b_pe,
  output logic [LW-1:0]     b_layer,
  output logic [DW-1:0]     b_data,
  output logic              params_loaded
);

  localparam int unsigned RW = PW + JW;

  logic [LW-1:0] l_r;
  logic          sel_r;
  logic [PW-1:0] n_r;
  logic [JW-1:0] j_r;
  logic          take;
  logic          last_n, last_j, last_l;

  // Fields of the uniform address (Fig. "memory map" layout).
  logic [LW-1:0] a_layer;
  logic          a_sel;
  logic [RW-1:0] a_r;

  assign param_addr = sel_r ? {l_r, 1'b1, RW'(n_r)} : {l_r, 1'b0, n_r, j_r};
  assign a_layer    = param_addr[ADDR_W-1 -: LW];
  assign a_sel      = param_addr[RW];
  assign a_r        = param_addr[RW-1:0];

  assign take   = load_param_weight && !params_loaded;
  assign last_n = (32'(n_r) + 1 >= 32'(cfg[l_r].n_neurons));
  assign last_j = (32'(j_r) + 1 >= 32'(cfg[l_r].n_inputs));
  assign last_l = (32'(l_r) + 1 >= 32'(num_layers));

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      l_r <= '0; sel_r <= 1'b0; n_r <= '0; j_r <= '0;
      params_loaded <= 1'b0;
    end else if (take) begin
      if (!sel_r) begin
        if (last_j) begin
          j_r <= '0;
          if (last_n) begin n_r <= '0; sel_r <= 1'b1; end
          else        n_r <= n_r + 1'b1;
        end else begin
          j_r <= j_r + 1'b1;
        end
      end else begin
        if (last_n) begin
          n_r <= '0; sel_r <= 1'b0;
          if (last_l) params_loaded <= 1'b1;
          else        l_r <= l_r + 1'b1;
        end else begin
          n_r <= n_r + 1'b1;
        end
      end
    end
  end

  // Decode the address into a bank or bias write (registered).
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_we <= 1'b0; b_we <= 1'b0;
      w_pe <= '0; w_addr <= '0; w_data <= '0;
      b_pe <= '0; b_layer <= '0; b_data <= '0;
    end else begin
      w_we <= take && !a_sel;
      b_we <= take && a_sel;
      w_pe    <= a_r[RW-1 -: PW];
      w_addr  <= {a_layer, a_r[JW-1:0]};
      w_data  <= param_data;
      b_pe    <= a_r[PW-1:0];
      b_layer <= a_layer;
      b_data  <= param_data;
    end
  end

endmodule
