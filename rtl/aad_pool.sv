// aad_pool: sliding-window Absolute Average Deviation (AAD) pooling with
// parallel SA modules.
//
// A stream of signed values enters a window of NWIN registers. When the window
// is first full, and then every STRIDE further values, the window is captured.
// All NWIN*(NWIN-1)/2 pairs (i < j) go at once to their own SA module; there is
// one SA per pair. An adder network sums the |x_i - x_j| outputs into a
// register, and the sum is divided by the normalisation factor M = NWIN*(NWIN-1):
//     AAD = sum_{i<j} |x_i - x_j| / M
// For NWIN = 2 this is |a - b| / 2, the two-input case. The division is a
// multiply by a constant reciprocal, ceil(2^40 / M), then a shift by 40. For
// these widths this gives exactly floor(sum / M).
//
// Interface: in_valid/in_data, one value per clock, never stalled. out_valid
// pulses with out_data (non-negative, DW bits). busy is high while a captured
// window has not yet produced its result. clear empties the window and drops
// windows in flight.
//
// Timing: fully pipelined. out_valid comes 4 cycles after the clock edge that
// takes the value completing a window: capture, two SA stages, the registered
// sum, and the divide. A new window may follow on the next clock (STRIDE = 1).
//
// From the paper: the SA module, parallel SA modules for the pairs with an
// adder network, the accumulation in a register, the division by M = N(N-1),
// and the sliding window with stride and pooling size. This design's own
// choices: NWIN = 4 and STRIDE = 4 (neither is given), the pipeline registers
// and the reciprocal multiplication.
module aad_pool
  import corvet_pkg::*;
#(
  parameter int unsigned NWIN   = 4,
  parameter int unsigned STRIDE = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 busy,
  output logic                 out_valid,
  output logic        [DW-1:0] out_data
);

  if (NWIN < 2 || STRIDE < 1 || STRIDE > NWIN) begin : g_bad_cfg
    $error("aad_pool: need NWIN >= 2 and 1 <= STRIDE <= NWIN");
  end

  localparam int unsigned PAIRS = NWIN * (NWIN - 1) / 2;
  localparam int unsigned M     = NWIN * (NWIN - 1);
  localparam int unsigned RS    = 40;
  localparam longint unsigned RECIP = ((64'd1 << RS) + 64'(M) - 64'd1) / 64'(M);
  localparam int unsigned IW    = $clog2(NWIN + 1);
  localparam int unsigned SW    = $clog2(STRIDE + 1);
  localparam int unsigned ACC_AW = DW + 1 + $clog2(PAIRS + 1);

  logic signed [DW-1:0] win [NWIN];     // sliding window
  logic signed [DW-1:0] cap [NWIN];     // captured window, input of the SAs
  logic [IW-1:0]        have;
  logic [SW-1:0]        since;
  logic                 fired;
  logic [3:0]           pipe;           // window in capture / SA1 / SA2 / sum
  logic [ACC_AW-1:0]    sum, sum_q;
  logic [127:0]         scaled;

  logic              fire;
  logic [IW-1:0]     have_n;
  logic [SW-1:0]     since_n;

  assign have_n  = (have == IW'(NWIN)) ? have : have + 1'b1;
  assign since_n = (since == SW'(STRIDE)) ? since : since + 1'b1;
  assign fire    = in_valid && have_n == IW'(NWIN) && (!fired || since_n == SW'(STRIDE));
  assign busy    = |pipe;
  assign scaled  = 128'(sum_q) * 128'(RECIP);

  // ---------------------------------------------------------------- SA modules
  logic [PAIRS-1:0] sa_ov;
  logic [DW:0]      sa_abs [PAIRS];
  logic [DW-1:0]    sa_half [PAIRS];

  for (genvar i = 0; i < int'(NWIN); i++) begin : g_i
    for (genvar j = i + 1; j < int'(NWIN); j++) begin : g_j
      localparam int unsigned P = i * (2 * NWIN - i - 1) / 2 + (j - i - 1);
      aad_sa u_sa (
        .clk, .rst_n, .in_valid(pipe[0]), .a(cap[i]), .b(cap[j]),
        .out_valid(sa_ov[P]), .absdiff(sa_abs[P]), .aad2(sa_half[P])
      );
      // the two-input |a-b|/2 is not used here: the factor 1/2 is part of M
      a_half: assert property (@(posedge clk) disable iff (!rst_n)
                sa_ov[P] |-> sa_half[P] == sa_abs[P][DW:1]);
    end
  end

  // adder network
  always_comb begin
    sum = '0;
    for (int p = 0; p < int'(PAIRS); p++) sum = sum + ACC_AW'(sa_abs[p]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      have <= '0; since <= '0; fired <= 1'b0; pipe <= '0;
      sum_q <= '0; out_valid <= 1'b0; out_data <= '0;
      for (int k = 0; k < int'(NWIN); k++) begin win[k] <= '0; cap[k] <= '0; end
    end else begin
      pipe      <= {pipe[2:0], fire};
      out_valid <= pipe[3];
      if (in_valid) begin
        for (int k = 0; k < int'(NWIN) - 1; k++) win[k] <= win[k+1];
        win[NWIN-1] <= in_data;
        have  <= have_n;
        since <= fire ? '0 : since_n;
        if (fire) begin
          fired <= 1'b1;
          for (int k = 0; k < int'(NWIN) - 1; k++) cap[k] <= win[k+1];
          cap[NWIN-1] <= in_data;
        end
      end
      if (pipe[2]) sum_q <= sum;
      if (pipe[3]) out_data <= DW'(scaled >> RS);
    end
  end

  // all SA modules run in step with the window pipeline
  a_sa_step: assert property (@(posedge clk) disable iff (!rst_n) sa_ov == {PAIRS{pipe[2]}});

endmodule
