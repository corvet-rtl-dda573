// multi_af: time-multiplexed multi-activation-function unit.
//
// One unit serves all PEs, one value at a time. Seven functions share a single
// hyperbolic CORDIC (sinh, cosh), a single linear CORDIC divider, a front and a
// back multiplier, an adder pair and a FIFO:
//
//   ReLU     sel_rs demux sends x past both CORDICs; a sign MUX picks x or 0
//            and the bypass buffer registers it.
//   Tanh     p = sinh x, q = cosh x, out = p / q.
//   Sigmoid  ex = sinh x + cosh x = e^x; p = ex, q = 1 + ex, out = p / q.
//   Swish    front multiply m = beta*x; sigmoid(m); back multiply x * sigmoid.
//   GELU     as Swish with t = 1.702 in place of beta (sigmoid approximation).
//   SELU     x > 0: lambda * x (back multiply);
//            x <= 0: ex - 1 (the constant-1 adder), times lambda*alpha.
//   SoftMax  pass 1: for each element (until in_last) e^x is pushed into the
//            FIFO and added to a running sum; pass 2: each FIFO entry is
//            divided by the sum and sent out in order.
//   (sel 7)  identity, through the bypass buffer.
//
// Number format: in_data / out_data are signed Q7.8 (AF_FRAC = 8); inside, Q.16
// in CW = 48 bits. out_data saturates to 16 bits. Arguments of the exponential
// are clamped to |x| <= 8; SoftMax subtracts no maximum.
//
// Handshake: an element is taken when in_valid && in_ready; in_ready is high
// only when the unit is idle. A result appears as a one-cycle out_valid pulse
// with out_data. Latency: 2 cycles for ReLU/identity, about 42 for the sigmoid
// family, 21 + 20 per element for SoftMax. sel_af is sampled with each element
// and must stay SoftMax over a SoftMax vector.
//
// From the paper: the shared hyperbolic/linear CORDIC pair, the two
// multipliers, the ReLU bypass buffer, the SoftMax FIFO, the constant-1 adder
// and the 3-bit function select. This design's own choices: the formulas behind
// each function, the constants, Q formats, the handshake. The HOAA block and
// the "input >> 1" path shown in the paper's block diagram are not built, since
// their function is not given.
module multi_af
  import corvet_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = N_PE_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  af_sel_e       sel_af,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  input  logic          in_last,
  output logic          in_ready,
  output logic          out_valid,
  output logic [DW-1:0] out_data,
  output logic          busy
);

  localparam int unsigned FW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  typedef enum logic [3:0] {
    A_IDLE, A_BYPASS, A_PREMUL, A_HYP_GO, A_HYP_WAIT, A_DIV_WAIT,
    A_POSTMUL, A_OUT, A_SM_NEXT, A_SM_WAIT
  } af_state_e;

  af_state_e            st;
  af_sel_e              fn_r;
  logic                 last_r;
  logic signed [CW-1:0] x_r, m_r, res_r, pm_a, pm_b;

  // ---------------------------------------------------------------- CORDICs
  logic                 hyp_start, hyp_busy, hyp_done;
  logic signed [CW-1:0] sinh_x, cosh_x;
  logic                 div_start, div_busy, div_done;
  logic signed [CW-1:0] div_p, div_q, quot;

  hyp_cordic u_hyp (
    .clk, .rst_n, .start(hyp_start), .theta(m_r),
    .busy(hyp_busy), .done(hyp_done), .sinh_o(sinh_x), .cosh_o(cosh_x)
  );

  lin_cordic_div u_div (
    .clk, .rst_n, .start(div_start), .p(div_p), .q(div_q),
    .busy(div_busy), .done(div_done), .quot(quot)
  );

  // ex adder and constant-1 adder
  logic signed [CW-1:0] ex, ex_p1, ex_m1;
  assign ex    = sinh_x + cosh_x;
  assign ex_p1 = ex + (CW'(1) <<< CF);
  assign ex_m1 = ex - (CW'(1) <<< CF);

  // ---------------------------------------------------------------- SoftMax FIFO
  logic signed [CW-1:0] fifo [FIFO_DEPTH];
  logic [FW-1:0]        wr_p, rd_p;
  logic [FW:0]          fcnt;
  logic signed [CW-1:0] sm_sum;
  logic                 push, pop;

  // ---------------------------------------------------------------- multipliers
  function automatic logic signed [CW-1:0] qmul(logic signed [CW-1:0] a, logic signed [CW-1:0] b);
    logic signed [2*CW-1:0] pr;
    pr = 96'(a) * 96'(b);
    return CW'(pr >>> CF);
  endfunction

  function automatic logic [DW-1:0] to_q78(logic signed [CW-1:0] v);
    logic signed [CW-1:0] s;
    s = v >>> (CF - AF_FRAC);
    if (s > CW'(32767))  return 16'h7FFF;
    if (s < -CW'(32768)) return 16'h8000;
    return s[DW-1:0];
  endfunction

  logic signed [CW-1:0] x_in;
  assign x_in = CW'($signed(in_data)) <<< (CF - AF_FRAC);

  assign in_ready  = (st == A_IDLE);
  assign busy      = (st != A_IDLE) || (fcnt != '0);
  assign hyp_start = (st == A_HYP_GO);
  assign push      = (st == A_HYP_WAIT) && hyp_done && fn_r == AF_SOFTMAX;
  assign pop       = (st == A_SM_NEXT) && fcnt != '0;

  // divider operand MUXes (p / q selection)
  always_comb begin
    div_p = ex; div_q = ex_p1; div_start = 1'b0;
    if (st == A_HYP_WAIT && hyp_done) begin
      case (fn_r)
        AF_TANH:                        begin div_p = sinh_x; div_q = cosh_x; div_start = 1'b1; end
        AF_SIGMOID, AF_GELU, AF_SWISH:  begin div_p = ex;     div_q = ex_p1;  div_start = 1'b1; end
        default: ;
      endcase
    end else if (pop) begin
      div_p = fifo[rd_p]; div_q = sm_sum; div_start = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= A_IDLE; fn_r <= AF_NONE; last_r <= 1'b0;
      x_r <= '0; m_r <= '0; res_r <= '0; pm_a <= '0; pm_b <= '0;
      out_valid <= 1'b0; out_data <= '0;
      wr_p <= '0; rd_p <= '0; fcnt <= '0; sm_sum <= '0;
    end else begin
      out_valid <= 1'b0;
      case (st)
        A_IDLE: if (in_valid) begin
          fn_r   <= sel_af;
          last_r <= in_last;
          x_r    <= x_in;
          case (sel_af)
            AF_RELU: begin res_r <= x_in[CW-1] ? '0 : x_in; st <= A_BYPASS; end
            AF_NONE: begin res_r <= x_in; st <= A_BYPASS; end
            AF_SELU: if (!x_in[CW-1] && x_in != '0) begin
                       pm_a <= x_in; pm_b <= CW'(SELU_LAMBDA); st <= A_POSTMUL;
                     end else begin
                       m_r <= x_in; st <= A_HYP_GO;
                     end
            default: st <= A_PREMUL;
          endcase
        end
        A_BYPASS: begin
          out_valid <= 1'b1;
          out_data  <= to_q78(res_r);
          st        <= A_IDLE;
        end
        A_PREMUL: begin
          case (fn_r)
            AF_GELU:  m_r <= qmul(x_r, CW'(GELU_T));
            AF_SWISH: m_r <= qmul(x_r, CW'(SWISH_BETA));
            default:  m_r <= x_r;
          endcase
          st <= A_HYP_GO;
        end
        A_HYP_GO: st <= A_HYP_WAIT;
        A_HYP_WAIT: if (hyp_done) begin
          case (fn_r)
            AF_SOFTMAX: begin
              fifo[wr_p] <= ex;
              wr_p   <= wr_p + 1'b1;
              fcnt   <= fcnt + 1'b1;
              sm_sum <= sm_sum + ex;
              st     <= last_r ? A_SM_NEXT : A_IDLE;
            end
            AF_SELU: begin pm_a <= ex_m1; pm_b <= CW'(SELU_LA); st <= A_POSTMUL; end
            default: st <= A_DIV_WAIT;
          endcase
        end
        A_DIV_WAIT: if (div_done) begin
          if (fn_r == AF_GELU || fn_r == AF_SWISH) begin
            pm_a <= x_r; pm_b <= quot; st <= A_POSTMUL;
          end else begin
            res_r <= quot; st <= A_OUT;
          end
        end
        A_POSTMUL: begin res_r <= qmul(pm_a, pm_b); st <= A_OUT; end
        A_OUT: begin
          out_valid <= 1'b1;
          out_data  <= to_q78(res_r);
          st        <= A_IDLE;
        end
        A_SM_NEXT: begin
          if (fcnt != '0) begin
            rd_p <= rd_p + 1'b1;
            fcnt <= fcnt - 1'b1;
            st   <= A_SM_WAIT;
          end else begin
            sm_sum <= '0;
            wr_p <= '0; rd_p <= '0;
            st   <= A_IDLE;
          end
        end
        A_SM_WAIT: if (div_done) begin
          out_valid <= 1'b1;
          out_data  <= to_q78(quot);
          st        <= A_SM_NEXT;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  // Each CORDIC is started only when idle; a SoftMax vector must fit in the FIFO.
  a_hyp_free:  assert property (@(posedge clk) disable iff (!rst_n) hyp_start |-> !hyp_busy);
  a_div_free:  assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) push |-> fcnt < (FW+1)'(FIFO_DEPTH));

endmodule
