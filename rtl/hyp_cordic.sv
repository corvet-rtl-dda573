// hyp_cordic: iterative hyperbolic-rotation CORDIC giving sinh and cosh.
//
// Works on signed Q.16 words of CW bits. The argument is clamped to |x| <= 8
// and split as x = q*ln2 + r with q = round(x/ln2), so |r| <= ln2/2 lies well
// inside the CORDIC convergence range (|r| < 1.118). Rotation mode then runs
// one micro-rotation per clock on a single X/Y/Z datapath:
//     d = sgn(Z);  X <- X + d*(Y >>> i);  Y <- Y + d*(X >>> i);
//     Z <- Z - d*atanh(2^-i)
// for i = 1..16 with i = 4 and i = 13 repeated (18 steps), starting from
// X = 1/K_h, Y = 0, so X -> cosh r and Y -> sinh r. Finally
//     e^x = 2^q (cosh r + sinh r),   e^-x = 2^-q (cosh r - sinh r),
//     sinh x = (e^x - e^-x)/2,       cosh x = (e^x + e^-x)/2.
//
// Timing: start is taken when idle; done pulses 20 cycles later (1 reduction
// cycle, 18 rotations, 1 output cycle) with sinh_o / cosh_o registered and held
// until the next start.
//
// From the paper: a shared iterative hyperbolic CORDIC producing sinh x and
// cosh x under a control input. This design's own choices: the ln2 range
// reduction, the step schedule, Q.16 format and the clamp.
module hyp_cordic
  import corvet_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [CW-1:0] theta,
  output logic                 busy,
  output logic                 done,
  output logic signed [CW-1:0] sinh_o,
  output logic signed [CW-1:0] cosh_o
);

  typedef enum logic [1:0] {H_IDLE, H_ROT, H_OUT} hyp_state_e;

  hyp_state_e           st;
  logic signed [CW-1:0] x_r, y_r, z_r;
  logic signed [7:0]    q_r;
  logic [4:0]           s_r;

  // range reduction (combinational, used on start)
  logic signed [CW-1:0] th_c, r_c;
  logic signed [63:0]   prod;
  logic signed [7:0]    q_c;

  always_comb begin
    th_c = theta;
    if (th_c > CW'(X_CLAMP))  th_c = CW'(X_CLAMP);
    if (th_c < -CW'(X_CLAMP)) th_c = -CW'(X_CLAMP);
    prod = 64'(th_c) * 64'(INV_LN2_Q) + (64'sd1 <<< (2 * CF - 1));
    q_c  = 8'(prod >>> (2 * CF));
    r_c  = th_c - CW'(64'(q_c) * 64'(LN2_Q));
  end

  // one micro-rotation
  logic signed [CW-1:0] x_n, y_n, z_n;
  int unsigned          sh;

  always_comb begin
    sh = hyp_shift(32'(s_r));
    if (!z_r[CW-1]) begin
      x_n = x_r + (y_r >>> sh);
      y_n = y_r + (x_r >>> sh);
      z_n = z_r - atanh_lut(sh);
    end else begin
      x_n = x_r - (y_r >>> sh);
      y_n = y_r - (x_r >>> sh);
      z_n = z_r + atanh_lut(sh);
    end
  end

  // output scaling by 2^q
  logic signed [CW-1:0] ep, em, epx, emx;

  always_comb begin
    ep = x_r + y_r;   // e^r
    em = x_r - y_r;   // e^-r
    if (q_r >= 0) begin
      epx = ep <<< q_r;
      emx = em >>> q_r;
    end else begin
      epx = ep >>> (-q_r);
      emx = em <<< (-q_r);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= H_IDLE; x_r <= '0; y_r <= '0; z_r <= '0; q_r <= '0; s_r <= '0;
      sinh_o <= '0; cosh_o <= '0;
    end else begin
      case (st)
        H_IDLE: if (start) begin
          x_r <= CW'(HYP_INV_GAIN);
          y_r <= '0;
          z_r <= r_c;
          q_r <= q_c;
          s_r <= '0;
          st  <= H_ROT;
        end
        H_ROT: begin
          x_r <= x_n; y_r <= y_n; z_r <= z_n;
          s_r <= s_r + 1'b1;
          if (32'(s_r) == HYP_STEPS - 1) st <= H_OUT;
        end
        H_OUT: begin
          sinh_o <= (epx - emx) >>> 1;
          cosh_o <= (epx + emx) >>> 1;
          st     <= H_IDLE;
        end
        default: st <= H_IDLE;
      endcase
    end
  end

  assign busy = (st != H_IDLE);

  // done is registered alongside the outputs
  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= (st == H_OUT);
  end

endmodule
