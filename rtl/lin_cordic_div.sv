// lin_cordic_div: iterative linear-vectoring CORDIC divider, quot = p / q.
//
// Signed Q.16 words of CW bits; q must be positive and |p/q| < 2. One step per
// clock on a single datapath, for i = 0 .. NIT-1:
//     Y >= 0:  Y <- Y - (X >>> i),  Z <- Z + 2^-i
//     Y <  0:  Y <- Y + (X >>> i),  Z <- Z - 2^-i
// starting from X = q, Y = p, Z = 0, so Y is driven to zero and Z -> p/q with an
// error below 2^-(NIT-1). Both operands are first shifted left by the same
// amount so that q fills the word; the quotient is unchanged and X >>> i keeps
// its precision for small divisors.
//
// Timing: start is taken when idle; done pulses NIT+1 cycles later with quot
// registered and held until the next start.
//
// From the paper: a shared iterative linear CORDIC used for division (p, q
// inputs under a control input). This design's own choices: Q.16, NIT = 17.
module lin_cordic_div
  import corvet_pkg::*;
#(
  parameter int unsigned NIT = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [CW-1:0] p,
  input  logic signed [CW-1:0] q,
  output logic                 busy,
  output logic                 done,
  output logic signed [CW-1:0] quot
);

  logic signed [CW-1:0] x_r, y_r, z_r;
  logic [4:0]           i_r;
  logic                 run;
  logic signed [CW-1:0] step;

  assign step = (CW'(1) <<< CF) >>> i_r;

  // Normalisation: shift p and q left together until q's leading one sits at
  // bit CW-4 (room for |p| < 2q and the sign), so X >>> i keeps its precision.
  logic [5:0]           nrm;
  logic signed [CW-1:0] p_n, q_n;

  always_comb begin
    nrm = '0;
    for (int b = 0; b < CW - 3; b++)
      if (q[b]) nrm = 6'(CW - 4 - b);
    p_n = p <<< nrm;
    q_n = q <<< nrm;
  end
  assign busy = run;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; x_r <= '0; y_r <= '0; z_r <= '0; i_r <= '0;
      done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          x_r <= q_n; y_r <= p_n; z_r <= '0; i_r <= '0; run <= 1'b1;
        end
      end else begin
        if (!y_r[CW-1]) begin
          y_r <= y_r - (x_r >>> i_r);
          z_r <= z_r + step;
        end else begin
          y_r <= y_r + (x_r >>> i_r);
          z_r <= z_r - step;
        end
        i_r <= i_r + 1'b1;
        if (32'(i_r) == NIT - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
          quot <= (!y_r[CW-1]) ? z_r + step : z_r - step;
        end
      end
    end
  end

endmodule
