// iter_cordic_mac: iterative linear-mode CORDIC multiply-accumulate.
//
// Computes acc_out ~= acc_in + a*b with a single shift/add datapath that is
// reused once per clock. Three registers hold X, Y and Z; an input MUX in front
// of each register picks the operands on start and the fed-back values
// afterwards. Each iteration k (k = 0, 1, ...) takes the sign of Z as the
// direction d and updates
//     Y <- Y + d * (X >>> k),   Z <- Z - d * 2^-k,   X unchanged.
// The number of iterations is a runtime input: few iterations give an
// approximate product quickly, more give an accurate one. Signed-digit CORDIC
// has no zero digit, so the residual of Z after n iterations is at most
// 2^-(n-1) and |acc_out - (acc_in + a*b)| <= |a| * 2^(P-1) * 2^-(n-1).
//
// Operand scaling: in precision P (4, 8 or 16) only the low P bits of a and b
// are used, sign-extended. Z holds b as the fraction b / 2^(P-1) in Q1.(DW-1),
// X holds a << (P-1), so a fully converged Y is acc_in + a*b in integer units.
//
// Timing: start is sampled in cycle 0 and loads the registers; iteration k runs
// in cycle k+1; done pulses in cycle `iters` together with acc_out. The MAC thus
// completes in `iters` cycles: 4/5 (8-bit, approximate/accurate), 7/9 (16-bit)
// and 4 (4-bit) at the operating points the paper gives. A start while busy is
// ignored.
//
// From the paper: the MUX->Reg->shift/add loop of X, Y and Z with sgn(Z)
// steering, runtime iteration depth and the cycle counts. This design's own
// choices: the operand scaling, the accumulator width and the start/done
// handshake. The Z step is a power of two, so the paper's LUT is a shift here.
module iter_cordic_mac
  import corvet_pkg::*;
#(
  parameter int unsigned AW = ACC_W,   // accumulator width
  parameter int unsigned NW = IT_W     // iteration count width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  precision_e           prec,
  input  logic [NW-1:0]        iters,
  input  logic [DW-1:0]        a,
  input  logic [DW-1:0]        b,
  input  logic signed [AW-1:0] acc_in,
  output logic                 busy,
  output logic                 done,
  output logic signed [AW-1:0] acc_out
);

  localparam int unsigned ZW = DW + 2;  // Q2.(DW-1): |z| < 2 during iteration

  logic signed [AW-1:0] x_r, y_r, y_n;
  logic signed [ZW-1:0] z_r, z_n;
  logic [NW-1:0]        k_r, n_r;

  logic signed [DW-1:0] a_s, b_s;
  logic signed [AW-1:0] x0;
  logic signed [ZW-1:0] z0, step;
  logic                 dir_pos;

  // Operand load values (input side of the MUXes).
  always_comb begin
    a_s = sext_prec(a, prec);
    b_s = sext_prec(b, prec);
    case (prec)
      PREC_4:  begin x0 = AW'(a_s) <<< 3;  z0 = ZW'(b_s) <<< (DW - 4); end
      PREC_8:  begin x0 = AW'(a_s) <<< 7;  z0 = ZW'(b_s) <<< (DW - 8); end
      default: begin x0 = AW'(a_s) <<< 15; z0 = ZW'(b_s);             end
    endcase
  end

  // One CORDIC iteration on the register outputs.
  always_comb begin
    dir_pos = ~z_r[ZW-1];                                // sgn(Z) >= 0
    step    = ZW'(1) <<< (DW - 1);
    step    = step >>> k_r;                              // 2^-k in Q.(DW-1)
    if (dir_pos) begin
      y_n = y_r + (x_r >>> k_r);
      z_n = z_r - step;
    end else begin
      y_n = y_r - (x_r >>> k_r);
      z_n = z_r + step;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_r  <= '0;
      y_r  <= '0;
      z_r  <= '0;
      k_r  <= '0;
      n_r  <= '0;
      busy <= 1'b0;
    end else if (!busy) begin
      if (start && iters != '0) begin
        x_r  <= x0;
        y_r  <= acc_in;
        z_r  <= z0;
        k_r  <= '0;
        n_r  <= iters;
        busy <= 1'b1;
      end
    end else begin
      y_r <= y_n;
      z_r <= z_n;
      k_r <= k_r + 1'b1;
      if (k_r + 1'b1 == n_r) busy <= 1'b0;
    end
  end

  assign done    = busy && (k_r + 1'b1 == n_r);
  assign acc_out = y_n;

endmodule
