// aad_sa: subtraction-absolute (SA) module, the two-input building block of
// AAD pooling.
//
// Stage 1 subtracts the inputs, d = a - b (DW+1 bits). A comparator against zero
// turns the sign of d into +1 or -1, while a buffer register carries d itself so
// both arrive together. Stage 2 multiplies the two, giving |d|, and halves it for
// the two-input AAD value |a - b| / 2 (floor).
//
// Interface: in_valid/a/b in, out_valid/absdiff/aad2 out. Fully pipelined: one
// pair per clock, latency 2 cycles, no stall.
//
// From the paper: the subtractor, the +1/-1 sign comparator, the timing buffer,
// the multiplier and the divide-by-two. This design's own choices: the two
// register stages and the widths.
module aad_sa
  import corvet_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  output logic                 out_valid,
  output logic        [DW:0]   absdiff,
  output logic        [DW-1:0] aad2
);

  logic signed [DW:0] diff_buf;
  logic signed [1:0]  sgn;
  logic               v1;
  logic signed [DW+2:0] prod;

  assign prod = diff_buf * sgn;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; diff_buf <= '0; sgn <= 2'sd1;
      out_valid <= 1'b0; absdiff <= '0; aad2 <= '0;
    end else begin
      // stage 1: subtract; comparator and buffer in parallel
      v1       <= in_valid;
      diff_buf <= (DW+1)'(a) - (DW+1)'(b);
      sgn      <= (((DW+1)'(a) - (DW+1)'(b)) < 0) ? -2'sd1 : 2'sd1;
      // stage 2: multiply by the sign, divide by two
      out_valid <= v1;
      absdiff   <= prod[DW:0];
      aad2      <= prod[DW:1];
    end
  end

  // The product is never negative.
  a_nonneg: assert property (@(posedge clk) disable iff (!rst_n) v1 |-> !prod[DW+2]);

endmodule
