// input_preprocessor: double-banked input feature-map buffer in front of the
// vector engine.
//
// Two banks of J_MAX words take turns. The fill bank takes input words from
// external memory, one per cycle with in_valid. A write pointer (the
// data-address manager) puts each word at the next position, and a counter
// (the input tracker) reports how many words it holds and when it is full. The
// read bank is the one filled before the last swap. The control engine reads it
// by position (rd_idx, combinational rd_data) and, as with the weight banks,
// walks it from the last word loaded to the first (LIFO).
//
// swap, pulsed when a run starts, hands the fill bank over for reading and
// empties the other bank for the next vector. So the next input vector can be
// streamed in while the current one is being computed. Words sent while the
// fill bank is full, or in the swap cycle itself, are dropped.
//
// Timing: a word is written at the clock edge that takes it; count and full
// follow in the same edge. swap takes effect at its clock edge; from then on
// rd_data shows the new read bank and count is 0.
//
// From the paper: the Input Feature Map / Data-Address Manager / Input Tracker
// blocks, a 32-entry activation bank, valid-qualified loading, and memory
// access overlapping computation. This design's own choices: two banks of the
// input buffer swapped at each start, and the pointer, counter and array that
// realise the three blocks.
module input_preprocessor
  import corvet_pkg::*;
#(
  parameter int unsigned J_MAX = J_MAX_DEF,
  parameter int unsigned JW    = $clog2(J_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  output logic [JW:0]   count,
  output logic          full,
  input  logic [JW-1:0] rd_idx,
  output logic [DW-1:0] rd_data
);

  logic [DW-1:0] ifm [2][J_MAX];
  logic [JW-1:0] wptr;
  logic          wsel;              // bank being filled; the other one is read
  logic          accept;

  assign full   = (count == (JW+1)'(J_MAX));
  assign accept = in_valid && !full && !swap;

  // data-address manager + input tracker
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wsel  <= 1'b0;
      wptr  <= '0;
      count <= '0;
    end else if (swap) begin
      wsel  <= !wsel;
      wptr  <= '0;
      count <= '0;
    end else if (accept) begin
      wptr  <= wptr + 1'b1;
      count <= count + 1'b1;
    end
  end

  // input feature map banks
  always_ff @(posedge clk) begin
    if (accept) ifm[wsel][wptr] <= in_data;
  end

  assign rd_data = ifm[!wsel][rd_idx];

endmodule
