// rdvec_merge: read-vector merge of the distributed model (DNC-D) in the controller tile.
//
// In DNC-D every processing tile reads only its own part of the memory and returns a local
// read vector v_i (W words). The final read vector is the weighted sum
//   v = sum_i alpha_i * v_i,   alpha_i in [0, 1] supplied by the LSTM,
// as published. Words arrive one at a time, in any order, tagged with their tile index and
// column; each is multiplied by the tile's weight (Q16.16) and added to the column's
// accumulator. clear zeroes the accumulators (and wins over a word in the same cycle).
// Timing: one word per cycle, accumulated at the clock edge; acc is readable at any time.
module rdvec_merge
  import hima_pkg::*;
#(
  parameter int unsigned NB = 16,
  parameter int unsigned W  = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  word_t alpha [NB],
  input  logic  in_valid,
  input  logic [$clog2(NB)-1:0] in_tile,
  input  logic [$clog2(W)-1:0]  in_col,
  input  word_t in_data,
  output word_t acc [W]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < W; c++) acc[c] <= '0;
    end else if (clear) begin
      for (int unsigned c = 0; c < W; c++) acc[c] <= '0;
    end else if (in_valid) begin
      acc[in_col] <= acc[in_col] + fx_mul(alpha[in_tile], in_data);
    end
  end
endmodule
