// pms: NB-input parallel merge sorter (PMS) of the controller tile.
//
// Merges NB ascending lists and emits the NB smallest remaining elements per cycle, the
// published throughput of "Nt outputs per cycle". Each list presents a window of its next
// NB elements (win, win_valid; see usage_buffers). Since each window is sorted, the NB
// smallest remaining elements of all lists are among the windows. The sorter gives every
// valid window element a rank: its position in its own window plus, for every other list,
// the number of that list's window elements that sort before it (smaller key, or equal key
// and lower list index, which keeps the merge stable). Elements of rank below NB go to
// output slot rank; adv[b] is how many elements of list b were taken, fed back to move the
// read pointers in the same cycle. The rank scheme is this design's choice: the published
// PMS is cited from elsewhere and its insides are not given.
//
// Timing: ranks and adv are combinational; out/out_valid are registered, so a merge step
// taken in cycle t (when en is high) shows on the outputs at t+1. The published 4-input
// PMS is pipelined into 7 stages; here the pointer feedback is resolved in one cycle and
// only the output is registered.
module pms
  import hima_pkg::*;
#(
  parameter int unsigned NB = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  elem_t win       [NB][NB],
  input  logic  win_valid [NB][NB],
  output logic [$clog2(NB):0] adv [NB],
  output elem_t out       [NB],
  output logic  out_valid [NB]
);
  localparam int unsigned RW = $clog2(NB * NB) + 1;

  logic [RW-1:0] rank [NB][NB];

  always_comb begin
    for (int unsigned i = 0; i < NB; i++) begin
      adv[i] = '0;
      for (int unsigned k = 0; k < NB; k++) begin
        rank[i][k] = RW'(k);
        for (int unsigned j = 0; j < NB; j++) begin
          if (j != i) begin
            for (int unsigned m = 0; m < NB; m++) begin
              if (win_valid[j][m] &&
                  (win[j][m].key < win[i][k].key ||
                   (win[j][m].key == win[i][k].key && j < i)))
                rank[i][k] = rank[i][k] + 1'b1;
            end
          end
        end
        if (win_valid[i][k] && rank[i][k] < RW'(NB)) adv[i] = adv[i] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < NB; s++) begin
        out_valid[s] <= 1'b0;
        out[s]       <= '0;
      end
    end else begin
      for (int unsigned s = 0; s < NB; s++) out_valid[s] <= 1'b0;
      if (en) begin
        for (int unsigned i = 0; i < NB; i++)
          for (int unsigned k = 0; k < NB; k++)
            if (win_valid[i][k] && rank[i][k] < RW'(NB)) begin
              out[rank[i][k][$clog2(NB)-1:0]]       <= win[i][k];
              out_valid[rank[i][k][$clog2(NB)-1:0]] <= 1'b1;
            end
      end
    end
  end
endmodule
