// cpt: configurable processing tree (CPT) of the matrix-matrix engine.
//
// A binary reduction tree of cpt_cell nodes over NIN inputs (NIN a power of two): level 0
// combines input pairs, the last level yields one value. Every level has its own mode, so
// the same tree sums a vector (all CPT_ADD), multiplies it out (CPT_MUL), or applies e^x to
// input 0 and passes it down (CPT_SFU at level 0, CPT_BYP after). Per-level (rather than
// per-cell) configuration is this design's choice; the tree shape and cell contents follow
// the published CPT.
//
// Timing: fully pipelined, one register per level, so y is valid LEVELS cycles after the
// inputs; out_valid tracks in_valid through the pipeline. The level modes are sampled with
// the data at each level's input, so they must stay stable while a vector is in the tree.
module cpt
  import hima_pkg::*;
#(
  parameter int unsigned NIN = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  word_t   x [NIN],
  input  cpt_op_e level_op [$clog2(NIN)],
  output logic    out_valid,
  output word_t   y
);
  localparam int unsigned LEVELS = $clog2(NIN);

  // node[l][i]: output of level l-1 (node[0] are the inputs); level l has NIN >> l values.
  word_t node [LEVELS+1][NIN];
  logic [LEVELS:0] vpipe;

  assign vpipe[0] = in_valid;
  for (genvar i = 0; i < NIN; i++) begin : g_in
    assign node[0][i] = x[i];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar i = 0; i < (NIN >> (l + 1)); i++) begin : g_cell
      cpt_cell u_cell (
        .clk(clk), .rst_n(rst_n), .en(1'b1), .op(level_op[l]),
        .l(node[l][2*i]), .r(node[l][2*i+1]), .y(node[l+1][i])
      );
    end
    for (genvar i = (NIN >> (l + 1)); i < NIN; i++) begin : g_unused
      assign node[l+1][i] = '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vpipe[l+1] <= 1'b0;
      else        vpipe[l+1] <= vpipe[l];
    end
  end

  assign y         = node[LEVELS][0];
  assign out_valid = vpipe[LEVELS];
endmodule
