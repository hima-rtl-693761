// mm_engine: matrix-matrix (M-M) engine of a processing tile.
//
// An array of NPE processing elements (pe) followed by a configurable processing tree (cpt)
// over the PE outputs, as in the published PT. Each cycle with in_valid high, PE i receives
// a[i] and b[i] and all PEs run the same mode with the same RF addresses (SIMD). Two result
// paths:
//   * pe_y[i]: the PE results, valid one cycle later (pe_valid). Element-wise work and
//     accumulation in the PE RFs (e.g. M^T w, one memory row per cycle with PE_MAC).
//   * cpt_y: the PE results reduced by the tree, valid 1 + log2(NPE) cycles after the
//     inputs (cpt_valid). Inner products: PE_MUL then CPT_ADD on every level.
// NPE = 64 PEs with 64-deep RFs follows the published prototype sizing; the SIMD control is
// this design's choice.
module mm_engine
  import hima_pkg::*;
#(
  parameter int unsigned NPE      = 64,
  parameter int unsigned RF_DEPTH = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  pe_op_e  op,
  input  word_t   a [NPE],
  input  word_t   b [NPE],
  input  logic [$clog2(RF_DEPTH)-1:0] ra,
  input  logic    rf_we,
  input  logic [$clog2(RF_DEPTH)-1:0] wa,
  input  cpt_op_e level_op [$clog2(NPE)],
  output logic    pe_valid,
  output word_t   pe_y [NPE],
  output logic    cpt_valid,
  output word_t   cpt_y
);
  for (genvar i = 0; i < NPE; i++) begin : g_pe
    pe #(.RF_DEPTH(RF_DEPTH)) u_pe (
      .clk(clk), .rst_n(rst_n), .en(in_valid), .op(op), .a(a[i]), .b(b[i]),
      .ra(ra), .rf_we(rf_we), .wa(wa), .y(pe_y[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pe_valid <= 1'b0;
    else        pe_valid <= in_valid;
  end

  cpt #(.NIN(NPE)) u_cpt (
    .clk(clk), .rst_n(rst_n), .in_valid(pe_valid), .x(pe_y), .level_op(level_op),
    .out_valid(cpt_valid), .y(cpt_y)
  );
endmodule
