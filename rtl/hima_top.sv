// hima_top: the HiMA history-based memory access engine.
//
// One controller tile (CT) and Nt = 16 processing tiles (PTs) on the multi-mode HiMA-NoC,
// a 3 x 6 mesh of 8-way routers with diagonal links (the CT at column 2, row 1; the PTs fill
// the other positions in row-major order; one position has a router and no tile). The
// external memory (N x W = 1024 x 64 words, 32-bit) and the state memories are split
// row-wise over the PTs, 64 rows each.
//
// The neural network that drives the engine (an LSTM) is not part of this design: its side
// is the CT's operation port (op_*, alpha, rv, sort_done) and host flit port (h_*, r_*),
// through which it writes the interface vector into the tiles' memories and reads results.
// bypass_evt / stall_evt expose each router's per-cycle feed-through and stall events, and
// noc_mode the mode the network is in.
module hima_top
  import hima_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      op_valid,
  input  cmd_e      op,
  input  logic [$clog2(RHEADS)-1:0] op_head,
  output logic      op_ready,
  input  word_t     alpha [NT],
  output logic      rv_valid,
  output word_t     rv [WMEM],
  output logic      sort_done,
  input  logic      h_valid,
  input  flit_t     h_flit,
  input  logic      h_bcast,
  output logic      h_ready,
  input  noc_mode_e host_mode,
  output logic      r_valid,
  output flit_t     r_flit,
  output noc_mode_e noc_mode,
  output logic [NPOS-1:0] bypass_evt,
  output logic [NPOS-1:0] stall_evt
);
  logic  lin_valid  [NPOS];
  flit_t lin_flit   [NPOS];
  logic  lin_ready  [NPOS];
  logic  lout_valid [NPOS];
  flit_t lout_flit  [NPOS];
  logic  lout_ready [NPOS];

  hima_noc u_noc (
    .clk(clk), .rst_n(rst_n), .mode(noc_mode),
    .lin_valid(lin_valid), .lin_flit(lin_flit), .lin_ready(lin_ready),
    .lout_valid(lout_valid), .lout_flit(lout_flit), .lout_ready(lout_ready),
    .bypass_evt(bypass_evt), .stall_evt(stall_evt)
  );

  controller_tile u_ct (
    .clk(clk), .rst_n(rst_n),
    .op_valid(op_valid), .op(op), .op_head(op_head), .op_ready(op_ready), .alpha(alpha),
    .rv_valid(rv_valid), .rv(rv), .sort_done(sort_done),
    .h_valid(h_valid), .h_flit(h_flit), .h_bcast(h_bcast), .h_ready(h_ready),
    .host_mode(host_mode), .r_valid(r_valid), .r_flit(r_flit),
    .noc_mode(noc_mode),
    .rx_valid(lout_valid[CT_POS]), .rx_flit(lout_flit[CT_POS]), .rx_ready(lout_ready[CT_POS]),
    .tx_valid(lin_valid[CT_POS]), .tx_flit(lin_flit[CT_POS]), .tx_ready(lin_ready[CT_POS])
  );

  for (genvar p = 0; p < NPOS; p++) begin : g_pos
    localparam int unsigned K = pos_pt(p);
    if (K < NT) begin : g_pt
      processing_tile #(.ID(K)) u_pt (
        .clk(clk), .rst_n(rst_n),
        .rx_valid(lout_valid[p]), .rx_flit(lout_flit[p]), .rx_ready(lout_ready[p]),
        .tx_valid(lin_valid[p]), .tx_flit(lin_flit[p]), .tx_ready(lin_ready[p])
      );
    end else if (K > NT) begin : g_empty
      // router without a tile: nothing is injected, anything that arrives is dropped
      assign lin_valid[p]  = 1'b0;
      assign lin_flit[p]   = '0;
      assign lout_ready[p] = 1'b1;
    end
  end
endmodule
