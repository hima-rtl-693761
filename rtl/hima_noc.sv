// hima_noc: the multi-mode HiMA network-on-chip.
//
// A GRID_R x GRID_C mesh of noc_router instances in which every router is also linked to
// its four diagonal neighbours, as in the published HiMA-NoC (a mesh with added diagonal
// connections). Each link is a pair of one-way channels with valid/ready handshake. The
// local port of every grid position is brought out: position p = y*GRID_C + x, which the
// top level ties to the controller tile, a processing tile, or nothing. All routers share
// one mode input, so the whole network switches mode at once (star, ring, diagonal, full);
// the mode may only change while the network is empty.
//
// Timing: one cycle per hop when a flit feeds through an empty input buffer, two when it is
// buffered. bypass_evt and stall_evt are the routers' per-cycle event flags.
module hima_noc
  import hima_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  noc_mode_e mode,
  input  logic      lin_valid  [NPOS],
  input  flit_t     lin_flit   [NPOS],
  output logic      lin_ready  [NPOS],
  output logic      lout_valid [NPOS],
  output flit_t     lout_flit  [NPOS],
  input  logic      lout_ready [NPOS],
  output logic [NPOS-1:0] bypass_evt,
  output logic [NPOS-1:0] stall_evt
);
  logic  iv [NPOS][NPORT];
  flit_t id [NPOS][NPORT];
  logic  ir [NPOS][NPORT];
  logic  ov [NPOS][NPORT];
  flit_t od [NPOS][NPORT];
  logic  orr [NPOS][NPORT];

  for (genvar y = 0; y < GRID_R; y++) begin : g_y
    for (genvar x = 0; x < GRID_C; x++) begin : g_x
      localparam int unsigned POS = y * GRID_C + x;

      noc_router #(.X(x), .Y(y), .DEPTH(DEPTH)) u_router (
        .clk(clk), .rst_n(rst_n), .mode(mode),
        .in_valid(iv[POS]), .in_flit(id[POS]), .in_ready(ir[POS]),
        .out_valid(ov[POS]), .out_flit(od[POS]), .out_ready(orr[POS]),
        .bypass_evt(bypass_evt[POS]), .stall_evt(stall_evt[POS])
      );

      // Local port.
      assign iv[POS][P_L]  = lin_valid[POS];
      assign id[POS][P_L]  = lin_flit[POS];
      assign lin_ready[POS] = ir[POS][P_L];
      assign lout_valid[POS] = ov[POS][P_L];
      assign lout_flit[POS]  = od[POS][P_L];
      assign orr[POS][P_L]   = lout_ready[POS];

      // Direction ports: input p comes from the neighbour's output opposite(p).
      for (genvar p = 0; p < 8; p++) begin : g_p
        localparam int NX = nb_x(x, p);
        localparam int NY = nb_y(y, p);
        if (NX >= 0 && NX < int'(GRID_C) && NY >= 0 && NY < int'(GRID_R)) begin : g_link
          localparam int unsigned NPOS_ = NY * GRID_C + NX;
          localparam int unsigned OPP   = opposite(p);
          assign iv[POS][p]  = ov[NPOS_][OPP];
          assign id[POS][p]  = od[NPOS_][OPP];
          assign orr[POS][p] = ir[NPOS_][OPP];
        end else begin : g_edge
          assign iv[POS][p]  = 1'b0;
          assign id[POS][p]  = '0;
          assign orr[POS][p] = 1'b0;
        end
      end
    end
  end
endmodule
