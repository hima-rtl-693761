// noc_router: 8-way multi-mode router of the HiMA network-on-chip.
//
// Nine ports: the eight compass directions (N, NE, E, SE, S, SW, W, NW) and the local tile.
// Packets are single flits (hima_pkg::flit_t) routed by destination grid position.
//
//  * On/off switches: the mode input (star, ring, diagonal, full) selects which ports are
//    switched on (hima_pkg::mode_ports). A port that is off neither accepts (in_ready low)
//    nor sends. In ring mode inner tiles only use east/west; in diagonal mode only
//    north-east/south-west; in star mode only the links on CT-to-PT paths.
//  * Route LUT: a table, computed at elaboration for this router's position, gives the
//    output port for every mode and destination: minimal diagonal-first routing in star and
//    full mode, the serpentine line in ring mode, the anti-diagonal in diagonal mode.
//  * Input buffers: a DEPTH-entry FIFO per input port.
//  * Feed-through: a flit arriving at an input whose FIFO is empty competes for its output
//    in the same cycle; if it wins it is written straight into the output register,
//    skipping the buffer. A hop then costs one cycle instead of two.
//  * Crossbar with a round-robin arbiter per output port, and one output register per port.
//
// The port set, on/off switches, route LUT, bypass and crossbar follow the published router;
// FIFO depth, the arbiter and the valid/ready link handshake are this design's choices.
// Link handshake: a flit moves when out_valid and the neighbour's in_ready are both high;
// in_ready depends only on registered state, so there is no combinational path between
// routers.
module noc_router
  import hima_pkg::*;
#(
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  noc_mode_e mode,
  input  logic      in_valid  [NPORT],
  input  flit_t     in_flit   [NPORT],
  output logic      in_ready  [NPORT],
  output logic      out_valid [NPORT],
  output flit_t     out_flit  [NPORT],
  input  logic      out_ready [NPORT],
  output logic      bypass_evt,   // a flit skipped its input buffer this cycle
  output logic      stall_evt     // a flit waited for its output port this cycle
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef logic [3:0] port_t;
  typedef logic [4*NPOS*4-1:0]  lut_t;    // entry (mode, dst) at bits [(mode*NPOS+dst)*4 +: 4]
  typedef logic [4*NPORT-1:0]   mask_t;   // mode m at bits [m*NPORT +: NPORT]

  function automatic lut_t make_lut();
    lut_t t;
    t = '0;
    for (int m = 0; m < 4; m++)
      for (int d = 0; d < int'(NPOS); d++)
        t[(m*NPOS+d)*4 +: 4] = port_t'(route_fn(noc_mode_e'(m), X, Y, pos_x(d), pos_y(d)));
    return t;
  endfunction
  function automatic mask_t make_mask();
    mask_t t;
    t = '0;
    for (int m = 0; m < 4; m++) t[m*NPORT +: NPORT] = mode_ports(noc_mode_e'(m), X, Y);
    return t;
  endfunction

  localparam lut_t  ROUTE_LUT = make_lut();
  localparam mask_t PORT_EN   = make_mask();

  flit_t          fifo   [NPORT][DEPTH];
  logic [AW-1:0]  rd_ptr [NPORT];
  logic [AW-1:0]  wr_ptr [NPORT];
  logic [AW:0]    cnt    [NPORT];

  logic [NPORT-1:0] en;
  logic  cand_valid [NPORT];
  flit_t cand_flit  [NPORT];
  logic  cand_byp   [NPORT];
  port_t cand_port  [NPORT];
  logic  granted    [NPORT];
  logic  load       [NPORT];
  flit_t load_flit  [NPORT];
  logic [3:0] rr    [NPORT];
  logic [3:0] winner [NPORT];

  assign en = PORT_EN[int'(mode)*NPORT +: NPORT];

  int pi;

  always_comb begin
    pi = 0;
    for (int p = 0; p < NPORT; p++) begin
      in_ready[p]   = en[p] && (cnt[p] < (AW+1)'(DEPTH));
      cand_byp[p]   = (cnt[p] == '0);
      cand_flit[p]  = cand_byp[p] ? in_flit[p] : fifo[p][rd_ptr[p]];
      cand_valid[p] = en[p] && (!cand_byp[p] || in_valid[p]);
      cand_port[p]  = ROUTE_LUT[(int'(mode)*NPOS + int'(cand_flit[p].dst_y)*GRID_C
                                 + int'(cand_flit[p].dst_x))*4 +: 4];
    end
    for (int p = 0; p < NPORT; p++) granted[p] = 1'b0;
    for (int o = 0; o < NPORT; o++) begin
      load[o]      = 1'b0;
      load_flit[o] = '0;
      winner[o]    = '0;
      if (en[o] && (!out_valid[o] || out_ready[o])) begin
        for (int k = 0; k < NPORT; k++) begin
          pi = (int'(rr[o]) + k) % NPORT;
          if (!load[o] && cand_valid[pi] && cand_port[pi] == port_t'(o)) begin
            load[o]      = 1'b1;
            load_flit[o] = cand_flit[pi];
            winner[o]    = 4'(pi);
            granted[pi]  = 1'b1;
          end
        end
      end
    end
    bypass_evt = 1'b0;
    stall_evt  = 1'b0;
    for (int p = 0; p < NPORT; p++) begin
      if (granted[p] && cand_byp[p]) bypass_evt = 1'b1;
      if (cand_valid[p] && !granted[p]) stall_evt = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORT; p++) begin
        rd_ptr[p]    <= '0;
        wr_ptr[p]    <= '0;
        cnt[p]       <= '0;
        out_valid[p] <= 1'b0;
        out_flit[p]  <= '0;
        rr[p]        <= '0;
      end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        logic push, pop;
        pop  = granted[p] && !cand_byp[p];
        push = in_valid[p] && in_ready[p] && !(granted[p] && cand_byp[p]);
        if (push) begin
          fifo[p][wr_ptr[p]] <= in_flit[p];
          wr_ptr[p] <= (wr_ptr[p] == AW'(DEPTH - 1)) ? '0 : wr_ptr[p] + 1'b1;
        end
        if (pop) rd_ptr[p] <= (rd_ptr[p] == AW'(DEPTH - 1)) ? '0 : rd_ptr[p] + 1'b1;
        cnt[p] <= cnt[p] + (AW+1)'(push) - (AW+1)'(pop);
      end
      for (int o = 0; o < NPORT; o++) begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          out_flit[o]  <= load_flit[o];
          rr[o]        <= (winner[o] == 4'(NPORT - 1)) ? '0 : winner[o] + 1'b1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  // Every flit that is offered must have a route that is switched on in the current mode.
  for (genvar p = 0; p < NPORT; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      cand_valid[p] |-> (cand_port[p] < port_t'(NPORT) && en[cand_port[p]]))
      else $error("router (%0d,%0d): no route for input %0d in mode %s", X, Y, p, mode.name());
  end
endmodule
