// hima_pkg: types, sizes and helper functions shared by the HiMA engine.
//
// Numbers: every datapath word is 32 bits wide, read as signed Q16.16 fixed point (16 integer
// bits, 16 fraction bits). The word width follows the published 32-bit precision; the binary
// point is this design's choice.
//
// Sizes of the main configuration: 16 processing tiles (PTs) plus one controller tile (CT),
// an external memory of N x W = 1024 x 64 words split row-wise, so each PT holds n = N/Nt = 64
// rows. The NoC places the 17 tiles on a 3 x 6 grid of routers (one position stays empty);
// the grid shape and the CT position are choices of this design.
//
// A NoC packet is one flit (type flit_t): destination coordinates, source PT, a message type,
// a 16-bit address field and a 32-bit data word.
package hima_pkg;

  // ---------------------------------------------------------------- datapath
  localparam int unsigned DW   = 32;   // word width
  localparam int unsigned FRAC = 16;   // fraction bits of Q16.16
  typedef logic signed [DW-1:0] word_t;

  // Q16.16 multiply, truncated toward minus infinity.
  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC);
  endfunction

  // PE modes (bypass, add, multiply, multiply-then-add, add-then-multiply).
  typedef enum logic [2:0] {
    PE_BYP = 3'd0, PE_ADD = 3'd1, PE_MUL = 3'd2, PE_MAC = 3'd3, PE_AMUL = 3'd4
  } pe_op_e;

  // Configurable-processing-tree cell modes: adder, multiplier, special function (e^x of
  // the left input) and bypass (left input).
  typedef enum logic [1:0] {
    CPT_ADD = 2'd0, CPT_MUL = 2'd1, CPT_SFU = 2'd2, CPT_BYP = 2'd3
  } cpt_op_e;

  // ---------------------------------------------------------------- DNC sizes
  localparam int unsigned NT   = 16;          // processing tiles
  localparam int unsigned NMEM = 1024;        // N, external memory rows
  localparam int unsigned WMEM = 64;          // W, external memory columns
  localparam int unsigned NLOC = NMEM / NT;   // n, rows per PT
  localparam int unsigned RHEADS = 4;         // R, read heads

  // Sort element: a 32-bit usage key with a 16-bit tag (the memory row it belongs to).
  localparam int unsigned TAGW = 16;
  typedef struct packed {
    logic [DW-1:0]   key;
    logic [TAGW-1:0] tag;
  } elem_t;

  // ---------------------------------------------------------------- NoC
  localparam int unsigned GRID_R = 3;   // router rows
  localparam int unsigned GRID_C = 6;   // router columns
  localparam int unsigned CT_X   = 2;
  localparam int unsigned CT_Y   = 1;
  localparam int unsigned NPOS   = GRID_R * GRID_C;
  localparam int unsigned CT_POS = CT_Y * GRID_C + CT_X;

  typedef enum logic [1:0] {
    MODE_STAR = 2'd0,   // CT <-> PT traffic only: broadcast, collection, sorting
    MODE_RING = 2'd1,   // chain through all tiles: accumulation, inner products
    MODE_DIAG = 2'd2,   // north-east / south-west links only: matrix transpose
    MODE_FULL = 2'd3    // every link: matrix-vector and outer products
  } noc_mode_e;

  // Router ports: the eight compass directions and the local tile.
  localparam int unsigned NPORT = 9;
  localparam int unsigned P_N = 0, P_NE = 1, P_E = 2, P_SE = 3, P_S = 4,
                          P_SW = 5, P_W = 6, P_NW = 7, P_L = 8;

  typedef enum logic [3:0] {
    MSG_WR_EXT    = 4'd0,  // write external memory word, addr = row*W + col
    MSG_WR_USAGE  = 4'd1,  // write usage word, addr = local row
    MSG_WR_RDW    = 4'd2,  // write read weighting, addr = head*n + local row
    MSG_WR_WRW    = 4'd3,  // write write weighting, addr = local row
    MSG_WR_PREC   = 4'd4,  // write precedence, addr = local row
    MSG_WR_LINK   = 4'd5,  // write linkage word, addr = local row*N + column (low 16 bits)
    MSG_RD_REQ    = 4'd6,  // read request, data[3:0] = memory select, addr = word address
    MSG_RD_RSP    = 4'd7,  // read response to the CT
    MSG_CMD       = 4'd8,  // kernel command, data = cmd_e in [3:0], head in [7:4]
    MSG_USAGE_LOC = 4'd9,  // PT -> CT: locally sorted usage, addr = {slot, global row}
    MSG_USAGE_GLB = 4'd10, // CT -> PT: globally sorted usage, addr = {slot, global row}
    MSG_RDVEC     = 4'd11, // read-vector word, addr = column
    MSG_PSUM      = 4'd12, // ring partial sum of a read vector, addr = column
    MSG_WR_KEY    = 4'd13, // write one word of the read/write key, addr = column
    MSG_SIM       = 4'd14  // PT -> CT: similarity score M[i,.] . k, addr = global row
  } msg_e;

  // Memory select of a PT's on-tile memory system.
  typedef enum logic [3:0] {
    SEL_EXT   = 4'd0,  // external memory, word address row*W + col
    SEL_LINK  = 4'd1,  // linkage, local row*N + column
    SEL_PREC  = 4'd2,  // precedence
    SEL_USAGE = 4'd3,  // usage
    SEL_WRW   = 4'd4,  // write weighting
    SEL_RDW   = 4'd5,  // read weighting, head*n + local row
    SEL_SU    = 4'd6,  // globally sorted usage written back by the CT
    SEL_SI    = 4'd7   // global row index of each sorted usage entry
  } mem_sel_e;

  typedef enum logic [3:0] {
    CMD_SORT      = 4'd1,  // local usage sort, then send to the CT
    CMD_READ_D    = 4'd2,  // DNC-D local read: v_i = M_i^T w_i, sent to the CT
    CMD_READ_RING = 4'd3,  // DNC read: v = sum_i M_i^T w_i accumulated along the ring
    CMD_SIM       = 4'd4   // similarity M[i,.] . k for every local row, sent to the CT
  } cmd_e;

  typedef struct packed {
    logic [2:0] dst_x;
    logic [1:0] dst_y;
    logic [4:0] src;     // source PT index, NT for the CT
    msg_e       msg;
    logic [15:0] addr;
    word_t      data;
  } flit_t;

  // ---------------------------------------------------------------- placement
  // Grid position of PT k: positions are numbered row-major and the CT position is skipped.
  function automatic int unsigned pt_pos(input int unsigned k);
    return (k < CT_POS) ? k : k + 1;
  endfunction
  function automatic int unsigned pos_x(input int unsigned p); return p % GRID_C; endfunction
  function automatic int unsigned pos_y(input int unsigned p); return p / GRID_C; endfunction
  // PT index at grid position p, NT for the CT and NT+1 for an empty position.
  function automatic int unsigned pos_pt(input int unsigned p);
    if (p == CT_POS) return NT;
    if (p < CT_POS) return (p < NT) ? p : NT + 1;
    return (p - 1 < NT) ? p - 1 : NT + 1;
  endfunction

  // Ring order: a serpentine line through the grid, row 0 west to east, row 1 east to west...
  function automatic int unsigned ring_idx(input int unsigned x, input int unsigned y);
    return (y % 2 == 0) ? y * GRID_C + x : y * GRID_C + (GRID_C - 1 - x);
  endfunction

  // Minimal route, diagonal moves first, then east/west, then north/south. y grows southward.
  function automatic int unsigned route_min(input int unsigned x, input int unsigned y,
                                            input int unsigned dx, input int unsigned dy);
    if (dx == x && dy == y) return P_L;
    if (dx > x && dy < y) return P_NE;
    if (dx > x && dy > y) return P_SE;
    if (dx < x && dy > y) return P_SW;
    if (dx < x && dy < y) return P_NW;
    if (dx > x) return P_E;
    if (dx < x) return P_W;
    if (dy > y) return P_S;
    return P_N;
  endfunction

  function automatic int unsigned route_ring(input int unsigned x, input int unsigned y,
                                             input int unsigned dx, input int unsigned dy);
    int unsigned h, d;
    h = ring_idx(x, y);
    d = ring_idx(dx, dy);
    if (h == d) return P_L;
    if (d > h) begin   // forward along the serpentine
      if (y % 2 == 0) return (x == GRID_C - 1) ? P_S : P_E;
      else            return (x == 0) ? P_S : P_W;
    end else begin     // backward
      if (y % 2 == 0) return (x == 0) ? P_N : P_W;
      else            return (x == GRID_C - 1) ? P_N : P_E;
    end
  endfunction

  // Diagonal mode: only along the anti-diagonal through the tile. A destination off that
  // diagonal has no route; NPORT marks it.
  function automatic int unsigned route_diag(input int unsigned x, input int unsigned y,
                                             input int unsigned dx, input int unsigned dy);
    if (dx == x && dy == y) return P_L;
    if (dx > x && (dx - x) == (y - dy) && dy < y) return P_NE;
    if (dx < x && (x - dx) == (dy - y) && dy > y) return P_SW;
    return NPORT;
  endfunction

  function automatic int unsigned route_fn(input noc_mode_e m, input int unsigned x,
                                           input int unsigned y, input int unsigned dx,
                                           input int unsigned dy);
    case (m)
      MODE_RING: return route_ring(x, y, dx, dy);
      MODE_DIAG: return route_diag(x, y, dx, dy);
      default:   return route_min(x, y, dx, dy);
    endcase
  endfunction

  // Coordinates one hop away through port p.
  function automatic int nb_x(input int x, input int unsigned p);
    case (p)
      P_NE, P_E, P_SE: return x + 1;
      P_SW, P_W, P_NW: return x - 1;
      default:         return x;
    endcase
  endfunction
  function automatic int nb_y(input int y, input int unsigned p);
    case (p)
      P_N, P_NE, P_NW: return y - 1;
      P_SE, P_S, P_SW: return y + 1;
      default:         return y;
    endcase
  endfunction
  function automatic int unsigned opposite(input int unsigned p);
    return (p == P_L) ? P_L : (p + 4) % 8;
  endfunction

  // Ports a router at (x, y) enables in star mode: the ports on some minimal route between
  // the CT and a PT that passes through (x, y).
  function automatic logic [NPORT-1:0] star_ports(input int unsigned x, input int unsigned y);
    logic [NPORT-1:0] m;
    int cx, cy, px, py, p;
    m = '0;
    for (int k = 0; k < NT; k++) begin
      for (int dir = 0; dir < 2; dir++) begin
        if (dir == 0) begin cx = CT_X; cy = CT_Y; px = pos_x(pt_pos(k)); py = pos_y(pt_pos(k)); end
        else          begin px = CT_X; py = CT_Y; cx = pos_x(pt_pos(k)); cy = pos_y(pt_pos(k)); end
        for (int hop = 0; hop < GRID_R + GRID_C; hop++) begin
          p = route_min(cx, cy, px, py);
          if (cx == x && cy == y) m[p] = 1'b1;
          if (p != P_L) begin
            if (nb_x(cx, p) == x && nb_y(cy, p) == y) m[opposite(p)] = 1'b1;
            cx = nb_x(cx, p); cy = nb_y(cy, p);
          end
        end
      end
    end
    return m;
  endfunction

  // Ports that exist at (x, y): links to neighbours inside the grid, and the local port.
  function automatic logic [NPORT-1:0] grid_ports(input int unsigned x, input int unsigned y);
    logic [NPORT-1:0] m;
    m = '0;
    m[P_L] = 1'b1;
    for (int p = 0; p < 8; p++)
      if (nb_x(x, p) >= 0 && nb_x(x, p) < GRID_C && nb_y(y, p) >= 0 && nb_y(y, p) < GRID_R)
        m[p] = 1'b1;
    return m;
  endfunction

  // Ports enabled by the on/off switches of the router at (x, y) in mode m.
  function automatic logic [NPORT-1:0] mode_ports(input noc_mode_e m, input int unsigned x,
                                                  input int unsigned y);
    logic [NPORT-1:0] e;
    e = '0;
    e[P_L] = 1'b1;
    case (m)
      MODE_STAR: e = star_ports(x, y);
      MODE_RING: begin
        e[P_E] = 1'b1; e[P_W] = 1'b1;
        if (x == 0 || x == GRID_C - 1) begin e[P_N] = 1'b1; e[P_S] = 1'b1; end
      end
      MODE_DIAG: begin e[P_NE] = 1'b1; e[P_SW] = 1'b1; end
      default:   e = '1;
    endcase
    e[P_L] = 1'b1;
    return e & grid_ports(x, y);
  endfunction

endpackage
