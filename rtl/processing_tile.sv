// processing_tile: one processing tile (PT) of HiMA.
//
// A PT owns n = N/Nt rows of the external memory and the matching state memories (pt_mem),
// a local usage sorter (mdsa_sorter), a matrix-matrix engine (mm_engine: NPE = W PEs and a
// processing tree) and the logic that talks to its router. It executes the kernels the
// controller tile (CT) starts with command flits:
//
//   CMD_SORT       stage 1 of the two-stage usage sort: the n usage words (tagged with their
//                  global row ID*n + i) are sorted in the MDSA sorter and sent to the CT in
//                  ascending order as MSG_USAGE_LOC flits, addr = {slot, global row}.
//   CMD_READ_D     DNC-D memory read of head h: v_i = M_i^T w_i over the local rows. Row r
//                  of M goes to operand a of the PEs, w[h][r] is broadcast on operand b and
//                  the PEs multiply-accumulate (PE_MAC), one row per cycle. The W words of
//                  v_i are sent to the CT as MSG_RDVEC.
//   CMD_READ_RING  DNC memory read over the ring: the same local product, plus the partial
//                  sum received from the previous PT on the ring (MSG_PSUM), is passed to the
//                  next PT; the last PT on the ring sends the total to the CT.
//   CMD_SIM        content-based similarity: for every local row, M[r,.] . k with PE_MUL and
//                  an all-add processing tree, sent to the CT as MSG_SIM (addr = global row).
//
// Besides, the tile accepts memory writes (MSG_WR_*, the interface vector words), answers
// read requests (MSG_RD_REQ -> MSG_RD_RSP to the CT), stores the key k (MSG_WR_KEY) and the
// globally sorted usage returned by the CT (MSG_USAGE_GLB -> su/si memories).
//
// The set of units follows the published PT; the command set, the message formats and the
// sequencing are this design's own (the paper gives no microcode), as is the use of the
// PE output register as the output buffer. Interface: one NoC local port in each direction
// with valid/ready; one flit leaves per cycle at most.
module processing_tile
  import hima_pkg::*;
#(
  parameter int unsigned ID = 0,
  parameter int unsigned NL = NLOC,
  parameter int unsigned W  = WMEM,
  parameter int unsigned N  = NMEM,
  parameter int unsigned R  = RHEADS
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the router (ejection)
  input  logic  rx_valid,
  input  flit_t rx_flit,
  output logic  rx_ready,
  // to the router (injection)
  output logic  tx_valid,
  output flit_t tx_flit,
  input  logic  tx_ready
);
  localparam int unsigned P   = 1 << ($clog2(NL) / 2);   // sorter RF is P x P = NL
  localparam int unsigned LA  = $clog2(NL);
  localparam int unsigned LWW = $clog2(W);
  localparam int unsigned LN  = $clog2(N);
  localparam int unsigned MA  = $clog2(NL * N);

  // ring neighbours (PT index, NT if none)
  function automatic int unsigned ring_next(input int unsigned me);
    int unsigned best, bi, mi, ri;
    best = NT;
    bi   = NPOS;
    mi   = ring_idx(pos_x(pt_pos(me)), pos_y(pt_pos(me)));
    for (int unsigned k = 0; k < NT; k++) begin
      ri = ring_idx(pos_x(pt_pos(k)), pos_y(pt_pos(k)));
      if (ri > mi && ri < bi) begin bi = ri; best = k; end
    end
    return best;
  endfunction
  function automatic bit ring_first(input int unsigned me);
    int unsigned mi;
    mi = ring_idx(pos_x(pt_pos(me)), pos_y(pt_pos(me)));
    for (int unsigned k = 0; k < NT; k++)
      if (ring_idx(pos_x(pt_pos(k)), pos_y(pt_pos(k))) < mi) return 1'b0;
    return 1'b1;
  endfunction
  localparam int unsigned NEXT  = ring_next(ID);
  localparam bit          FIRST = ring_first(ID);
  localparam int unsigned NEXT_POS = (NEXT < NT) ? pt_pos(NEXT) : CT_POS;

  typedef enum logic [3:0] {
    S_IDLE, S_SORT, S_SORT_SEND, S_READ, S_READ_WAIT, S_READ_SEND, S_SIM, S_SIM_SEND
  } state_e;

  state_e state;
  logic   ring_mode;
  logic [$clog2(R)-1:0] head;
  logic [LA:0]  cnt;          // row / entry counter
  logic [LWW:0] scnt;         // send counter over W words
  logic [LA:0]  sim_cnt;

  // ---------------------------------------------------------------- memories
  logic     m_we;
  mem_sel_e m_wsel;
  logic [MA-1:0] m_waddr;
  word_t    m_wdata;
  logic [TAGW-1:0] m_wtag;
  mem_sel_e m_rsel;
  word_t    m_rdata, rdw_data;
  word_t    row_data [W];
  word_t    usage_all [NL];

  pt_mem #(.NL(NL), .W(W), .N(N), .R(R)) u_mem (
    .clk(clk), .wr_en(m_we), .wr_sel(m_wsel), .wr_addr(m_waddr), .wr_data(m_wdata),
    .wr_tag(m_wtag), .rd_sel(m_rsel), .rd_addr(MA'(rx_flit.addr)), .rd_data(m_rdata),
    .row_addr(cnt[LA-1:0]), .row_data(row_data),
    .rdw_addr({head, cnt[LA-1:0]}), .rdw_data(rdw_data), .usage_all(usage_all)
  );

  // ---------------------------------------------------------------- sorter
  elem_t srt_din [NL];
  elem_t srt_rd;
  logic  srt_start, srt_busy, srt_done;
  for (genvar i = 0; i < NL; i++) begin : g_din
    assign srt_din[i] = '{key: usage_all[i], tag: TAGW'(ID * NL + i)};
  end
  mdsa_sorter #(.P(P)) u_sort (
    .clk(clk), .rst_n(rst_n), .start(srt_start), .din(srt_din), .busy(srt_busy),
    .done(srt_done), .rd_idx(cnt[LA-1:0]), .rd_data(srt_rd)
  );

  // ---------------------------------------------------------------- M-M engine
  word_t   key [W];
  word_t   ea [W], eb [W], pe_y [W], cpt_y;
  logic    e_valid, pe_valid, cpt_valid;
  pe_op_e  e_op;
  cpt_op_e lvl_op [$clog2(W)];
  for (genvar l = 0; l < $clog2(W); l++) begin : g_lvl
    assign lvl_op[l] = CPT_ADD;
  end
  always_comb begin
    for (int unsigned c = 0; c < W; c++) begin
      ea[c] = row_data[c];
      eb[c] = (state == S_SIM) ? key[c] : rdw_data;
    end
  end
  assign e_valid = (state == S_READ || state == S_SIM) && (cnt < (LA+1)'(NL));
  assign e_op    = (state == S_SIM) ? PE_MUL : ((cnt == '0) ? PE_MUL : PE_MAC);

  mm_engine #(.NPE(W), .RF_DEPTH(64)) u_mm (
    .clk(clk), .rst_n(rst_n), .in_valid(e_valid), .op(e_op), .a(ea), .b(eb),
    .ra('0), .rf_we(state == S_READ), .wa('0), .level_op(lvl_op),
    .pe_valid(pe_valid), .pe_y(pe_y), .cpt_valid(cpt_valid), .cpt_y(cpt_y)
  );

  word_t sim_buf [NL];

  // ---------------------------------------------------------------- partial sums (ring)
  word_t psum [W];
  logic [LWW:0] psum_cnt;

  // ---------------------------------------------------------------- receive side
  logic rx_is_cmd, rx_take;
  assign rx_is_cmd = (rx_flit.msg == MSG_CMD) || (rx_flit.msg == MSG_RD_REQ);
  assign rx_ready  = !rx_is_cmd || (state == S_IDLE && !tx_valid);
  assign rx_take   = rx_valid && rx_ready;

  always_comb begin
    m_we    = 1'b0;
    m_wsel  = SEL_EXT;
    m_waddr = MA'(rx_flit.addr);
    m_wdata = rx_flit.data;
    m_wtag  = '0;
    m_rsel  = mem_sel_e'(rx_flit.data[3:0]);
    if (rx_take) begin
      unique case (rx_flit.msg)
        MSG_WR_EXT:   begin m_we = 1'b1; m_wsel = SEL_EXT;   end
        MSG_WR_USAGE: begin m_we = 1'b1; m_wsel = SEL_USAGE; end
        MSG_WR_RDW:   begin m_we = 1'b1; m_wsel = SEL_RDW;   end
        MSG_WR_WRW:   begin m_we = 1'b1; m_wsel = SEL_WRW;   end
        MSG_WR_PREC:  begin m_we = 1'b1; m_wsel = SEL_PREC;  end
        MSG_WR_LINK:  begin m_we = 1'b1; m_wsel = SEL_LINK;  end
        MSG_USAGE_GLB: begin
          m_we    = 1'b1;
          m_wsel  = SEL_SU;
          m_waddr = MA'(rx_flit.addr[15:LN]);
          m_wtag  = TAGW'(rx_flit.addr[LN-1:0]);
        end
        default: ;
      endcase
    end
  end

  assign srt_start = (state == S_IDLE) && rx_take && rx_flit.msg == MSG_CMD &&
                     rx_flit.data[3:0] == CMD_SORT;

  function automatic flit_t mk(input int unsigned dpos, input msg_e m,
                               input logic [15:0] a, input word_t d);
    flit_t f;
    f.dst_x = 3'(pos_x(dpos));
    f.dst_y = 2'(pos_y(dpos));
    f.src   = 5'(ID);
    f.msg   = m;
    f.addr  = a;
    f.data  = d;
    return f;
  endfunction

  logic tx_free;
  assign tx_free = !tx_valid || tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ring_mode <= 1'b0;
      head      <= '0;
      cnt       <= '0;
      scnt      <= '0;
      sim_cnt   <= '0;
      tx_valid  <= 1'b0;
      tx_flit   <= '0;
      psum_cnt  <= '0;
    end else begin
      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      // words that may arrive in any state
      if (rx_take && rx_flit.msg == MSG_PSUM) begin
        psum[rx_flit.addr[LWW-1:0]] <= rx_flit.data;
        psum_cnt <= psum_cnt + 1'b1;
      end
      if (rx_take && rx_flit.msg == MSG_WR_KEY) key[rx_flit.addr[LWW-1:0]] <= rx_flit.data;

      unique case (state)
        S_IDLE: begin
          cnt  <= '0;
          scnt <= '0;
          if (rx_take && rx_flit.msg == MSG_RD_REQ) begin
            tx_valid <= 1'b1;
            tx_flit  <= mk(CT_POS, MSG_RD_RSP, rx_flit.addr, m_rdata);
          end else if (rx_take && rx_flit.msg == MSG_CMD) begin
            head <= rx_flit.data[4 +: $clog2(R)];
            unique case (rx_flit.data[3:0])
              CMD_SORT:      state <= S_SORT;
              CMD_READ_D:    begin state <= S_READ; ring_mode <= 1'b0; end
              CMD_READ_RING: begin state <= S_READ; ring_mode <= 1'b1; end
              CMD_SIM:       begin state <= S_SIM; sim_cnt <= '0; end
              default: ;
            endcase
          end
        end
        S_SORT: if (srt_done) state <= S_SORT_SEND;
        S_SORT_SEND: if (tx_free) begin
          tx_valid <= 1'b1;
          tx_flit  <= mk(CT_POS, MSG_USAGE_LOC,
                         16'({cnt[LA-1:0], LN'(srt_rd.tag)}), word_t'(srt_rd.key));
          cnt <= cnt + 1'b1;
          if (cnt == (LA+1)'(NL - 1)) state <= S_IDLE;
        end
        S_READ: begin
          cnt <= cnt + 1'b1;
          if (cnt == (LA+1)'(NL - 1)) state <= S_READ_WAIT;
        end
        S_READ_WAIT: begin
          // the engine's output register now holds v_i; in ring mode wait for the
          // partial sum of the previous tile
          if (!pe_valid && (!ring_mode || FIRST || psum_cnt == (LWW+1)'(W))) state <= S_READ_SEND;
        end
        S_READ_SEND: if (tx_free) begin
          tx_valid <= 1'b1;
          if (!ring_mode)
            tx_flit <= mk(CT_POS, MSG_RDVEC, 16'(scnt[LWW-1:0]), pe_y[scnt[LWW-1:0]]);
          else
            tx_flit <= mk(NEXT_POS, MSG_PSUM, 16'(scnt[LWW-1:0]),
                          pe_y[scnt[LWW-1:0]] + (FIRST ? word_t'(0) : psum[scnt[LWW-1:0]]));
          scnt <= scnt + 1'b1;
          if (scnt == (LWW+1)'(W - 1)) begin
            state    <= S_IDLE;
            psum_cnt <= '0;
          end
        end
        S_SIM: begin
          if (cnt < (LA+1)'(NL)) cnt <= cnt + 1'b1;
          if (cpt_valid) begin
            sim_buf[sim_cnt[LA-1:0]] <= cpt_y;
            sim_cnt <= sim_cnt + 1'b1;
            if (sim_cnt == (LA+1)'(NL - 1)) begin
              state <= S_SIM_SEND;
              cnt   <= '0;
            end
          end
        end
        S_SIM_SEND: if (tx_free) begin
          tx_valid <= 1'b1;
          tx_flit  <= mk(CT_POS, MSG_SIM, 16'(ID * NL + int'(cnt[LA-1:0])), sim_buf[cnt[LA-1:0]]);
          cnt <= cnt + 1'b1;
          if (cnt == (LA+1)'(NL - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) srt_busy |-> state == S_SORT);
endmodule
