// controller_tile: the controller tile (CT) of HiMA.
//
// The CT sits between the neural network (the LSTM, outside this design) and the processing
// tiles (PTs). It contains the interface logic, the global usage buffers and the parallel
// merge sorter of the two-stage usage sort, the read-vector merge of the distributed model,
// and it sets the NoC mode. Operations (op_valid/op, accepted when op_ready is high):
//
//   OP_SORT       usage sort, stage 2. Star mode. CMD_SORT is sent to every PT; the n
//                 locally sorted usage entries of each PT are collected into bank src of the
//                 usage buffers; then the merge sorter takes the Nt smallest entries per step
//                 and entry s of step t (global rank t*Nt + s) is written back to PT s at
//                 slot t (MSG_USAGE_GLB). sort_done pulses at the end.
//   OP_READ_D     DNC-D read of head h: star mode, CMD_READ_D to every PT, the Nt local read
//                 vectors are merged as sum_i alpha_i v_i; rv/rv_valid give the result.
//   OP_READ_RING  DNC read of head h: ring mode, CMD_READ_RING to every PT; the last PT on
//                 the ring delivers sum_i M_i^T w_i, given on rv/rv_valid.
//   OP_SIM        content similarity: star mode, CMD_SIM to every PT; the N scores come back
//                 as MSG_SIM flits and are passed to the host port.
//
// While idle, the host port injects flits (h_valid/h_flit/h_ready) in the mode given by
// host_mode; with h_bcast the flit is copied to every PT (interface-vector broadcast). Flits
// that reach the CT and belong to no operation (read responses, similarity scores) leave on
// r_valid/r_flit. The host must let its own traffic drain before starting an operation,
// since the CT switches the NoC mode at the start of each operation.
//
// The CT injects at most one flit per cycle into its router, so the write-back after each
// merge step takes Nt cycles; the merge sorter waits for it. The operation set and this
// sequencing are this design's choices; the units follow the published CT.
module controller_tile
  import hima_pkg::*;
#(
  parameter int unsigned NL = NLOC,
  parameter int unsigned W  = WMEM,
  parameter int unsigned N  = NMEM,
  parameter int unsigned R  = RHEADS
) (
  input  logic      clk,
  input  logic      rst_n,
  // operations
  input  logic      op_valid,
  input  cmd_e      op,
  input  logic [$clog2(R)-1:0] op_head,
  output logic      op_ready,
  input  word_t     alpha [NT],
  output logic      rv_valid,
  output word_t     rv [W],
  output logic      sort_done,
  // host flits
  input  logic      h_valid,
  input  flit_t     h_flit,
  input  logic      h_bcast,
  output logic      h_ready,
  input  noc_mode_e host_mode,
  output logic      r_valid,
  output flit_t     r_flit,
  // NoC
  output noc_mode_e noc_mode,
  input  logic      rx_valid,
  input  flit_t     rx_flit,
  output logic      rx_ready,
  output logic      tx_valid,
  output flit_t     tx_flit,
  input  logic      tx_ready
);
  localparam int unsigned LT  = $clog2(NT);
  localparam int unsigned LA  = $clog2(NL);
  localparam int unsigned LN  = $clog2(N);
  localparam int unsigned LWW = $clog2(W);
  localparam int unsigned CW  = $clog2(NT * NL) + 1;

  typedef enum logic [3:0] {
    C_IDLE, C_HBCAST, C_CMD, C_COLLECT, C_MERGE, C_WRITEBACK, C_READ_D, C_RD_DONE, C_READ_RING, C_SIM
  } cstate_e;

  cstate_e   state;
  cmd_e      cur_op;
  logic [$clog2(R)-1:0] cur_head;
  noc_mode_e op_mode;
  logic [LT:0] bc;               // broadcast counter
  logic [CW-1:0] rcnt;           // words received
  logic [LA:0] step;             // merge step
  flit_t     hb_flit;

  // ---------------------------------------------------------------- usage buffers + PMS
  logic  ub_we, ub_clear, ub_adv_en, ub_empty;
  elem_t win [NT][NT];
  logic  win_valid [NT][NT];
  logic [LT:0] adv [NT];
  elem_t pms_out [NT];
  logic  pms_out_valid [NT];

  usage_buffers #(.NB(NT), .DEPTH(NL)) u_ub (
    .clk(clk), .rst_n(rst_n), .wr_en(ub_we), .wr_bank(rx_flit.src[LT-1:0]),
    .wr_slot(rx_flit.addr[15:LN]), .wr_elem('{key: rx_flit.data, tag: TAGW'(rx_flit.addr[LN-1:0])}),
    .clear_ptrs(ub_clear), .adv_en(ub_adv_en), .adv(adv), .win(win), .win_valid(win_valid),
    .empty(ub_empty)
  );

  pms #(.NB(NT)) u_pms (
    .clk(clk), .rst_n(rst_n), .en(ub_adv_en), .win(win), .win_valid(win_valid), .adv(adv),
    .out(pms_out), .out_valid(pms_out_valid)
  );

  // ---------------------------------------------------------------- read-vector merge
  logic  rm_clear, rm_valid;
  word_t rm_acc [W];
  rdvec_merge #(.NB(NT), .W(W)) u_rm (
    .clk(clk), .rst_n(rst_n), .clear(rm_clear), .alpha(alpha), .in_valid(rm_valid),
    .in_tile(rx_flit.src[LT-1:0]), .in_col(rx_flit.addr[LWW-1:0]), .in_data(rx_flit.data),
    .acc(rm_acc)
  );

  // ---------------------------------------------------------------- receive side
  logic rx_take;
  assign rx_ready = 1'b1;                 // the CT always sinks what reaches it
  assign rx_take  = rx_valid;
  assign ub_we    = rx_take && rx_flit.msg == MSG_USAGE_LOC;
  assign rm_valid = rx_take && rx_flit.msg == MSG_RDVEC;
  assign r_valid  = rx_take && (rx_flit.msg == MSG_RD_RSP || rx_flit.msg == MSG_SIM);
  assign r_flit   = rx_flit;

  assign ub_clear  = (state == C_CMD);
  assign ub_adv_en = (state == C_MERGE);
  assign rm_clear  = (state == C_CMD);

  assign op_ready = (state == C_IDLE) && !tx_valid;
  assign h_ready  = (state == C_IDLE) && (!tx_valid || tx_ready);
  assign noc_mode = (state == C_IDLE || state == C_HBCAST) ? host_mode : op_mode;

  function automatic flit_t to_pt(input int unsigned k, input msg_e m,
                                  input logic [15:0] a, input word_t d);
    flit_t f;
    f.dst_x = 3'(pos_x(pt_pos(k)));
    f.dst_y = 2'(pos_y(pt_pos(k)));
    f.src   = 5'(NT);
    f.msg   = m;
    f.addr  = a;
    f.data  = d;
    return f;
  endfunction

  flit_t pt_flit [NT];   // per-PT copy of a broadcast flit
  always_comb begin
    for (int unsigned k = 0; k < NT; k++) begin
      pt_flit[k] = hb_flit;
      pt_flit[k].dst_x = 3'(pos_x(pt_pos(k)));
      pt_flit[k].dst_y = 2'(pos_y(pt_pos(k)));
    end
  end

  logic tx_free;
  assign tx_free = !tx_valid || tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      cur_op    <= CMD_SORT;
      cur_head  <= '0;
      op_mode   <= MODE_STAR;
      bc        <= '0;
      rcnt      <= '0;
      step      <= '0;
      hb_flit   <= '0;
      tx_valid  <= 1'b0;
      tx_flit   <= '0;
      rv_valid  <= 1'b0;
      sort_done <= 1'b0;
      for (int unsigned c = 0; c < W; c++) rv[c] <= '0;
    end else begin
      rv_valid  <= 1'b0;
      sort_done <= 1'b0;
      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      unique case (state)
        C_IDLE: begin
          bc   <= '0;
          rcnt <= '0;
          step <= '0;
          if (op_valid && op_ready) begin
            cur_op   <= op;
            cur_head <= op_head;
            op_mode  <= (op == CMD_READ_RING) ? MODE_RING : MODE_STAR;
            state    <= C_CMD;
          end else if (h_valid && h_ready) begin
            if (h_bcast) begin
              hb_flit <= h_flit;
              state   <= C_HBCAST;
            end else begin
              tx_valid <= 1'b1;
              tx_flit  <= h_flit;
            end
          end
        end
        C_HBCAST: if (tx_free) begin
          tx_valid <= 1'b1;
          tx_flit  <= pt_flit[bc[LT-1:0]];
          bc <= bc + 1'b1;
          if (bc == (LT+1)'(NT - 1)) state <= C_IDLE;
        end
        C_CMD: if (tx_free) begin   // send the kernel command to every PT
          tx_valid <= 1'b1;
          tx_flit  <= to_pt(int'(bc[LT-1:0]), MSG_CMD, 16'h0,
                            word_t'({cur_head, 4'(cur_op)}));
          bc <= bc + 1'b1;
          if (bc == (LT+1)'(NT - 1)) begin
            unique case (cur_op)
              CMD_SORT:      state <= C_COLLECT;
              CMD_READ_D:    state <= C_READ_D;
              CMD_READ_RING: state <= C_READ_RING;
              default:       state <= C_SIM;
            endcase
          end
        end
        C_COLLECT: begin
          if (ub_we) rcnt <= rcnt + 1'b1;
          if (ub_we && rcnt == CW'(NT * NL - 1)) state <= C_MERGE;
        end
        C_MERGE: begin         // one merge step: Nt outputs into the PMS output register
          bc    <= '0;
          state <= C_WRITEBACK;
        end
        C_WRITEBACK: if (tx_free) begin
          tx_valid <= 1'b1;
          tx_flit  <= to_pt(int'(bc[LT-1:0]), MSG_USAGE_GLB,
                            16'({step[LA-1:0], LN'(pms_out[bc[LT-1:0]].tag)}),
                            word_t'(pms_out[bc[LT-1:0]].key));
          bc <= bc + 1'b1;
          if (bc == (LT+1)'(NT - 1)) begin
            step <= step + 1'b1;
            if (ub_empty) begin
              state     <= C_IDLE;
              sort_done <= 1'b1;
            end else begin
              state <= C_MERGE;
            end
          end
        end
        C_READ_D: begin
          if (rm_valid) rcnt <= rcnt + 1'b1;
          if (rm_valid && rcnt == CW'(NT * W - 1)) state <= C_RD_DONE;
        end
        C_RD_DONE: begin       // the accumulators took the last word at the previous edge
          for (int unsigned c = 0; c < W; c++) rv[c] <= rm_acc[c];
          rv_valid <= 1'b1;
          state    <= C_IDLE;
        end
        C_READ_RING: begin
          if (rx_take && rx_flit.msg == MSG_PSUM) begin
            rv[rx_flit.addr[LWW-1:0]] <= rx_flit.data;
            rcnt <= rcnt + 1'b1;
            if (rcnt == CW'(W - 1)) begin
              state    <= C_IDLE;
              rv_valid <= 1'b1;
            end
          end
        end
        C_SIM: begin
          if (rx_take && rx_flit.msg == MSG_SIM) begin
            rcnt <= rcnt + 1'b1;
            if (rcnt == CW'(NT * NL - 1)) state <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // every merge step yields Nt entries (all banks hold n entries, Nt*n = N)
  assert property (@(posedge clk) disable iff (!rst_n)
    state == C_MERGE |=> pms_out_valid[NT-1]);
endmodule
