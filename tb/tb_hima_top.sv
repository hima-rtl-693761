// tb_hima_top: end-to-end test of the whole engine at its default size (16 PTs, 1024 x 64
// memory, 3 x 6 NoC). The test bench plays the neural-network side:
//   1. full mode: writes the external memory of every tile, the read weighting of head 0,
//      the usage vector, and broadcasts the key k (interface-vector traffic);
//   2. diagonal mode: reads two words back from the tiles on the CT's anti-diagonal;
//   3. OP_SORT (star mode): two-stage usage sort; then, in full mode, reads every tile's
//      sorted usage and row index back and checks them against the sorted usage vector;
//   4. OP_READ_D (star mode): v = sum_i alpha_i M_i^T w_i;
//   5. OP_READ_RING (ring mode): v = M^T w accumulated tile to tile;
//   6. OP_SIM (star mode): the 1024 similarity scores M[i,.] . k.
// Every result is compared with a model computed here. It also counts how often each
// mechanism happened (each NoC mode, feed-through, stall, broadcast, each operation) and
// counts a failure for any that never did.
module tb_hima_top;
  import hima_pkg::*;
  localparam int NL = NLOC, W = WMEM, N = NMEM;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready, rv_valid, sort_done, h_valid = 0, h_bcast = 0, h_ready, r_valid;
  cmd_e op = CMD_SORT;
  logic [1:0] op_head = 0;
  word_t alpha [NT], rv [W];
  flit_t h_flit, r_flit;
  noc_mode_e host_mode = MODE_FULL, noc_mode;
  logic [NPOS-1:0] bypass_evt, stall_evt;
  int checks = 0, failures = 0;
  int n_bypass = 0, n_stall = 0, n_rv = 0, n_done = 0;
  int mode_cycles [4];
  flit_t resp [$];
  always #5 clk = ~clk;

  hima_top dut (.clk(clk), .rst_n(rst_n), .op_valid(op_valid), .op(op), .op_head(op_head),
    .op_ready(op_ready), .alpha(alpha), .rv_valid(rv_valid), .rv(rv), .sort_done(sort_done),
    .h_valid(h_valid), .h_flit(h_flit), .h_bcast(h_bcast), .h_ready(h_ready),
    .host_mode(host_mode), .r_valid(r_valid), .r_flit(r_flit), .noc_mode(noc_mode),
    .bypass_evt(bypass_evt), .stall_evt(stall_evt));

  word_t M [N][W];     // global memory, row i lives in PT i / n
  word_t wv [N], usage [N], key [W];

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    n_bypass += $countones(bypass_evt);
    n_stall  += $countones(stall_evt);
    n_rv     += rv_valid;
    n_done   += sort_done;
    mode_cycles[int'(noc_mode)]++;
    if (r_valid) resp.push_back(r_flit);
  end

  function automatic word_t qmul(word_t p, word_t q);
    return word_t'((longint'(p) * longint'(q)) >>> 16);
  endfunction

  task automatic host(int pt, msg_e m, int a, word_t d, bit bcast);
    @(negedge clk);
    h_valid = 1; h_bcast = bcast;
    h_flit = '0;
    h_flit.dst_x = 3'(pos_x(pt_pos(pt))); h_flit.dst_y = 2'(pos_y(pt_pos(pt)));
    h_flit.src = 5'(NT); h_flit.msg = m; h_flit.addr = 16'(a); h_flit.data = d;
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk) begin h_valid = 0; h_bcast = 0; end
  endtask

  task automatic start_op(cmd_e o, int hd);
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    op_valid = 1; op = o; op_head = 2'(hd);
    @(negedge clk) op_valid = 0;
  endtask

  task automatic wait_resp(int n);
    int t;
    t = 0;
    while (resp.size() < n && t < 20000) begin @(posedge clk); t++; end
    checks++;
    if (resp.size() != n) begin failures++; $display("FAIL expected %0d responses, got %0d", n, resp.size()); end
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    word_t e;
    int t0;
    int order [N];
    logic [31:0] su [N];
    int si [N];
    bit  got_su [N], got_si [N];
    for (int i = 0; i < N; i++) begin
      wv[i] = word_t'($urandom_range(0, 8192));
      usage[i] = word_t'($urandom_range(0, 65536));
      for (int c = 0; c < W; c++) M[i][c] = word_t'($signed($urandom_range(0, 32'h0004_0000)) - 32'sh0002_0000);
    end
    for (int c = 0; c < W; c++) key[c] = word_t'($signed($urandom_range(0, 32'h0002_0000)) - 32'sh0001_0000);
    for (int k = 0; k < NT; k++) alpha[k] = word_t'($urandom_range(0, 65536));
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. load, full mode
    host_mode = MODE_FULL;
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < W; c++) host(i / NL, MSG_WR_EXT, (i % NL) * W + c, M[i][c], 0);
      host(i / NL, MSG_WR_RDW, i % NL, wv[i], 0);
      host(i / NL, MSG_WR_USAGE, i % NL, usage[i], 0);
    end
    for (int c = 0; c < W; c++) host(0, MSG_WR_KEY, c, key[c], 1);
    idle(40);
    $display("loaded at cycle %0t", $time / 10);

    // 2. diagonal mode: tiles 3 (3,0) and 12 (1,2) share the CT's anti-diagonal
    host_mode = MODE_DIAG;
    idle(2);
    resp.delete();
    host(3, MSG_RD_REQ, 5 * W + 6, word_t'(SEL_EXT), 0);
    host(12, MSG_RD_REQ, 9, word_t'(SEL_USAGE), 0);
    wait_resp(2);
    checks += 2;
    if (resp[0].data !== M[3 * NL + 5][6]) begin failures++; $display("FAIL diagonal read 0"); end
    if (resp[1].data !== usage[12 * NL + 9]) begin failures++; $display("FAIL diagonal read 1"); end
    idle(10);
    host_mode = MODE_FULL;

    // 3. two-stage usage sort
    t0 = int'($time / 10);
    start_op(CMD_SORT, 0);
    while (n_done == 0) @(posedge clk);
    $display("usage sort took %0d cycles", int'($time / 10) - t0);
    idle(40);
    for (int i = 0; i < N; i++) order[i] = i;
    // reference: stable sort of (usage, row)
    for (int i = 1; i < N; i++) begin
      int j, v;
      v = order[i]; j = i - 1;
      while (j >= 0 && (usage[order[j]] > usage[v] || (usage[order[j]] == usage[v] && order[j] > v))) begin
        order[j + 1] = order[j]; j--;
      end
      order[j + 1] = v;
    end
    resp.delete();
    for (int k = 0; k < NT; k++)
      for (int s = 0; s < NL; s++) begin
        host(k, MSG_RD_REQ, s, word_t'(SEL_SU), 0);
        host(k, MSG_RD_REQ, s, word_t'(SEL_SI), 0);
      end
    wait_resp(2 * N);
    for (int i = 0; i < N; i++) begin got_su[i] = 0; got_si[i] = 0; end
    for (int q = 0; q < 2 * N; q++) begin
      int r;
      // responses of one tile keep their order: SU then SI for each slot
      r = int'(resp[q].addr) * NT + int'(resp[q].src);
      if (!got_su[r]) begin su[r] = resp[q].data; got_su[r] = 1; end
      else begin si[r] = int'(resp[q].data); got_si[r] = 1; end
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (!got_si[r] || su[r] !== usage[order[r]] || usage[si[r]] !== su[r]) begin
        failures++;
        if (failures < 10) $display("FAIL rank %0d: su %h si %0d expected %h (row %0d)", r, su[r], si[r], usage[order[r]], order[r]);
      end
    end
    idle(20);

    // 4. DNC-D read
    t0 = int'($time / 10);
    start_op(CMD_READ_D, 0);
    while (n_rv == 0) @(posedge clk);
    $display("DNC-D read took %0d cycles", int'($time / 10) - t0);
    for (int c = 0; c < W; c++) begin
      e = 0;
      for (int k = 0; k < NT; k++) begin
        word_t vi;
        vi = 0;
        for (int r = 0; r < NL; r++) vi += qmul(M[k * NL + r][c], wv[k * NL + r]);
        e += qmul(alpha[k], vi);
      end
      checks++;
      if (rv[c] !== e) begin failures++; $display("FAIL DNC-D col %0d: %h vs %h", c, rv[c], e); end
    end
    idle(20);

    // 5. ring read
    t0 = int'($time / 10);
    start_op(CMD_READ_RING, 0);
    while (n_rv == 1) @(posedge clk);
    $display("ring read took %0d cycles", int'($time / 10) - t0);
    for (int c = 0; c < W; c++) begin
      e = 0;
      for (int i = 0; i < N; i++) e += qmul(M[i][c], wv[i]);
      checks++;
      if (rv[c] !== e) begin failures++; $display("FAIL ring col %0d: %h vs %h", c, rv[c], e); end
    end
    idle(20);

    // 6. similarity
    resp.delete();
    start_op(CMD_SIM, 0);
    wait_resp(N);
    for (int q = 0; q < N; q++) begin
      int i;
      i = int'(resp[q].addr);
      e = 0;
      for (int c = 0; c < W; c++) e += qmul(M[i][c], key[c]);
      checks++;
      if (resp[q].msg != MSG_SIM || resp[q].data !== e) begin failures++; if (failures < 10) $display("FAIL sim row %0d", i); end
    end

    // mechanisms
    $display("cycles per mode: star %0d ring %0d diagonal %0d full %0d", mode_cycles[0], mode_cycles[1],
             mode_cycles[2], mode_cycles[3]);
    $display("feed-through events %0d, stall events %0d, sorts %0d, read vectors %0d",
             n_bypass, n_stall, n_done, n_rv);
    for (int m = 0; m < 4; m++) begin checks++; if (mode_cycles[m] == 0) begin failures++; $display("FAIL mode %0d unused", m); end end
    checks++; if (n_bypass == 0) begin failures++; $display("FAIL no feed-through"); end
    checks++; if (n_stall == 0)  begin failures++; $display("FAIL no stall"); end
    checks++; if (n_done != 1)   begin failures++; $display("FAIL sort count"); end
    checks++; if (n_rv != 2)     begin failures++; $display("FAIL read count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
