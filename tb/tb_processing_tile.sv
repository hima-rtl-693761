// tb_processing_tile: processing tile 5 (grid position (5,0); on the ring it follows
// tile 4 and precedes tile 10) driven through its NoC port. It loads the external memory,
// usage, read weighting of head 1 and the key with write flits, then checks:
//   read requests -> responses with the stored words;
//   CMD_SORT       -> 64 MSG_USAGE_LOC flits to the CT, ascending, tagged 5*64 + row;
//   CMD_READ_D     -> 64 MSG_RDVEC flits equal to M^T w (Q16.16, products truncated);
//   CMD_READ_RING  -> after 64 MSG_PSUM words from the previous tile, 64 MSG_PSUM flits to
//                     tile 10 equal to the partial sum plus M^T w;
//   CMD_SIM        -> 64 MSG_SIM flits equal to M[r,.] . k;
//   MSG_USAGE_GLB  -> stored in the sorted-usage memories (read back).
module tb_processing_tile;
  import hima_pkg::*;
  localparam int ID = 5, NL = 64, W = 64;
  logic clk = 0, rst_n = 0;
  logic  rx_valid = 0, rx_ready, tx_valid, tx_ready;
  flit_t rx_flit, tx_flit;
  int checks = 0, failures = 0;
  word_t M [NL][W], wv [NL], key [W], usage [NL], ps [W];
  flit_t got [$];
  always #5 clk = ~clk;

  processing_tile #(.ID(ID)) dut (.clk(clk), .rst_n(rst_n), .rx_valid(rx_valid), .rx_flit(rx_flit),
    .rx_ready(rx_ready), .tx_valid(tx_valid), .tx_flit(tx_flit), .tx_ready(tx_ready));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) tx_ready = ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) got.push_back(tx_flit);

  function automatic word_t qmul(word_t p, word_t q);
    return word_t'((longint'(p) * longint'(q)) >>> 16);
  endfunction

  task automatic put(msg_e m, int a, word_t d);
    @(negedge clk);
    rx_valid = 1;
    rx_flit = '0; rx_flit.dst_x = 3'(pos_x(pt_pos(ID))); rx_flit.dst_y = 2'(pos_y(pt_pos(ID)));
    rx_flit.src = 5'(NT); rx_flit.msg = m; rx_flit.addr = 16'(a); rx_flit.data = d;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk) rx_valid = 0;
  endtask

  task automatic wait_n(int n);
    int t;
    t = 0;
    while (got.size() < n && t < 5000) begin @(posedge clk); t++; end
    checks++;
    if (got.size() != n) begin failures++; $display("FAIL expected %0d flits, got %0d", n, got.size()); end
  endtask

  initial begin
    word_t e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NL; r++) begin
      wv[r] = word_t'($urandom_range(0, 65536));
      usage[r] = word_t'($urandom_range(0, 65536));
      for (int c = 0; c < W; c++) begin
        M[r][c] = word_t'($signed($urandom_range(0, 32'h0004_0000)) - 32'sh0002_0000);
        put(MSG_WR_EXT, r * W + c, M[r][c]);
      end
      put(MSG_WR_RDW, 1 * NL + r, wv[r]);
      put(MSG_WR_USAGE, r, usage[r]);
    end
    for (int c = 0; c < W; c++) begin
      key[c] = word_t'($signed($urandom_range(0, 32'h0002_0000)) - 32'sh0001_0000);
      put(MSG_WR_KEY, c, key[c]);
      ps[c] = word_t'($urandom);
    end
    // read requests
    got.delete();
    put(MSG_RD_REQ, 7 * W + 9, word_t'(SEL_EXT));
    put(MSG_RD_REQ, 33, word_t'(SEL_USAGE));
    wait_n(2);
    checks += 2;
    if (got[0].msg != MSG_RD_RSP || got[0].data !== M[7][9]) begin failures++; $display("FAIL rd ext"); end
    if (got[1].data !== usage[33] || got[1].dst_x != 3'(CT_X) || got[1].dst_y != 2'(CT_Y)) begin failures++; $display("FAIL rd usage"); end
    // local usage sort
    got.delete();
    put(MSG_CMD, 0, word_t'(CMD_SORT));
    wait_n(NL);
    for (int i = 0; i < NL; i++) begin
      int tg;
      tg = int'(got[i].addr[9:0]);
      checks++;
      if (got[i].msg != MSG_USAGE_LOC || int'(got[i].addr[15:10]) != i || tg / NL != ID ||
          got[i].data !== usage[tg % NL] || (i > 0 && got[i].data < got[i-1].data)) begin
        failures++; $display("FAIL sort entry %0d", i);
      end
    end
    // DNC-D read, head 1
    got.delete();
    put(MSG_CMD, 0, word_t'({4'd1, 4'(CMD_READ_D)}));
    wait_n(W);
    for (int c = 0; c < W; c++) begin
      e = 0;
      for (int r = 0; r < NL; r++) e += qmul(M[r][c], wv[r]);
      checks++;
      if (got[c].msg != MSG_RDVEC || int'(got[c].addr) != c || got[c].data !== e) begin
        failures++; $display("FAIL read col %0d: %h vs %h", c, got[c].data, e);
      end
    end
    // ring read: partial sums from the previous tile arrive first
    got.delete();
    for (int c = 0; c < W; c++) put(MSG_PSUM, c, ps[c]);
    put(MSG_CMD, 0, word_t'({4'd1, 4'(CMD_READ_RING)}));
    wait_n(W);
    for (int c = 0; c < W; c++) begin
      e = ps[c];
      for (int r = 0; r < NL; r++) e += qmul(M[r][c], wv[r]);
      checks++;
      if (got[c].msg != MSG_PSUM || got[c].data !== e || int'(got[c].dst_x) != pos_x(pt_pos(10)) ||
          int'(got[c].dst_y) != pos_y(pt_pos(10))) begin
        failures++; $display("FAIL ring col %0d", c);
      end
    end
    // similarity
    got.delete();
    put(MSG_CMD, 0, word_t'(CMD_SIM));
    wait_n(NL);
    for (int r = 0; r < NL; r++) begin
      e = 0;
      for (int c = 0; c < W; c++) e += qmul(M[r][c], key[c]);
      checks++;
      if (got[r].msg != MSG_SIM || int'(got[r].addr) != ID * NL + r || got[r].data !== e) begin
        failures++; $display("FAIL sim row %0d", r);
      end
    end
    // globally sorted usage written back, then read
    got.delete();
    put(MSG_USAGE_GLB, {6'd3, 10'd777}, 32'h0000_1234);
    put(MSG_RD_REQ, 3, word_t'(SEL_SU));
    put(MSG_RD_REQ, 3, word_t'(SEL_SI));
    wait_n(2);
    checks++;
    if (got[0].data !== 32'h1234 || got[1].data !== 32'd777) begin failures++; $display("FAIL sorted write-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
