// tb_controller_tile: the controller tile with the test bench standing in for the network
// and the 16 processing tiles. It checks:
//   host broadcast  -> one copy of the flit to each PT position;
//   OP_SORT         -> a command to each PT in star mode; after 16 x 64 locally sorted
//                      entries come in, 1024 MSG_USAGE_GLB flits leave: entry s of merge step
//                      t goes to PT s, slot t, and the ranks t*16+s form the sorted list;
//                      sort_done pulses;
//   OP_READ_D       -> rv = sum_i alpha_i v_i over 16 x 64 incoming MSG_RDVEC words;
//   OP_READ_RING    -> ring mode during the operation, rv = the 64 incoming MSG_PSUM words;
//   read responses  -> passed to the host port.
module tb_controller_tile;
  import hima_pkg::*;
  localparam int NL = 64, W = 64;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready, rv_valid, sort_done, h_valid = 0, h_bcast = 0, h_ready, r_valid;
  cmd_e op;
  logic [1:0] op_head = 0;
  word_t alpha [NT], rv [W];
  flit_t h_flit, r_flit, rx_flit, tx_flit;
  noc_mode_e host_mode = MODE_FULL, noc_mode;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready;
  int checks = 0, failures = 0, n_done = 0, n_rv = 0, n_r = 0;
  flit_t got [$];
  noc_mode_e mode_seen [$];
  always #5 clk = ~clk;

  controller_tile dut (.clk(clk), .rst_n(rst_n), .op_valid(op_valid), .op(op), .op_head(op_head),
    .op_ready(op_ready), .alpha(alpha), .rv_valid(rv_valid), .rv(rv), .sort_done(sort_done),
    .h_valid(h_valid), .h_flit(h_flit), .h_bcast(h_bcast), .h_ready(h_ready),
    .host_mode(host_mode), .r_valid(r_valid), .r_flit(r_flit), .noc_mode(noc_mode),
    .rx_valid(rx_valid), .rx_flit(rx_flit), .rx_ready(rx_ready),
    .tx_valid(tx_valid), .tx_flit(tx_flit), .tx_ready(tx_ready));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) tx_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin got.push_back(tx_flit); mode_seen.push_back(noc_mode); end
    n_done += sort_done;
    n_rv   += rv_valid;
    n_r    += r_valid;
  end

  function automatic word_t qmul(word_t p, word_t q);
    return word_t'((longint'(p) * longint'(q)) >>> 16);
  endfunction

  task automatic feed(int src, msg_e m, int a, word_t d);
    @(negedge clk);
    rx_valid = 1;
    rx_flit = '0; rx_flit.dst_x = 3'(CT_X); rx_flit.dst_y = 2'(CT_Y);
    rx_flit.src = 5'(src); rx_flit.msg = m; rx_flit.addr = 16'(a); rx_flit.data = d;
    @(negedge clk) rx_valid = 0;
  endtask

  task automatic start_op(cmd_e o);
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    op_valid = 1; op = o;
    @(negedge clk) op_valid = 0;
  endtask

  task automatic wait_n(int n);
    int t;
    t = 0;
    while (got.size() < n && t < 5000) begin @(posedge clk); t++; end
    checks++;
    if (got.size() != n) begin failures++; $display("FAIL expected %0d flits, got %0d", n, got.size()); end
  endtask

  initial begin
    logic [31:0] keys [NT][NL];
    logic [31:0] all_keys [$];
    word_t v [NT][W];
    longint e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // host broadcast
    @(negedge clk);
    h_valid = 1; h_bcast = 1; h_flit = '0; h_flit.msg = MSG_WR_KEY; h_flit.addr = 16'd7; h_flit.data = 32'd99;
    @(negedge clk); while (!h_ready) @(negedge clk);
    h_valid = 0; h_bcast = 0;
    wait_n(NT);
    for (int k = 0; k < NT; k++) begin
      checks++;
      if (int'(got[k].dst_x) != pos_x(pt_pos(k)) || int'(got[k].dst_y) != pos_y(pt_pos(k)) ||
          got[k].data !== 32'd99) begin failures++; $display("FAIL broadcast %0d", k); end
    end
    // usage sort
    got.delete(); mode_seen.delete();
    start_op(CMD_SORT);
    wait_n(NT);
    for (int k = 0; k < NT; k++) begin
      checks++;
      if (got[k].msg != MSG_CMD || got[k].data[3:0] != 4'(CMD_SORT) || mode_seen[k] != MODE_STAR) begin
        failures++; $display("FAIL sort command %0d", k);
      end
    end
    got.delete();
    for (int k = 0; k < NT; k++) begin
      for (int i = 0; i < NL; i++) keys[k][i] = $urandom_range(0, 5000);
      keys[k].sort();
      for (int i = 0; i < NL; i++) all_keys.push_back(keys[k][i]);
    end
    all_keys.sort();
    // interleave the tiles' streams as the network would
    for (int i = 0; i < NL; i++)
      for (int k = 0; k < NT; k++) feed(k, MSG_USAGE_LOC, {6'(i), 10'(k * NL + i)}, keys[k][i]);
    wait_n(NT * NL);
    for (int t = 0; t < NL; t++)
      for (int s = 0; s < NT; s++) begin
        flit_t f;
        int tg;
        f = got[t * NT + s];
        tg = int'(f.addr[9:0]);
        checks++;
        if (f.msg != MSG_USAGE_GLB || int'(f.dst_x) != pos_x(pt_pos(s)) || int'(f.dst_y) != pos_y(pt_pos(s)) ||
            int'(f.addr[15:10]) != t || f.data !== all_keys[t * NT + s] ||
            keys[tg / NL][tg % NL] !== f.data) begin
          failures++; $display("FAIL rank %0d", t * NT + s);
        end
      end
    repeat (3) @(posedge clk);
    checks++; if (n_done != 1) begin failures++; $display("FAIL sort_done %0d", n_done); end
    // DNC-D read
    for (int k = 0; k < NT; k++) begin
      alpha[k] = word_t'($urandom_range(0, 65536));
      for (int c = 0; c < W; c++) v[k][c] = word_t'($signed($urandom_range(0, 32'h0010_0000)) - 32'sh0008_0000);
    end
    got.delete();
    op_head = 2;
    start_op(CMD_READ_D);
    wait_n(NT);
    checks++; if (got[0].data[7:4] != 4'd2) begin failures++; $display("FAIL head"); end
    for (int c = 0; c < W; c++) for (int k = 0; k < NT; k++) feed(k, MSG_RDVEC, c, v[k][c]);
    repeat (3) @(posedge clk);
    checks++; if (n_rv != 1) begin failures++; $display("FAIL rv_valid count %0d", n_rv); end
    for (int c = 0; c < W; c++) begin
      word_t s;
      s = 0;
      for (int k = 0; k < NT; k++) s += qmul(alpha[k], v[k][c]);
      checks++;
      if (rv[c] !== s) begin failures++; $display("FAIL merged col %0d", c); end
    end
    // ring read
    got.delete(); mode_seen.delete();
    start_op(CMD_READ_RING);
    wait_n(NT);
    checks++; if (mode_seen[0] != MODE_RING) begin failures++; $display("FAIL ring mode"); end
    for (int c = W - 1; c >= 0; c--) feed(NT - 1, MSG_PSUM, c, v[3][c]);
    repeat (3) @(posedge clk);
    checks++; if (n_rv != 2) begin failures++; $display("FAIL ring rv_valid"); end
    for (int c = 0; c < W; c++) begin
      checks++; if (rv[c] !== v[3][c]) begin failures++; $display("FAIL ring col %0d", c); end
    end
    // a read response goes to the host port
    feed(4, MSG_RD_RSP, 12, 32'hABCD);
    checks++; if (n_r != 1 || r_flit.data !== 32'hABCD) begin failures++; $display("FAIL host response"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
