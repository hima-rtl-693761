// tb_hima_noc: the full 3 x 6 network. For each mode it injects random traffic of the kind
// the mode is meant for, with random back-pressure at the local outputs, and checks that
// every flit arrives once, at its destination, in order per source-destination pair:
//   star: every PT to the CT and the CT to every PT; ring: between random positions along
//   the serpentine; diagonal: between positions on a common anti-diagonal; full: random
//   all-to-all. It also counts feed-through and stall events.
module tb_hima_noc;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  noc_mode_e mode;
  logic  lin_valid [NPOS], lin_ready [NPOS], lout_valid [NPOS], lout_ready [NPOS];
  flit_t lin_flit [NPOS], lout_flit [NPOS];
  logic [NPOS-1:0] bypass_evt, stall_evt;
  int checks = 0, failures = 0, n_bypass = 0, n_stall = 0;
  flit_t txq [NPOS][$];
  int sent_cnt [NPOS][NPOS], recv_cnt [NPOS][NPOS];
  int total_sent, total_recv;
  always #5 clk = ~clk;

  hima_noc dut (.clk(clk), .rst_n(rst_n), .mode(mode), .lin_valid(lin_valid), .lin_flit(lin_flit),
    .lin_ready(lin_ready), .lout_valid(lout_valid), .lout_flit(lout_flit), .lout_ready(lout_ready),
    .bypass_evt(bypass_evt), .stall_evt(stall_evt));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // injection and ejection
  always @(posedge clk) if (rst_n) begin
    n_bypass += $countones(bypass_evt);
    n_stall  += $countones(stall_evt);
    for (int p = 0; p < NPOS; p++) begin
      if (lin_valid[p] && lin_ready[p]) void'(txq[p].pop_front());
      if (lout_valid[p] && lout_ready[p]) begin
        int s, q;
        s = int'(lout_flit[p].data[31:16]);
        q = int'(lout_flit[p].data[15:0]);
        checks++;
        if (int'(lout_flit[p].dst_y) * GRID_C + int'(lout_flit[p].dst_x) != p || q != recv_cnt[s][p]) begin
          failures++; $display("FAIL at %0d: from %0d seq %0d expected seq %0d", p, s, q, recv_cnt[s][p]);
        end
        recv_cnt[s][p]++;
        total_recv++;
      end
    end
  end
  always @(negedge clk) begin
    for (int p = 0; p < NPOS; p++) begin
      lin_valid[p] = rst_n && txq[p].size() > 0;
      lin_flit[p]  = (txq[p].size() > 0) ? txq[p][0] : '0;
      lout_ready[p] = ($urandom_range(0, 3) != 0);
    end
  end

  task automatic send(int s, int d);
    flit_t f;
    f = '0;
    f.dst_x = 3'(pos_x(d)); f.dst_y = 2'(pos_y(d));
    f.data = {16'(s), 16'(sent_cnt[s][d])};
    sent_cnt[s][d]++;
    total_sent++;
    txq[s].push_back(f);
  endtask

  task automatic drain();
    int t;
    t = 0;
    while (total_recv < total_sent && t < 20000) begin @(posedge clk); t++; end
    repeat (5) @(posedge clk);
    checks++;
    if (total_recv != total_sent) begin failures++; $display("FAIL mode %s: %0d of %0d arrived", mode.name(), total_recv, total_sent); end
  endtask

  initial begin
    for (int s = 0; s < NPOS; s++) for (int d = 0; d < NPOS; d++) begin sent_cnt[s][d] = 0; recv_cnt[s][d] = 0; end
    total_sent = 0; total_recv = 0;
    mode = MODE_STAR;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // star: PT <-> CT
    for (int r = 0; r < 20; r++)
      for (int k = 0; k < NT; k++) begin send(pt_pos(k), CT_POS); send(CT_POS, pt_pos(k)); end
    drain();
    // ring
    mode = MODE_RING;
    for (int r = 0; r < 150; r++) send($urandom_range(0, NPOS - 1), $urandom_range(0, NPOS - 1));
    drain();
    // diagonal: same anti-diagonal (x + y equal)
    mode = MODE_DIAG;
    for (int r = 0; r < 150; r++) begin
      int s, d;
      s = $urandom_range(0, NPOS - 1);
      d = $urandom_range(0, NPOS - 1);
      if (pos_x(s) + pos_y(s) == pos_x(d) + pos_y(d)) send(s, d);
    end
    drain();
    // full
    mode = MODE_FULL;
    for (int r = 0; r < 400; r++) send($urandom_range(0, NPOS - 1), $urandom_range(0, NPOS - 1));
    drain();
    checks++; if (n_bypass == 0 || n_stall == 0) failures++;
    $display("flits %0d, feed-through events %0d, stall events %0d", total_sent, n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
