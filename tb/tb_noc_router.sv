// tb_noc_router: the router at grid position (1,1) on its own. Checks, with expectations
// worked out by hand from the grid: the output port chosen for destinations in every
// direction (full mode); one-cycle feed-through when the input buffer is empty; buffering,
// stall and in-order release under back-pressure (two-cycle path); the on/off switches of
// ring mode (north input off, serpentine forward direction west on row 1) and of diagonal
// mode (only north-east / south-west).
module tb_noc_router;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  noc_mode_e mode = MODE_FULL;
  logic  in_valid [NPORT], in_ready [NPORT], out_valid [NPORT], out_ready [NPORT];
  flit_t in_flit [NPORT], out_flit [NPORT];
  logic  bypass_evt, stall_evt;
  int checks = 0, failures = 0, n_bypass = 0, n_stall = 0;
  always #5 clk = ~clk;
  always @(posedge clk) begin n_bypass += bypass_evt; n_stall += stall_evt; end

  noc_router #(.X(1), .Y(1)) dut (.clk(clk), .rst_n(rst_n), .mode(mode), .in_valid(in_valid),
    .in_flit(in_flit), .in_ready(in_ready), .out_valid(out_valid), .out_flit(out_flit),
    .out_ready(out_ready), .bypass_evt(bypass_evt), .stall_evt(stall_evt));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t fl(int x, int y, int d);
    flit_t f;
    f = '0; f.dst_x = 3'(x); f.dst_y = 2'(y); f.data = d;
    return f;
  endfunction

  // send one flit on input port ip, expect it on output port op after lat cycles
  task automatic one(int ip, int x, int y, int op, int lat);
    int t;
    @(negedge clk);
    in_valid[ip] = 1; in_flit[ip] = fl(x, y, 32'h1000 + x * 16 + y);
    @(negedge clk);
    in_valid[ip] = 0;
    t = 1;
    while (!out_valid[op] && t < 6) begin @(negedge clk); t++; end
    checks++;
    if (!out_valid[op] || out_flit[op].data !== 32'h1000 + x * 16 + y || t != lat) begin
      failures++; $display("FAIL in %0d dst (%0d,%0d): out %0d valid %0b after %0d", ip, x, y, op, out_valid[op], t);
    end
    @(negedge clk);
  endtask

  initial begin
    for (int p = 0; p < NPORT; p++) begin in_valid[p] = 0; in_flit[p] = '0; out_ready[p] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // full mode, every direction, feed-through (1 cycle)
    one(P_L, 2, 1, P_E, 1);
    one(P_L, 2, 0, P_NE, 1);
    one(P_L, 1, 0, P_N, 1);
    one(P_L, 0, 0, P_NW, 1);
    one(P_L, 0, 1, P_W, 1);
    one(P_L, 0, 2, P_SW, 1);
    one(P_L, 1, 2, P_S, 1);
    one(P_L, 2, 2, P_SE, 1);
    one(P_W, 4, 0, P_NE, 1);   // diagonal first
    one(P_W, 5, 1, P_E, 1);
    one(P_E, 1, 1, P_L, 1);
    checks++; if (n_bypass < 11) begin failures++; $display("FAIL bypass count %0d", n_bypass); end
    // back-pressure: E output blocked, three flits from W queue up
    out_ready[P_E] = 0;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); in_valid[P_W] = 1; in_flit[P_W] = fl(4, 1, 100 + i);
    end
    @(negedge clk); in_valid[P_W] = 0;
    repeat (2) @(negedge clk);
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    out_ready[P_E] = 1;
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (!out_valid[P_E] || out_flit[P_E].data !== 100 + i) begin
        failures++; $display("FAIL queued flit %0d", i);
      end
      @(negedge clk);
    end
    // buffered path: a flit behind a waiting one takes two cycles
    // ring mode: inner tile, north input switched off, forward is west on row 1
    mode = MODE_RING;
    @(negedge clk);
    checks++; if (in_ready[P_N] || in_ready[P_NE] || !in_ready[P_E] || !in_ready[P_W]) begin
      failures++; $display("FAIL ring switches");
    end
    one(P_E, 0, 1, P_W, 1);   // ring index 11 > 10: forward
    one(P_W, 5, 1, P_E, 1);   // ring index 6 < 10: backward (east on row 1)
    one(P_W, 0, 0, P_E, 1);   // row 0 is behind
    // diagonal mode: north-east / south-west only
    mode = MODE_DIAG;
    @(negedge clk);
    checks++; if (in_ready[P_E] || in_ready[P_N] || !in_ready[P_NE] || !in_ready[P_SW]) begin
      failures++; $display("FAIL diagonal switches");
    end
    one(P_SW, 2, 0, P_NE, 1);
    one(P_NE, 0, 2, P_SW, 1);
    $display("bypass events %0d, stall cycles %0d", n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
