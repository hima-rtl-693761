// tb_pms: merges Nt = 16 sorted lists of 64 random usage entries (with ties) with the merge
// sorter fed by usage_buffers, one merge step per cycle, and checks that each step yields
// 16 entries, that the concatenated output is the fully sorted list (keys ascending, ties in
// list order) and that the merge takes n = 64 steps.
module tb_pms;
  import hima_pkg::*;
  localparam int NB = 16, DEPTH = 64;
  logic clk = 0, rst_n = 0, wr_en = 0, adv_en = 0, empty;
  logic [3:0] wr_bank;
  logic [5:0] wr_slot;
  elem_t wr_elem;
  logic [4:0] adv [NB];
  elem_t win [NB][NB], out [NB];
  logic  win_valid [NB][NB], out_valid [NB];
  int checks = 0, failures = 0;
  logic [31:0] keys [NB][DEPTH];
  elem_t ref_list [NB*DEPTH];
  elem_t got [$];
  always #5 clk = ~clk;

  usage_buffers #(.NB(NB), .DEPTH(DEPTH)) ub (.clk(clk), .rst_n(rst_n), .wr_en(wr_en),
    .wr_bank(wr_bank), .wr_slot(wr_slot), .wr_elem(wr_elem), .clear_ptrs(1'b0),
    .adv_en(adv_en), .adv(adv), .win(win), .win_valid(win_valid), .empty(empty));
  pms #(.NB(NB)) dut (.clk(clk), .rst_n(rst_n), .en(adv_en), .win(win), .win_valid(win_valid),
    .adv(adv), .out(out), .out_valid(out_valid));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NB; s++) if (out_valid[s]) got.push_back(out[s]);
  end

  initial begin
    int steps, idx;
    // sorted lists
    for (int b = 0; b < NB; b++) begin
      for (int s = 0; s < DEPTH; s++) keys[b][s] = $urandom_range(0, 300);
      keys[b].sort();
    end
    // reference: stable merge by (key, list, position)
    idx = 0;
    for (int v = 0; v <= 300; v++)
      for (int b = 0; b < NB; b++)
        for (int s = 0; s < DEPTH; s++)
          if (keys[b][s] == 32'(v)) begin
            ref_list[idx] = '{key: keys[b][s], tag: 16'(b * DEPTH + s)}; idx++;
          end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int s = 0; s < DEPTH; s++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 4'(b); wr_slot = 6'(s);
        wr_elem = '{key: keys[b][s], tag: 16'(b * DEPTH + s)};
      end
    @(negedge clk); wr_en = 0;
    steps = 0;
    while (!empty) begin
      @(negedge clk); adv_en = 1; steps++;
      @(posedge clk); #1;
      checks++;
      for (int s = 0; s < NB; s++) if (!out_valid[s]) begin failures++; break; end
    end
    @(negedge clk); adv_en = 0;
    @(negedge clk);
    checks++;
    if (steps != DEPTH) begin failures++; $display("FAIL steps %0d", steps); end
    checks++;
    if (got.size() != NB * DEPTH) begin failures++; $display("FAIL count %0d", got.size()); end
    else
      for (int i = 0; i < NB * DEPTH; i++) begin
        checks++;
        if (got[i] !== ref_list[i]) begin
          failures++; $display("FAIL rank %0d got %0d/%0d exp %0d/%0d", i, got[i].key, got[i].tag,
                               ref_list[i].key, ref_list[i].tag);
          break;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
