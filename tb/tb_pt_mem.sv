// tb_pt_mem: writes random words into every memory of the tile (the whole external memory,
// a sample of linkage words, all of the state memories) and reads them back through the
// word port, the row port, the read-weighting port and the usage vector.
module tb_pt_mem;
  import hima_pkg::*;
  localparam int NL = 64, W = 64, N = 1024, R = 4;
  logic clk = 0, wr_en = 0;
  mem_sel_e wr_sel, rd_sel;
  logic [15:0] wr_addr, rd_addr;
  word_t wr_data, rd_data, rdw_data;
  logic [15:0] wr_tag;
  logic [5:0] row_addr;
  word_t row_data [W];
  logic [7:0] rdw_addr;
  word_t usage_all [NL];
  word_t ext_m [NL*W], st [8][R*NL];
  word_t lk [64];
  logic [15:0] lka [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pt_mem #(.NL(NL), .W(W), .N(N), .R(R)) dut (.clk(clk), .wr_en(wr_en), .wr_sel(wr_sel),
    .wr_addr(wr_addr), .wr_data(wr_data), .wr_tag(wr_tag), .rd_sel(rd_sel), .rd_addr(rd_addr),
    .rd_data(rd_data), .row_addr(row_addr), .row_data(row_data), .rdw_addr(rdw_addr),
    .rdw_data(rdw_data), .usage_all(usage_all));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(mem_sel_e s, int a, word_t d, logic [15:0] t);
    @(negedge clk); wr_en = 1; wr_sel = s; wr_addr = 16'(a); wr_data = d; wr_tag = t;
  endtask

  initial begin
    for (int i = 0; i < NL*W; i++) begin ext_m[i] = $urandom; wr(SEL_EXT, i, ext_m[i], 0); end
    for (int i = 0; i < 64; i++) begin lka[i] = 16'($urandom); lk[i] = $urandom; wr(SEL_LINK, lka[i], lk[i], 0); end
    for (int s = 2; s <= 6; s++)
      for (int i = 0; i < ((s == 5) ? R*NL : NL); i++) begin
        st[s][i] = $urandom; wr(mem_sel_e'(s), i, st[s][i], 16'(i * 3));
      end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < NL; r++) begin
      row_addr = 6'(r); #1;
      for (int c = 0; c < W; c++) begin
        checks++; if (row_data[c] !== ext_m[r*W + c]) begin failures++; $display("FAIL row %0d col %0d", r, c); end
      end
    end
    for (int i = 0; i < 200; i++) begin
      int a; a = $urandom_range(0, NL*W-1);
      rd_sel = SEL_EXT; rd_addr = 16'(a); #1;
      checks++; if (rd_data !== ext_m[a]) failures++;
    end
    for (int i = 63; i >= 0; i--) begin
      bit later; later = 0;
      for (int j = i + 1; j < 64; j++) if (lka[j] == lka[i]) later = 1;
      if (!later) begin
        rd_sel = SEL_LINK; rd_addr = lka[i]; #1;
        checks++; if (rd_data !== lk[i]) begin failures++; $display("FAIL link"); end
      end
    end
    for (int s = 2; s <= 6; s++)
      for (int i = 0; i < ((s == 5) ? R*NL : NL); i++) begin
        rd_sel = mem_sel_e'(s); rd_addr = 16'(i); #1;
        checks++; if (rd_data !== st[s][i]) begin failures++; $display("FAIL sel %0d addr %0d", s, i); end
      end
    for (int i = 0; i < NL; i++) begin
      rd_sel = SEL_SI; rd_addr = 16'(i); #1;
      checks++; if (rd_data !== word_t'(i * 3)) begin failures++; $display("FAIL si %0d", i); end
      checks++; if (usage_all[i] !== st[3][i]) failures++;
    end
    for (int i = 0; i < R*NL; i++) begin
      rdw_addr = 8'(i); #1;
      checks++; if (rdw_data !== st[5][i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
