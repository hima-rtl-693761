// tb_mm_engine: 16-PE engine. (1) Memory-read kernel: 20 rows of a random matrix M are
// streamed with the weight w[r] broadcast, PE_MUL on the first row and PE_MAC after; the PE
// outputs must equal M^T w. (2) Inner products: PE_MUL with the tree adding gives M[r,.] . k
// for each row, 1 + 4 cycles after the row goes in.
module tb_mm_engine;
  import hima_pkg::*;
  localparam int NPE = 16, L = 4, ROWS = 20;
  logic clk = 0, rst_n = 0, in_valid = 0, rf_we = 0, pe_valid, cpt_valid;
  pe_op_e op;
  word_t a [NPE], b [NPE], pe_y [NPE], cpt_y;
  cpt_op_e lop [L];
  word_t M [ROWS][NPE], w [ROWS], k [NPE];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  mm_engine #(.NPE(NPE), .RF_DEPTH(8)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .op(op), .a(a), .b(b), .ra(3'd0), .rf_we(rf_we), .wa(3'd0), .level_op(lop),
    .pe_valid(pe_valid), .pe_y(pe_y), .cpt_valid(cpt_valid), .cpt_y(cpt_y));

  function automatic word_t qmul(word_t p, word_t q);
    return word_t'((longint'(p) * longint'(q)) >>> 16);
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t expv;
    int got, t0;
    for (int l = 0; l < L; l++) lop[l] = CPT_ADD;
    for (int r = 0; r < ROWS; r++) begin
      w[r] = word_t'($urandom_range(0, 65536));
      for (int c = 0; c < NPE; c++) M[r][c] = word_t'($signed($urandom_range(0, 32'h0004_0000)) - 32'sh0002_0000);
    end
    for (int c = 0; c < NPE; c++) k[c] = word_t'($signed($urandom_range(0, 32'h0002_0000)) - 32'sh0001_0000);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      in_valid = 1; rf_we = 1;
      op = (r == 0) ? PE_MUL : PE_MAC;
      for (int c = 0; c < NPE; c++) begin a[c] = M[r][c]; b[c] = w[r]; end
    end
    @(negedge clk); in_valid = 0; rf_we = 0;
    for (int c = 0; c < NPE; c++) begin
      expv = 0;
      for (int r = 0; r < ROWS; r++) expv += qmul(M[r][c], w[r]);
      checks++;
      if (pe_y[c] !== expv) begin failures++; $display("FAIL M^T w col %0d: %h vs %h", c, pe_y[c], expv); end
    end
    // inner products through the tree
    repeat (8) @(posedge clk);
    t0 = cyc;
    fork
      begin
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          in_valid = 1; op = PE_MUL;
          for (int c = 0; c < NPE; c++) begin a[c] = M[r][c]; b[c] = k[c]; end
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        got = 0;
        while (got < ROWS) begin
          @(posedge clk); #1;
          if (cpt_valid) begin
            expv = 0;
            for (int c = 0; c < NPE; c++) expv += qmul(M[got][c], k[c]);
            checks++;
            if (cpt_y !== expv) begin failures++; $display("FAIL dot row %0d", got); end
            if (got == 0) begin
              checks++;
              if (cyc - t0 != 1 + L + 1) begin failures++; $display("FAIL tree latency %0d", cyc - t0); end
            end
            got++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
