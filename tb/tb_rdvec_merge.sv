// tb_rdvec_merge: feeds Nt = 16 local read vectors of W = 64 words in random order with
// random weights alpha_i in [0,1] and checks sum_i alpha_i v_i, word by word.
module tb_rdvec_merge;
  import hima_pkg::*;
  localparam int NB = 16, W = 64;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  word_t alpha [NB];
  logic [3:0] in_tile;
  logic [5:0] in_col;
  word_t in_data;
  word_t acc [W];
  word_t v [NB][W];
  longint expv [W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rdvec_merge #(.NB(NB), .W(W)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .alpha(alpha),
    .in_valid(in_valid), .in_tile(in_tile), .in_col(in_col), .in_data(in_data), .acc(acc));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [NB*W];
    for (int i = 0; i < NB; i++) begin
      alpha[i] = word_t'($urandom_range(0, 65536));
      for (int c = 0; c < W; c++) v[i][c] = word_t'($signed($urandom_range(0, 32'h0010_0000)) - 32'sh0008_0000);
    end
    for (int c = 0; c < W; c++) begin
      expv[c] = 0;
      for (int i = 0; i < NB; i++) expv[c] += (longint'(alpha[i]) * longint'(v[i][c])) >>> 16;
    end
    for (int k = 0; k < NB*W; k++) order[k] = k;
    for (int k = NB*W-1; k > 0; k--) begin
      int j, t;
      j = $urandom_range(0, k); t = order[k]; order[k] = order[j]; order[j] = t;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NB*W; k++) begin
      @(negedge clk);
      in_valid = 1;
      in_tile = 4'(order[k] / W);
      in_col  = 6'(order[k] % W);
      in_data = v[order[k] / W][order[k] % W];
    end
    @(negedge clk); in_valid = 0;
    for (int c = 0; c < W; c++) begin
      checks++;
      if (acc[c] !== word_t'(expv[c])) begin
        failures++; $display("FAIL col %0d acc=%h exp=%h", c, acc[c], word_t'(expv[c]));
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (acc[5] !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
