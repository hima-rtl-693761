// tb_cpt: 64-input tree. Sends random vectors back to back with all levels adding and
// checks each sum and the 6-cycle latency; then a vector with level 0 in SFU mode and the
// other levels in bypass, which must give e^x[0] (within 0.035), and one with level 0 in
// multiply mode and the rest adding (sum of pairwise products).
module tb_cpt;
  import hima_pkg::*;
  localparam int NIN = 64, L = 6;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t x [NIN], y;
  cpt_op_e lop [L];
  int checks = 0, failures = 0, cyc = 0;
  word_t expq [$];
  int    tq [$];
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cpt #(.NIN(NIN)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .level_op(lop),
                        .out_valid(out_valid), .y(y));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && expq.size() > 0) begin
    word_t e; int t;
    e = expq.pop_front(); t = tq.pop_front();
    checks += 2;
    if (y !== e) begin failures++; $display("FAIL sum y=%h exp=%h", y, e); end
    if (cyc - t != L) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    word_t s;
    real yr;
    for (int l = 0; l < L; l++) lop[l] = CPT_ADD;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      in_valid = 1;
      s = 0;
      for (int i = 0; i < NIN; i++) begin
        x[i] = word_t'($signed($urandom_range(0, 32'h0010_0000)) - 32'sh0008_0000);
        s += x[i];
      end
      expq.push_back(s); tq.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (L + 2) @(posedge clk);
    // SFU then bypass
    @(negedge clk);
    lop[0] = CPT_SFU;
    for (int l = 1; l < L; l++) lop[l] = CPT_BYP;
    x[0] = -(32'sh0001_4000);   // -1.25
    in_valid = 1;
    @(negedge clk); in_valid = 0;
    repeat (L) @(posedge clk);
    #1;
    yr = real'(y) / 65536.0;
    checks++;
    if (yr - $exp(-1.25) > 0.035 || $exp(-1.25) - yr > 0.035) begin
      failures++; $display("FAIL sfu y=%f", yr);
    end
    // multiply pairs, then add
    @(negedge clk);
    lop[0] = CPT_MUL;
    for (int l = 1; l < L; l++) lop[l] = CPT_ADD;
    s = 0;
    for (int i = 0; i < NIN; i++) x[i] = word_t'($urandom_range(0, 32'h0003_0000));
    for (int i = 0; i < NIN; i += 2) s += word_t'((longint'(x[i]) * longint'(x[i+1])) >>> 16);
    in_valid = 1;
    @(negedge clk); in_valid = 0;
    repeat (L) @(posedge clk);
    #1;
    checks++;
    if (y !== s) begin failures++; $display("FAIL mul-add y=%h exp=%h", y, s); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
