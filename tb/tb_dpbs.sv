// tb_dpbs: sends one random vector per cycle, alternating ascending and descending mode,
// through the 8-input sorter and checks every output against a sorted copy, and that each
// vector appears exactly D = 3 cycles after it went in. A second instance with P = 16
// checks the published 16-input case, D = 5.
module tb_dpbs;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic  iv8 = 0, d8 = 0, ov8, od8;
  elem_t in8 [8], out8 [8];
  dpbs #(.P(8)) dut8 (.clk(clk), .rst_n(rst_n), .in_valid(iv8), .desc(d8), .in(in8),
                      .out_valid(ov8), .out_desc(od8), .out(out8));
  logic  iv16 = 0, d16 = 0, ov16, od16;
  elem_t in16 [16], out16 [16];
  dpbs #(.P(16)) dut16 (.clk(clk), .rst_n(rst_n), .in_valid(iv16), .desc(d16), .in(in16),
                        .out_valid(ov16), .out_desc(od16), .out(out16));

  longint q8 [$];
  logic  qd8 [$];
  int    qt8 [$];
  longint q16 [$];
  logic  qd16 [$];
  int    qt16 [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit in_order(elem_t a, elem_t b, logic desc);
    return desc ? (a >= b) : (a <= b);
  endfunction

  // output checker: sortedness and same multiset (sum of keys and of tags), latency
  always @(posedge clk) if (rst_n) begin
    if (ov8) begin
      logic  dd; int t; longint s1, s2;
      s1 = q8.pop_front(); dd = qd8.pop_front(); t = qt8.pop_front();
      checks++;
      s2 = 0;
      for (int i = 0; i < 8; i++) s2 += longint'(out8[i]);
      for (int i = 0; i < 7; i++) if (!in_order(out8[i], out8[i+1], dd)) begin
        failures++; $display("FAIL P=8 order at %0d", i); break;
      end
      if (s1 != s2 || od8 != dd) begin failures++; $display("FAIL P=8 content %0d %0d %0d %0d", s1, s2, od8, dd); end
      checks++;
      if (cyc - t != 3) begin failures++; $display("FAIL P=8 latency %0d", cyc - t); end
    end
    if (ov16) begin
      logic  dd; int t; longint s1, s2;
      s1 = q16.pop_front(); dd = qd16.pop_front(); t = qt16.pop_front();
      checks++;
      s2 = 0;
      for (int i = 0; i < 16; i++) s2 += longint'(out16[i]);
      for (int i = 0; i < 15; i++) if (!in_order(out16[i], out16[i+1], dd)) begin
        failures++; $display("FAIL P=16 order at %0d", i); break;
      end
      if (s1 != s2) begin failures++; $display("FAIL P=16 content"); end
      checks++;
      if (cyc - t != 5) begin failures++; $display("FAIL P=16 latency %0d", cyc - t); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      iv8 = 1; iv16 = 1;
      d8 = t[0]; d16 = t[1];
      for (int i = 0; i < 8; i++) in8[i] = '{key: $urandom_range(0, 40), tag: 16'($urandom)};
      for (int i = 0; i < 16; i++) in16[i] = '{key: $urandom, tag: 16'($urandom)};
      begin longint s; s = 0; for (int i = 0; i < 8; i++) s += longint'(in8[i]); q8.push_back(s); end qd8.push_back(d8); qt8.push_back(cyc);
      begin longint s; s = 0; for (int i = 0; i < 16; i++) s += longint'(in16[i]); q16.push_back(s); end qd16.push_back(d16); qt16.push_back(cyc);
    end
    @(negedge clk); iv8 = 0; iv16 = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q8.size() != 0 || q16.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
