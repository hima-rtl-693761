// tb_mdsa_sorter: sorts random 64-entry usage vectors (8 x 8 RF) and checks that the
// row-major result is ascending, holds the same entries (every tag once), and that the sort
// takes 7 phases x (P + D) = 7 x 11 = 77 cycles from start to done. A last vector with many
// equal keys checks the tag tie-break.
module tb_mdsa_sorter;
  import hima_pkg::*;
  localparam int P = 8, N = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  elem_t din [N], rd_data;
  logic [5:0] rd_idx;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  mdsa_sorter #(.P(P)) dut (.clk(clk), .rst_n(rst_n), .start(start), .din(din), .busy(busy),
    .done(done), .rd_idx(rd_idx), .rd_data(rd_data));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    bit seen [N];
    elem_t prev;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      for (int i = 0; i < N; i++)
        din[i] = '{key: (run == 5) ? 32'($urandom_range(0, 3)) : $urandom, tag: 16'(i)};
      @(negedge clk); start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      checks++;
      if (cyc - t0 != 7 * (P + 3) + 1) begin
        failures++; $display("FAIL cycles %0d", cyc - t0);
      end
      #1;
      for (int i = 0; i < N; i++) seen[i] = 0;
      for (int i = 0; i < N; i++) begin
        rd_idx = 6'(i); #1;
        checks++;
        if (rd_data.key !== din[rd_data.tag[5:0]].key || seen[rd_data.tag[5:0]]) begin
          failures++; $display("FAIL run %0d entry %0d content", run, i);
        end
        seen[rd_data.tag[5:0]] = 1;
        if (i > 0 && !(prev < rd_data)) begin
          failures++; $display("FAIL run %0d order at %0d", run, i);
        end
        prev = rd_data;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
