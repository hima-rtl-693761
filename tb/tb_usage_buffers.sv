// tb_usage_buffers: 4 banks of 8 entries. Writes every entry, checks the windows at the
// start, moves the pointers by different amounts and checks the windows again, including
// entries past the end of a bank (invalid) and the empty flag.
module tb_usage_buffers;
  import hima_pkg::*;
  localparam int NB = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, clear = 0, adv_en = 0, empty;
  logic [1:0] wr_bank;
  logic [2:0] wr_slot;
  elem_t wr_elem;
  logic [2:0] adv [NB];
  elem_t win [NB][NB];
  logic  win_valid [NB][NB];
  int checks = 0, failures = 0;
  int ptr [NB];
  always #5 clk = ~clk;

  usage_buffers #(.NB(NB), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en),
    .wr_bank(wr_bank), .wr_slot(wr_slot), .wr_elem(wr_elem), .clear_ptrs(clear),
    .adv_en(adv_en), .adv(adv), .win(win), .win_valid(win_valid), .empty(empty));

  function automatic elem_t val(int b, int s);
    return '{key: 32'(b * 100 + s), tag: 16'(b * DEPTH + s)};
  endfunction

  task automatic check_windows();
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (ptr[b] + k < DEPTH) begin
          if (!win_valid[b][k] || win[b][k] !== val(b, ptr[b] + k)) begin
            failures++; $display("FAIL bank %0d k %0d", b, k);
          end
        end else if (win_valid[b][k]) begin
          failures++; $display("FAIL bank %0d k %0d should be invalid", b, k);
        end
      end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int s = DEPTH - 1; s >= 0; s--) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_slot = 3'(s); wr_elem = val(b, s);
      end
    @(negedge clk); wr_en = 0;
    for (int b = 0; b < NB; b++) ptr[b] = 0;
    #1 check_windows();
    for (int step = 0; step < 6; step++) begin
      @(negedge clk);
      adv_en = 1;
      for (int b = 0; b < NB; b++) begin
        int a;
        a = (ptr[b] >= DEPTH) ? 0 : $urandom_range(0, (DEPTH - ptr[b] < NB) ? DEPTH - ptr[b] : NB);
        adv[b] = 3'(a);
        ptr[b] += a;
      end
      @(negedge clk); adv_en = 0;
      #1 check_windows();
    end
    checks++;
    if (empty !== (ptr[0] >= DEPTH && ptr[1] >= DEPTH && ptr[2] >= DEPTH && ptr[3] >= DEPTH)) failures++;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int b = 0; b < NB; b++) ptr[b] = 0;
    #1 check_windows();
    checks++; if (empty) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
