// tb_pe: drives random operands through all five PE modes, using RF entry 3 as the third
// operand and writing results back, and compares each registered result with a model.
module tb_pe;
  import hima_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, rf_we = 0;
  pe_op_e op;
  word_t a, b, y;
  logic [5:0] ra, wa;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe dut (.clk(clk), .rst_n(rst_n), .en(en), .op(op), .a(a), .b(b), .ra(ra), .rf_we(rf_we),
          .wa(wa), .y(y));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t qmul(word_t p, word_t q);
    longint pl;
    pl = longint'(p) * longint'(q);
    return word_t'(pl >>> 16);
  endfunction

  initial begin
    word_t model_rf3, expv;
    ra = 6'd3; wa = 6'd3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise RF[3] with a bypass
    @(negedge clk); en = 1; op = PE_BYP; a = 32'sh0001_8000; b = 0; rf_we = 1;
    @(negedge clk); en = 0; rf_we = 0;
    model_rf3 = 32'sh0001_8000;
    checks++; if (y !== model_rf3) begin failures++; $display("FAIL bypass y=%h", y); end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en = 1;
      op = pe_op_e'($urandom_range(0, 4));
      a  = word_t'($signed($urandom_range(0, 32'h0004_0000)) - 32'sh0002_0000);
      b  = word_t'($signed($urandom_range(0, 32'h0004_0000)) - 32'sh0002_0000);
      rf_we = $urandom_range(0, 1);
      case (op)
        PE_BYP:  expv = a;
        PE_ADD:  expv = a + b;
        PE_MUL:  expv = qmul(a, b);
        PE_MAC:  expv = qmul(a, b) + model_rf3;
        default: expv = qmul(a + model_rf3, b);
      endcase
      @(posedge clk); #1;
      checks++;
      if (y !== expv) begin
        failures++;
        $display("FAIL op=%s a=%h b=%h rf=%h y=%h exp=%h", op.name(), a, b, model_rf3, y, expv);
      end
      if (rf_we) model_rf3 = expv;
    end
    // hold: en low keeps the output
    @(negedge clk); en = 0; expv = y; a = 1; op = PE_BYP;
    @(posedge clk); #1; checks++; if (y !== expv) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
