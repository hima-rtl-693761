// tb_sfu_exp: checks the piece-wise linear e^x against the real exponential.
// Sweeps x over [-9, 1] in steps of 1/64 and requires |y - e^x| < 0.035 inside [-8, 0),
// y = 1.0 for x >= 0 and y = 0 below -8.
module tb_sfu_exp;
  import hima_pkg::*;
  word_t x, y;
  int checks = 0, failures = 0;
  sfu_exp dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, yr, ref_v;
    for (int i = -9 * 64; i <= 64; i++) begin
      x = word_t'(i) <<< (FRAC - 6);
      #1;
      xr = real'(i) / 64.0;
      yr = real'(y) / 65536.0;
      if (xr >= 0.0)       ref_v = 1.0;
      else if (xr < -8.0)  ref_v = 0.0;
      else                 ref_v = $exp(xr);
      checks++;
      if ((yr - ref_v) > 0.035 || (ref_v - yr) > 0.035) begin
        failures++;
        $display("FAIL x=%f y=%f exp=%f", xr, yr, ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
