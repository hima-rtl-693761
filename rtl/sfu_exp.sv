// sfu_exp: exponential unit for the approximate softmax.
//
// e^x is approximated piece-wise linearly: the input range [-8, 0) is cut into 16 segments
// of width 0.5, and a small table holds, for each segment, the slope and intercept of the
// chord of e^x between the segment's end points:
//   slope[s] = (e^(x0+0.5) - e^x0) / 0.5,  intercept[s] = e^x0 - slope[s]*x0,  x0 = -8 + s/2
// (both in Q16.16, rounded to nearest). The output is slope*x + intercept: one multiply and
// one add, as the published softmax approximation prescribes (a table of affine pieces).
// The number of pieces, the range and the chord fit are this design's choices. Inputs of 0
// or more return 1.0 (softmax inputs are expected to be shifted by their maximum first);
// inputs below -8 return 0. Worst-case error is below 0.031.
//
// Purely combinational: x in, y out in the same cycle.
module sfu_exp
  import hima_pkg::*;
(
  input  word_t x,
  output word_t y
);
  localparam int unsigned NSEG = 16;
  localparam word_t SLOPE [NSEG] = '{29, 47, 78, 128, 211, 347, 573, 945,
                                     1557, 2568, 4233, 6980, 11507, 18973, 31280, 51573};
  localparam word_t ICEPT [NSEG] = '{250, 389, 603, 929, 1427, 2179, 3306, 4979,
                                     7430, 10966, 15963, 22829, 31884, 43082, 55390, 65536};
  localparam word_t MINUS8 = -(word_t'(8) <<< FRAC);

  word_t       shifted;
  logic [3:0]  seg;

  always_comb begin
    shifted = x - MINUS8;            // x + 8, non-negative inside the range
    seg     = shifted[FRAC+2:FRAC-1]; // floor((x + 8) / 0.5)
    if (x >= 0)            y = word_t'(1) <<< FRAC;
    else if (x < MINUS8)   y = '0;
    else                   y = fx_mul(SLOPE[seg], x) + ICEPT[seg];
  end
endmodule
