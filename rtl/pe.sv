// pe: processing element of the matrix-matrix engine.
//
// Each PE takes two operands a and b per cycle and holds a small register file (RF) for
// intermediate values. Following the published PE, it supports five modes: bypass, add,
// multiply, multiply-then-add and add-then-multiply. The two fused modes take their third
// operand from the RF:
//   PE_BYP  y = a              PE_ADD  y = a + b            PE_MUL  y = a * b
//   PE_MAC  y = a * b + rf[ra] PE_AMUL y = (a + rf[ra]) * b
// Products are Q16.16. The result is registered (one cycle latency) and, when rf_we is set,
// also written to rf[wa] at the same clock edge, so back-to-back PE_MAC with ra == wa
// accumulates one term per cycle. RF depth 64 follows the published prototype sizing; how
// the RF is addressed (one read, one write address) is this design's choice.
module pe
  import hima_pkg::*;
#(
  parameter int unsigned RF_DEPTH = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  pe_op_e     op,
  input  word_t      a,
  input  word_t      b,
  input  logic [$clog2(RF_DEPTH)-1:0] ra,
  input  logic       rf_we,
  input  logic [$clog2(RF_DEPTH)-1:0] wa,
  output word_t      y
);
  word_t rf [RF_DEPTH];
  word_t r, res;

  always_comb begin
    r = rf[ra];
    unique case (op)
      PE_BYP:  res = a;
      PE_ADD:  res = a + b;
      PE_MUL:  res = fx_mul(a, b);
      PE_MAC:  res = fx_mul(a, b) + r;
      PE_AMUL: res = fx_mul(a + r, b);
      default: res = a;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else if (en) y <= res;
  end

  always_ff @(posedge clk) begin
    if (en && rf_we) rf[wa] <= res;
  end
endmodule
