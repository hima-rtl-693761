// cpt_cell: one node of the configurable processing tree.
//
// Two inputs, one registered output. The cell holds an adder, a multiplier, a special
// function unit (the piece-wise linear e^x of sfu_exp) and a bypass route, and a mode selects
// which one drives the output, as in the published CPT cell. The SFU and the bypass act on
// the left input. One cycle latency when en is high.
module cpt_cell
  import hima_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  cpt_op_e op,
  input  word_t   l,
  input  word_t   r,
  output word_t   y
);
  word_t e, res;

  sfu_exp u_sfu (.x(l), .y(e));

  always_comb begin
    unique case (op)
      CPT_ADD: res = l + r;
      CPT_MUL: res = fx_mul(l, r);
      CPT_SFU: res = e;
      default: res = l;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else if (en) y <= res;
  end
endmodule
