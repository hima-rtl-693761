// dpbs: P-input dual-mode pipelined bitonic sorter (DPBS).
//
// Sorts P elements (P a power of two) with a bitonic sorting network of
// S = log2(P)*(log2(P)+1)/2 compare-exchange stages. The mode input desc selects ascending
// (0) or descending (1) order for each vector on its own: desc travels down the pipeline
// with the data and flips every comparator. Elements are compared as the unsigned
// concatenation {key, tag}, so equal keys are ordered by tag and the result is unique.
//
// Timing: D pipeline registers are spread evenly over the S stages (after stage s when
// floor((s+1)*D/S) > floor(s*D/S)), so a vector accepted with in_valid appears on out
// exactly D cycles later and one vector can enter every cycle. For P = 16 the published
// sorter has D = 5 stages, two compare stages per register; the default D keeps that ratio
// (D = ceil(S/2)), which gives D = 3 for the P = 8 sorter of the 64-row tiles.
module dpbs
  import hima_pkg::*;
#(
  parameter int unsigned P = 8,
  parameter int unsigned D = (($clog2(P) * ($clog2(P) + 1) / 2) + 1) / 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  desc,
  input  elem_t in [P],
  output logic  out_valid,
  output logic  out_desc,
  output elem_t out [P]
);
  localparam int unsigned LG = $clog2(P);
  localparam int unsigned S  = LG * (LG + 1) / 2;

  // Stage s of the network compares i with i^J inside blocks of size K.
  function automatic int unsigned stage_k(input int unsigned s);
    int unsigned c;
    c = 0;
    for (int unsigned kk = 1; kk <= LG; kk++)
      for (int unsigned jj = kk; jj >= 1; jj--) begin
        if (c == s) return 1 << kk;
        c++;
      end
    return 0;
  endfunction
  function automatic int unsigned stage_j(input int unsigned s);
    int unsigned c;
    c = 0;
    for (int unsigned kk = 1; kk <= LG; kk++)
      for (int unsigned jj = kk; jj >= 1; jj--) begin
        if (c == s) return 1 << (jj - 1);
        c++;
      end
    return 0;
  endfunction
  function automatic bit reg_after(input int unsigned s);
    return ((s + 1) * D) / S > (s * D) / S;
  endfunction

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int unsigned K = stage_k(s);
    localparam int unsigned J = stage_j(s);
    elem_t si [P];   // stage input
    logic  sv, sd;
    elem_t c  [P];   // after compare-exchange
    elem_t o  [P];   // stage output (registered or not)
    logic  ov, od;

    if (s == 0) begin : g_first
      assign si = in;
      assign sv = in_valid;
      assign sd = desc;
    end else begin : g_next
      assign si = g_stage[s-1].o;
      assign sv = g_stage[s-1].ov;
      assign sd = g_stage[s-1].od;
    end

    always_comb begin
      c = si;
      for (int unsigned i = 0; i < P; i++) begin
        int unsigned l;
        logic up, gt;
        l = i ^ J;
        if (l > i) begin
          up = ((i & K) == 0) ^ sd;
          gt = si[i] > si[l];
          if (up == gt) begin c[i] = si[l]; c[l] = si[i]; end
        end
      end
    end

    if (reg_after(s)) begin : g_reg
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          ov <= 1'b0;
          od <= 1'b0;
        end else begin
          ov <= sv;
          od <= sd;
        end
      end
      always_ff @(posedge clk) o <= c;
    end else begin : g_wire
      assign ov = sv;
      assign od = sd;
      assign o  = c;
    end
  end

  assign out       = g_stage[S-1].o;
  assign out_valid = g_stage[S-1].ov;
  assign out_desc  = g_stage[S-1].od;
endmodule
