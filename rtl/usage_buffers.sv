// usage_buffers: global usage buffers of the controller tile.
//
// NB memory banks, one per processing tile, each holding that tile's DEPTH locally sorted
// usage entries (element = usage key + global row tag). Entries arrive one at a time over
// the NoC and are written at (wr_bank, wr_slot). For the global merge, each bank has a read
// pointer (rd_ptr_1 ... rd_ptr_Nt in the published sorter) and presents a window of the NB
// entries starting at its pointer; entries past the end of the bank are marked invalid. The
// merge sorter reports how many entries of each window it consumed (adv) and the pointers
// move by that much when adv_en is high. clear_ptrs sets all pointers to 0.
//
// Timing: writes and pointer moves take effect at the clock edge; windows are combinational
// from the stored entries and pointers. A bank is assumed full (DEPTH entries) when merged.
module usage_buffers
  import hima_pkg::*;
#(
  parameter int unsigned NB    = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  logic [$clog2(NB)-1:0]    wr_bank,
  input  logic [$clog2(DEPTH)-1:0] wr_slot,
  input  elem_t wr_elem,
  input  logic  clear_ptrs,
  input  logic  adv_en,
  input  logic [$clog2(NB):0] adv [NB],
  output elem_t win       [NB][NB],
  output logic  win_valid [NB][NB],
  output logic  empty
);
  localparam int unsigned PW = $clog2(DEPTH) + 1;

  elem_t bank [NB][DEPTH];
  logic [PW-1:0] ptr [NB];

  always_ff @(posedge clk) begin
    if (wr_en) bank[wr_bank][wr_slot] <= wr_elem;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < NB; b++) ptr[b] <= '0;
    end else if (clear_ptrs) begin
      for (int unsigned b = 0; b < NB; b++) ptr[b] <= '0;
    end else if (adv_en) begin
      for (int unsigned b = 0; b < NB; b++) ptr[b] <= ptr[b] + PW'(adv[b]);
    end
  end

  always_comb begin
    empty = 1'b1;
    for (int unsigned b = 0; b < NB; b++) begin
      if (ptr[b] < PW'(DEPTH)) empty = 1'b0;
      for (int unsigned k = 0; k < NB; k++) begin
        logic [PW:0] a;
        a = {1'b0, ptr[b]} + (PW+1)'(k);
        win_valid[b][k] = (a < (PW+1)'(DEPTH));
        win[b][k]       = win_valid[b][k] ? bank[b][a[PW-2:0]] : '0;
      end
    end
  end
endmodule
