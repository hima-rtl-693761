// pt_mem: on-tile memory system of a processing tile.
//
// Holds the tile's part of the external memory and of every state memory, partitioned
// row-wise as published: with n = N/Nt local rows,
//   ext   n x W   external memory (16 KB at 64 x 64 words)
//   link  n x N   linkage rows of the tile's memory rows (256 KB at 64 x 1024 words)
//   prec, usage, wrw   n words each (256 B)
//   rdw   R x n   read weightings of the R read heads
//   su, si        globally sorted usage and its row indices, written back by the CT
// The sizes match the published per-tile memory (16.4 KB external, 262 KB linkage, 256 B
// state memories). The linkage here is row-wise; the submatrix-wise linkage partition of the
// paper only changes which tile holds which block. The memories are plain arrays (the
// silicon would use SRAM macros).
//
// Ports: one word write port (wr_sel selects the memory; su/si are written together), one
// word read port, one row port giving a whole external-memory row (W words), a second read
// port for the read weighting (used while a kernel streams rows) and the usage vector as a
// whole (loaded into the sorter). Writes take effect at the clock edge; reads are
// combinational.
module pt_mem
  import hima_pkg::*;
#(
  parameter int unsigned NL = NLOC,
  parameter int unsigned W  = WMEM,
  parameter int unsigned N  = NMEM,
  parameter int unsigned R  = RHEADS
) (
  input  logic     clk,
  input  logic     wr_en,
  input  mem_sel_e wr_sel,
  input  logic [$clog2(NL*N)-1:0] wr_addr,
  input  word_t    wr_data,
  input  logic [TAGW-1:0] wr_tag,
  input  mem_sel_e rd_sel,
  input  logic [$clog2(NL*N)-1:0] rd_addr,
  output word_t    rd_data,
  input  logic [$clog2(NL)-1:0] row_addr,
  output word_t    row_data [W],
  input  logic [$clog2(R*NL)-1:0] rdw_addr,
  output word_t    rdw_data,
  output word_t    usage_all [NL]
);
  localparam int unsigned LA = $clog2(NL);

  word_t ext   [NL][W];
  word_t link  [NL*N];
  word_t prec  [NL];
  word_t usage [NL];
  word_t wrw   [NL];
  word_t rdw   [R*NL];
  word_t su    [NL];
  logic [TAGW-1:0] si [NL];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        SEL_EXT:   ext[wr_addr / W][wr_addr % W] <= wr_data;
        SEL_LINK:  link[wr_addr] <= wr_data;
        SEL_PREC:  prec[wr_addr[LA-1:0]] <= wr_data;
        SEL_USAGE: usage[wr_addr[LA-1:0]] <= wr_data;
        SEL_WRW:   wrw[wr_addr[LA-1:0]] <= wr_data;
        SEL_RDW:   rdw[wr_addr[$clog2(R*NL)-1:0]] <= wr_data;
        default: begin  // SEL_SU / SEL_SI: sorted usage entry with its row index
          su[wr_addr[LA-1:0]] <= wr_data;
          si[wr_addr[LA-1:0]] <= wr_tag;
        end
      endcase
    end
  end

  always_comb begin
    unique case (rd_sel)
      SEL_EXT:   rd_data = ext[rd_addr / W][rd_addr % W];
      SEL_LINK:  rd_data = link[rd_addr];
      SEL_PREC:  rd_data = prec[rd_addr[LA-1:0]];
      SEL_USAGE: rd_data = usage[rd_addr[LA-1:0]];
      SEL_WRW:   rd_data = wrw[rd_addr[LA-1:0]];
      SEL_RDW:   rd_data = rdw[rd_addr[$clog2(R*NL)-1:0]];
      SEL_SU:    rd_data = su[rd_addr[LA-1:0]];
      default:   rd_data = word_t'(si[rd_addr[LA-1:0]]);
    endcase
  end

  assign row_data  = ext[row_addr];
  assign rdw_data  = rdw[rdw_addr];
  assign usage_all = usage;
endmodule
