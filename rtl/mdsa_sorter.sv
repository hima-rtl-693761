// mdsa_sorter: local usage sorter of a processing tile (2-D multi-dimensional sort).
//
// The n = P*P usage entries of a tile are held in a P x P register file (RF) and sorted by
// passing rows and columns of the RF through one P-input bitonic sorter (dpbs) and writing
// them back, the arrangement of the published 2-D sorter (RF, DPBS, feedback path).
//
// Phase schedule (this design's choice, shearsort): 2*log2(P)+1 phases alternating row and
// column phases, starting and ending with a row phase. In a row phase, rows are sorted in
// snake order (even rows ascending, odd rows descending) except in the last phase, where
// all rows are sorted ascending; in a column phase every column is sorted ascending (top to
// bottom). By the 0-1 principle this leaves the RF sorted in row-major ascending order. The
// published sorter uses an MDSA schedule of 6 phases whose exact steps are not given; this
// schedule needs 7 phases for P = 8 and 9 for P = 16.
//
// Timing: start loads din (all n entries, one cycle). Each phase issues one line per cycle
// for P cycles and ends when the last line has come back from the D-stage sorter, so a
// phase takes P + D cycles and the whole sort NPHASE*(P+D) cycles after the load; done
// pulses for one cycle after the last write-back and busy is high in between. Afterwards
// rd_idx selects any entry of the row-major result (combinational read, rank order).
module mdsa_sorter
  import hima_pkg::*;
#(
  parameter int unsigned P = 8,
  parameter int unsigned D = (($clog2(P) * ($clog2(P) + 1) / 2) + 1) / 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  elem_t din [P*P],
  output logic  busy,
  output logic  done,
  input  logic [$clog2(P*P)-1:0] rd_idx,
  output elem_t rd_data
);
  localparam int unsigned LG     = $clog2(P);
  localparam int unsigned NPHASE = 2 * LG + 1;
  localparam int unsigned LW     = (LG > 0) ? LG : 1;

  elem_t rf [P][P];
  logic [$clog2(NPHASE+1)-1:0] phase;
  logic [LW:0]  issue_cnt;   // lines sent in this phase
  logic [LW:0]  back_cnt;    // lines written back in this phase
  logic [LW-1:0] line_pipe [D];  // line index travelling beside the sorter

  logic  s_in_valid, s_desc, s_out_valid, s_out_desc;
  elem_t s_in [P], s_out [P];
  logic  row_phase;
  logic [LW-1:0] issue_line, back_line;

  assign row_phase  = (phase[0] == 1'b0);
  assign issue_line = issue_cnt[LW-1:0];
  assign s_in_valid = busy && (issue_cnt < P);

  always_comb begin
    for (int unsigned i = 0; i < P; i++)
      s_in[i] = row_phase ? rf[issue_line][i] : rf[i][issue_line];
    // snake order in row phases, except the last phase; columns ascending
    s_desc = row_phase && (phase != NPHASE - 1) && issue_line[0];
  end

  dpbs #(.P(P), .D(D)) u_dpbs (
    .clk(clk), .rst_n(rst_n), .in_valid(s_in_valid), .desc(s_desc), .in(s_in),
    .out_valid(s_out_valid), .out_desc(s_out_desc), .out(s_out)
  );

  assign back_line = line_pipe[D-1];

  always_ff @(posedge clk) begin
    line_pipe[0] <= issue_line;
    for (int unsigned k = 1; k < D; k++) line_pipe[k] <= line_pipe[k-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      phase     <= '0;
      issue_cnt <= '0;
      back_cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        phase     <= '0;
        issue_cnt <= '0;
        back_cnt  <= '0;
      end else if (busy) begin
        if (s_in_valid) issue_cnt <= issue_cnt + 1'b1;
        if (s_out_valid) begin
          if (back_cnt == P - 1) begin
            back_cnt  <= '0;
            issue_cnt <= '0;
            if (phase == NPHASE - 1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              phase <= phase + 1'b1;
            end
          end else begin
            back_cnt <= back_cnt + 1'b1;
          end
        end
      end
    end
  end

  // RF: parallel load on start, one row or column written back per sorter output.
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int unsigned r = 0; r < P; r++)
        for (int unsigned c = 0; c < P; c++)
          rf[r][c] <= din[r*P + c];
    end else if (busy && s_out_valid) begin
      for (int unsigned i = 0; i < P; i++)
        if (row_phase) rf[back_line][i] <= s_out[i];
        else           rf[i][back_line] <= s_out[i];
    end
  end

  assign rd_data = rf[rd_idx / P][rd_idx % P];

  // A new line must not enter the sorter before the last phase's lines have come back.
  property p_no_overlap;
    @(posedge clk) disable iff (!rst_n) s_out_valid |-> busy;
  endproperty
  assert property (p_no_overlap);
endmodule
