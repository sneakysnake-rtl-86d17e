// chip_maze_builder: builds the chip maze of one reference/query pair.
//
// The chip maze has 2*E_MAX+1 rows (horizontal routing tracks, HRTs) and M
// columns (vertical routing tracks). Entry Z[i,j] compares reference base R[j]
// with one query base on a fixed diagonal, exactly as in the maze equation of
// the SneakySnake method (1-based i, j):
//   row i = E+1        : Q[j]          (match / substitution track)
//   rows 1 <= i <= E   : Q[j-i]        (deletion tracks)
//   rows i > E+1       : Q[j+i-E-1]    (insertion tracks)
// A match gives 0 (free track), anything else 1 (an obstacle); a query index
// outside 1..M is an obstacle as well. The hardware is laid out for E = E_MAX.
// The threshold actually used, e_thresh, is a run-time input: tracks whose
// diagonal offset exceeds e_thresh are forced to all obstacles, so that they
// can never carry the signal net. That run-time narrowing of the band is this
// design's own choice; it gives the same count as a maze built for e_thresh.
//
// Interface: maze[r][c] is row r (HRT r+1) and column c (j = c+1). ref_seq[c]
// and qry_seq[c] are bases j = c+1. Purely combinational: every entry is an
// independent 2-bit comparison, which is what makes the maze parallel.
module chip_maze_builder
  import ss_pkg::*;
#(
  parameter int unsigned M     = SEQ_LEN_DEF,
  parameter int unsigned E_MAX = E_MAX_DEF
) (
  input  base_t [M-1:0]                         ref_seq,
  input  base_t [M-1:0]                         qry_seq,
  input  logic  [$clog2(E_MAX+1)-1:0]           e_thresh,
  output logic  [2*E_MAX:0][M-1:0]              maze
);

  localparam int ROWS = 2 * E_MAX + 1;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    // Signed diagonal offset of this row's query base relative to column j.
    // Row r (0-based) is HRT i = r+1.
    localparam int I     = r + 1;
    localparam int OFS   = (I <= int'(E_MAX)) ? -I : (I - int'(E_MAX) - 1);
    localparam int ABS_O = (OFS < 0) ? -OFS : OFS;

    logic in_band;
    assign in_band = (ABS_O <= int'(e_thresh));

    for (genvar c = 0; c < int'(M); c++) begin : g_col
      localparam int QI = c + OFS;   // 0-based query index
      if (QI < 0 || QI >= int'(M)) begin : g_out
        // Fourth case of the maze equation: no query base to compare with.
        assign maze[r][c] = 1'b1;
      end else begin : g_cmp
        assign maze[r][c] = !in_band || (ref_seq[c] != qry_seq[QI]);
      end
    end
  end

endmodule
