// submaze_solver: estimates the edits inside one (2E+1) x T sub-maze.
//
// Snake-on-Chip cuts the chip maze into non-overlapping sub-mazes T columns
// wide and solves each on its own, with its source terminal at the sub-maze's
// first column. Y escape stages are chained: stage k starts at the checkpoint
// stage k-1 left. The obstacle count of the sub-maze is the number of stages
// that counted an obstacle. When Y stages are not enough to reach the
// sub-maze's right edge, the columns left over are not examined and add
// nothing (unresolved = 1); this can only lower the estimate, never raise it,
// so the filter stays lossless. T = 8 and Y = 3 are the paper's chosen
// configuration; the handling of the left-over columns is this design's
// reading of it.
//
// Purely combinational: Y escape stages deep.
module submaze_solver
  import ss_pkg::*;
#(
  parameter int unsigned T    = SUB_WIDTH_DEF,
  parameter int unsigned ROWS = 2 * E_MAX_DEF + 1,
  parameter int unsigned Y    = STAGES_DEF
) (
  input  logic [ROWS-1:0][T-1:0]  sub_maze,
  output logic [$clog2(Y+1)-1:0]  obstacles,
  output logic                    unresolved
);

  localparam int CW = $clog2(T + 1);
  localparam int OW = $clog2(Y + 1);

  logic [Y:0][CW-1:0] cp;
  logic [Y-1:0]       hit;

  assign cp[0] = '0;

  for (genvar k = 0; k < int'(Y); k++) begin : g_stage
    escape_stage #(.T(T), .ROWS(ROWS)) u_stage (
      .sub_maze (sub_maze),
      .cp_in    (cp[k]),
      .cp_out   (cp[k+1]),
      .hit      (hit[k])
    );
  end

  always_comb begin
    obstacles = '0;
    for (int k = 0; k < int'(Y); k++)
      obstacles = obstacles + OW'(hit[k]);
  end

  assign unresolved = (cp[Y] != CW'(T));

endmodule
