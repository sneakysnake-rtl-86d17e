// escape_stage: one SneakySnake step inside a sub-maze.
//
// From the current checkpoint (column cp_in of a T-column sub-maze) it measures,
// on every row at once, the run of free entries (zeros) that starts at the
// checkpoint, takes the longest run over all rows, and treats that run plus the
// obstacle that ends it as the escape segment. If the longest run reaches the
// right edge of the sub-maze, the signal net has arrived and no obstacle is
// counted (hit = 0, cp_out = T). Otherwise the obstacle is counted (hit = 1)
// and the new checkpoint is the column just after it (cp_out = cp_in+run+1).
// If every row starts with an obstacle, the run is 0 and the escape segment is
// that single obstacle. A checkpoint already at T passes through unchanged.
//
// The greedy longest-segment rule follows the paper. The paper calls these
// units "module instances" without giving their insides; the run lengths are
// computed here by shifting each row down to the checkpoint behind a sentinel
// obstacle at column T and counting trailing zeros, which is this design's own
// choice. Purely combinational; ROWS is 2E+1.
module escape_stage
  import ss_pkg::*;
#(
  parameter int unsigned T    = SUB_WIDTH_DEF,
  parameter int unsigned ROWS = 2 * E_MAX_DEF + 1
) (
  input  logic [ROWS-1:0][T-1:0]  sub_maze,
  input  logic [$clog2(T+1)-1:0]  cp_in,
  output logic [$clog2(T+1)-1:0]  cp_out,
  output logic                    hit
);

  localparam int CW = $clog2(T + 1);

  logic [ROWS-1:0][CW-1:0] run;
  logic [CW-1:0]           best;

  // Run of zeros from the checkpoint on each row; the sentinel 1 at bit T
  // stops the count at the sub-maze edge.
  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      logic [T:0] shifted;
      logic       stop;
      shifted = {1'b1, sub_maze[r]} >> cp_in;
      run[r]  = '0;
      stop    = 1'b0;
      for (int b = 0; b < int'(T); b++) begin
        if (shifted[b]) stop = 1'b1;
        else if (!stop) run[r] = run[r] + 1'b1;
      end
    end
  end

  // Longest run over all rows.
  always_comb begin
    best = '0;
    for (int r = 0; r < int'(ROWS); r++)
      if (run[r] > best) best = run[r];
  end

  always_comb begin
    if (cp_in >= CW'(T) || (cp_in + best) >= CW'(T)) begin
      cp_out = CW'(T);
      hit    = 1'b0;
    end else begin
      cp_out = cp_in + best + 1'b1;
      hit    = 1'b1;
    end
  end

endmodule
