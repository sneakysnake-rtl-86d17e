// filter_decision: turns the sub-maze obstacle counts into the filter verdict.
//
// The estimated edit count of a pair is the sum of the obstacles found in its
// N_SUB sub-mazes. The pair is accepted (passed on to full alignment) when
// that sum is at most the edit threshold, and rejected otherwise. The sum is
// formed by a plain adder chain that the synthesis tool may rebalance.
// The accept-at-most-E rule follows the paper; summing the per-sub-maze counts
// is how this design combines them, since the hardware solves all sub-mazes
// at once instead of stopping early once E obstacles have been seen.
// Purely combinational.
module filter_decision
  import ss_pkg::*;
#(
  parameter int unsigned N_SUB = sub_count(SEQ_LEN_DEF, SUB_WIDTH_DEF),
  parameter int unsigned Y     = STAGES_DEF,
  parameter int unsigned E_MAX = E_MAX_DEF
) (
  input  logic [N_SUB-1:0][$clog2(Y+1)-1:0]      sub_obstacles,
  input  logic [$clog2(E_MAX+1)-1:0]             e_thresh,
  output logic [$clog2(N_SUB*Y+1)-1:0]           edits,
  output logic                                   accept
);

  localparam int SW = $clog2(N_SUB * Y + 1);

  always_comb begin
    edits = '0;
    for (int s = 0; s < int'(N_SUB); s++)
      edits = edits + SW'(sub_obstacles[s]);
  end

  assign accept = (int'(edits) <= int'(e_thresh));

endmodule
