// snake_on_chip: the Snake-on-Chip genome pre-alignment filter.
//
// For each reference/query pair it estimates a lower bound on the edit
// distance and accepts the pair (alignment is needed) when the estimate is at
// most the edit threshold e_thresh, or rejects it (the pair certainly differs
// by more than e_thresh edits). The chip maze of the pair is built in one go
// (chip_maze_builder), cut into N_SUB = ceil(M/T) sub-mazes of T columns, each
// solved by its own chain of Y escape stages (submaze_solver), and the
// obstacle counts are summed and compared (filter_decision). When M is not a
// multiple of T, the columns of the last sub-maze beyond the read are padded
// with free entries on every row, so they add no obstacle.
//
// Following the paper: the maze equation, the greedy longest-escape-segment
// rule, the split into independent sub-mazes, and the chosen sizes M = 100,
// T = 8, Y = 3 with thresholds up to 10. This design's own choices: the
// run-time threshold input, the valid/ready streams and the three register
// stages.
//
// Interface. Input stream: in_valid/in_ready with ref_seq, qry_seq (base c is
// position c+1) and e_thresh (values above E_MAX are clamped to E_MAX). Output
// stream: out_valid/out_ready with out_accept, out_edits (the estimated
// edit count) and out_truncated (some sub-maze ran out of its Y stages before
// reaching its right edge, so its remaining columns were not examined). Results leave in the order pairs came in.
//
// Timing. Registers: input capture (stage 1), per-sub-maze obstacle counts
// (stage 2), verdict (stage 3). A pair accepted on clock edge k is presented
// at the output after edge k+2; one pair per clock is taken while out_ready
// is high. When the output is held (out_valid && !out_ready) the whole
// pipeline stalls and in_ready is low. Synchronous active-low reset clears
// the valid bits only.
module snake_on_chip
  import ss_pkg::*;
#(
  parameter int unsigned M     = SEQ_LEN_DEF,
  parameter int unsigned E_MAX = E_MAX_DEF,
  parameter int unsigned T     = SUB_WIDTH_DEF,
  parameter int unsigned Y     = STAGES_DEF
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // sequence pairs in
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  base_t [M-1:0]                         ref_seq,
  input  base_t [M-1:0]                         qry_seq,
  input  logic  [$clog2(E_MAX+1)-1:0]           e_thresh,
  // verdicts out
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output logic                                  out_accept,
  output logic  [$clog2(sub_count(M,T)*Y+1)-1:0] out_edits,
  output logic                                  out_truncated
);

  localparam int unsigned ROWS  = hrt_count(E_MAX);
  localparam int unsigned N_SUB = sub_count(M, T);
  localparam int unsigned MP    = N_SUB * T;          // padded width
  localparam int          EW    = $clog2(E_MAX + 1);
  localparam int          OW    = $clog2(Y + 1);
  localparam int          SW    = $clog2(N_SUB * Y + 1);

  // Whole-pipeline advance: the output register is empty or being read.
  logic advance;
  assign advance  = !out_valid || out_ready;
  assign in_ready = advance;

  // ---------------------------------------------------------------- stage 1
  logic          s1_valid;
  base_t [M-1:0] s1_ref, s1_qry;
  logic [EW-1:0] s1_e;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else if (advance) begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (advance && in_valid) begin
      s1_ref <= ref_seq;
      s1_qry <= qry_seq;
      s1_e   <= (int'(e_thresh) > int'(E_MAX)) ? EW'(E_MAX) : e_thresh;
    end
  end

  // Chip maze, padded with free columns up to a multiple of T.
  logic [ROWS-1:0][M-1:0]  maze;
  logic [ROWS-1:0][MP-1:0] maze_p;

  chip_maze_builder #(.M(M), .E_MAX(E_MAX)) u_maze (
    .ref_seq  (s1_ref),
    .qry_seq  (s1_qry),
    .e_thresh (s1_e),
    .maze     (maze)
  );

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++)
      maze_p[r] = MP'(maze[r]);      // zero-extended: free padding columns
  end

  logic [N_SUB-1:0][OW-1:0] sub_obs;
  logic [N_SUB-1:0]         sub_unres;

  for (genvar s = 0; s < int'(N_SUB); s++) begin : g_sub
    logic [ROWS-1:0][T-1:0] sub;
    always_comb begin
      for (int r = 0; r < int'(ROWS); r++)
        sub[r] = maze_p[r][s*T +: T];
    end
    submaze_solver #(.T(T), .ROWS(ROWS), .Y(Y)) u_solver (
      .sub_maze   (sub),
      .obstacles  (sub_obs[s]),
      .unresolved (sub_unres[s])
    );
  end

  // ---------------------------------------------------------------- stage 2
  logic                     s2_valid;
  logic [N_SUB-1:0][OW-1:0] s2_obs;
  logic [EW-1:0]            s2_e;
  logic                     s2_trunc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
    end else if (advance) begin
      s2_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (advance && s1_valid) begin
      s2_obs <= sub_obs;
      s2_e     <= s1_e;
      s2_trunc <= |sub_unres;
    end
  end

  logic [SW-1:0] edits;
  logic          accept;

  filter_decision #(.N_SUB(N_SUB), .Y(Y), .E_MAX(E_MAX)) u_decide (
    .sub_obstacles (s2_obs),
    .e_thresh      (s2_e),
    .edits         (edits),
    .accept        (accept)
  );

  // ---------------------------------------------------------------- stage 3
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (advance) begin
      out_valid <= s2_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (advance && s2_valid) begin
      out_accept <= accept;
      out_edits     <= edits;
      out_truncated <= s2_trunc;
    end
  end

  // Output stream rule: a held verdict stays put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_accept) && $stable(out_edits)
       && $stable(out_truncated));
  endproperty
  a_hold: assert property (p_hold);

  // Nothing is taken in while the output is blocked.
  a_no_take: assert property (@(posedge clk) disable iff (!rst_n)
                              (out_valid && !out_ready) |-> !in_ready);

endmodule
