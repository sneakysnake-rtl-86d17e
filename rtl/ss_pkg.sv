// ss_pkg: types and default sizes shared by the Snake-on-Chip pre-alignment
// filter.
//
// A base is a 2-bit code. The filter only ever tests two bases for equality,
// so the particular code assignment does not change any result; the A/C/G/T
// order below is this design's own choice. The default sizes are the
// configuration the filter was evaluated in: 100-base reads, an edit threshold
// range of 0..10 (10 % of the read length), sub-mazes 8 columns wide and 3
// escape-segment stages per sub-maze.
package ss_pkg;

  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_t;

  // Default configuration.
  localparam int unsigned SEQ_LEN_DEF   = 100; // m, read length
  localparam int unsigned E_MAX_DEF     = 10;  // largest edit threshold supported
  localparam int unsigned SUB_WIDTH_DEF = 8;   // t, columns per sub-maze
  localparam int unsigned STAGES_DEF    = 3;   // y, escape stages per sub-maze

  // Number of horizontal routing tracks (maze rows) for threshold e.
  function automatic int unsigned hrt_count(int unsigned e);
    return 2 * e + 1;
  endfunction

  // Number of sub-mazes a read of length m is cut into (the last one may be
  // narrower than t and is padded).
  function automatic int unsigned sub_count(int unsigned m, int unsigned t);
    return (m + t - 1) / t;
  endfunction

endpackage
