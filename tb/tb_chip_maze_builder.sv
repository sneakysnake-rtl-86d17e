// tb_chip_maze_builder: checks the chip maze against the maze equation.
//
// Two instances: one at the default size (100 bases, E_MAX = 10) driven with
// random pairs and random thresholds, every entry compared with the reference
// model; and one at the size of the worked example (12 bases, E = 3) with
// R = GGTGCAGAGCTC and Q = GGTGAGAGTTGT, where row 1, row 4 and column 6 are
// also compared with the obstacle positions printed in that example.
module tb_chip_maze_builder;
  import ss_pkg::*;
  import ss_ref_pkg::*;

  int checks = 0, failures = 0;

  // default-size instance
  localparam int M = 100, EM = 10;
  base_t [M-1:0]          ref_seq, qry_seq;
  logic  [3:0]            e_thresh;
  logic  [2*EM:0][M-1:0]  maze;

  chip_maze_builder dut (.ref_seq(ref_seq), .qry_seq(qry_seq), .e_thresh(e_thresh), .maze(maze));

  // worked-example instance
  base_t [11:0]        ex_ref, ex_qry;
  logic  [1:0]         ex_e;
  logic  [6:0][11:0]   ex_maze;

  chip_maze_builder #(.M(12), .E_MAX(3)) dut_ex (.ref_seq(ex_ref), .qry_seq(ex_qry), .e_thresh(ex_e), .maze(ex_maze));

  function automatic base_t to_base(byte ch);
    case (ch)
      "A": return BASE_A;
      "C": return BASE_C;
      "G": return BASE_G;
      default: return BASE_T;
    endcase
  endfunction

  task automatic check(bit got, bit exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t r, q;
    automatic string rs = "GGTGCAGAGCTC", qs = "GGTGAGAGTTGT";
    // printed obstacle positions of the example (1 = obstacle), j = 1..12
    automatic bit ex_row1 [12] = '{1,0,1,1,1,0,0,0,0,1,0,1};
    automatic bit ex_row4 [12] = '{0,0,0,0,1,1,1,1,1,1,1,1};
    automatic bit ex_col6 [7]  = '{0,1,1,1,0,1,1};

    // ---- worked example
    r = new[12]; q = new[12];
    for (int i = 0; i < 12; i++) begin
      ex_ref[i] = to_base(rs[i]);  r[i] = int'(to_base(rs[i]));
      ex_qry[i] = to_base(qs[i]);  q[i] = int'(to_base(qs[i]));
    end
    ex_e = 2'd3;
    #1;
    for (int j = 0; j < 12; j++) begin
      check(ex_maze[0][j], ex_row1[j], $sformatf("example row1 col%0d", j+1));
      check(ex_maze[3][j], ex_row4[j], $sformatf("example row4 col%0d", j+1));
    end
    for (int i = 0; i < 7; i++)
      check(ex_maze[i][5], ex_col6[i], $sformatf("example row%0d col6", i+1));
    for (int i = 0; i < 7; i++)
      for (int j = 0; j < 12; j++)
        check(ex_maze[i][j], maze_bit(r, q, 3, 3, i, j), $sformatf("example Z[%0d,%0d]", i+1, j+1));
    // narrowed band: e = 1 leaves only rows 3, 4, 5
    ex_e = 2'd1;
    #1;
    for (int i = 0; i < 7; i++)
      for (int j = 0; j < 12; j++)
        check(ex_maze[i][j], maze_bit(r, q, 1, 3, i, j), $sformatf("example e=1 Z[%0d,%0d]", i+1, j+1));

    // ---- random pairs at default size
    for (int n = 0; n < 60; n++) begin
      automatic int e = $urandom_range(EM);
      rand_pair(M, $urandom_range(12), r, q);
      for (int i = 0; i < M; i++) begin
        ref_seq[i] = base_t'(r[i]);
        qry_seq[i] = base_t'(q[i]);
      end
      e_thresh = 4'(e);
      #1;
      for (int i = 0; i < 2*EM+1; i++)
        for (int j = 0; j < M; j++)
          check(maze[i][j], maze_bit(r, q, e, EM, i, j), $sformatf("pair%0d Z[%0d,%0d]", n, i+1, j+1));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
