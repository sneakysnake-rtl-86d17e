// tb_escape_stage: checks one escape stage against a column-by-column model.
//
// Default size (T = 8 columns, 21 rows). Random sub-mazes of varying obstacle
// density are applied with every checkpoint 0..8, plus directed cases: all
// obstacles (escape segment is one obstacle), one free row (signal reaches
// the edge), and a checkpoint already at the edge.
module tb_escape_stage;
  localparam int T = 8, ROWS = 21;

  int checks = 0, failures = 0;

  logic [ROWS-1:0][T-1:0] sub_maze;
  logic [3:0]             cp_in, cp_out;
  logic                   hit;

  escape_stage dut (.sub_maze(sub_maze), .cp_in(cp_in), .cp_out(cp_out), .hit(hit));

  task automatic expect_out(int exp_cp, bit exp_hit, string what);
    checks++;
    if (int'(cp_out) != exp_cp || hit !== exp_hit) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: cp_in=%0d got cp=%0d hit=%0b expected cp=%0d hit=%0b",
                 what, cp_in, cp_out, hit, exp_cp, exp_hit);
    end
  endtask

  function automatic void model(int cp, output int ncp, output bit h);
    int best = 0;
    for (int r = 0; r < ROWS; r++) begin
      int n = 0;
      while (cp + n < T && sub_maze[r][cp+n] == 1'b0) n++;
      if (n > best) best = n;
    end
    if (cp + best >= T) begin ncp = T; h = 1'b0; end
    else begin ncp = cp + best + 1; h = 1'b1; end
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ncp; bit h;
    // all obstacles: the escape segment is a single obstacle
    sub_maze = '1;
    for (int c = 0; c <= T; c++) begin
      cp_in = 4'(c); #1;
      expect_out(c == T ? T : c + 1, c != T, "all obstacles");
    end
    // one fully free row: the signal reaches the edge from any checkpoint
    sub_maze = '1; sub_maze[7] = '0;
    for (int c = 0; c <= T; c++) begin
      cp_in = 4'(c); #1;
      expect_out(T, 1'b0, "free row");
    end
    // hand-worked: row 3 free for columns 2..5, obstacle at 6
    sub_maze = '1; sub_maze[3] = 8'b0100_0011;   // bit c = column c
    sub_maze[10] = 8'b1111_1001;                  // free at 1..2
    cp_in = 4'd2; #1; expect_out(7, 1'b1, "hand case a");
    cp_in = 4'd1; #1; expect_out(4, 1'b1, "hand case b");
    cp_in = 4'd7; #1; expect_out(T, 1'b0, "hand case c");
    // random
    for (int n = 0; n < 4000; n++) begin
      automatic int dens = $urandom_range(1, 6);   // obstacle probability dens/8
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < T; c++)
          sub_maze[r][c] = ($urandom_range(7) < dens);
      cp_in = 4'($urandom_range(T));
      #1;
      model(int'(cp_in), ncp, h);
      expect_out(ncp, h, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
