// tb_submaze_solver: checks the Y-stage sub-maze solver against a model.
//
// Default size (T = 8, 21 rows, Y = 3). The model walks the greedy escape
// segments column by column, stopping after Y segments. Directed cases: a
// maze with one free row (0 obstacles), all obstacles (Y obstacles, left
// unresolved), and a staircase needing exactly two obstacles.
module tb_submaze_solver;
  localparam int T = 8, ROWS = 21, Y = 3;

  int checks = 0, failures = 0;
  int n_unres = 0;

  logic [ROWS-1:0][T-1:0] sub_maze;
  logic [1:0]             obstacles;
  logic                   unresolved;

  submaze_solver dut (.sub_maze(sub_maze), .obstacles(obstacles), .unresolved(unresolved));

  function automatic void model(output int cnt, output bit unres);
    int cp = 0, steps = 0;
    cnt = 0;
    while (cp < T && steps < Y) begin
      int best = 0;
      for (int r = 0; r < ROWS; r++) begin
        int n = 0;
        while (cp + n < T && sub_maze[r][cp+n] == 1'b0) n++;
        if (n > best) best = n;
      end
      steps++;
      if (cp + best >= T) cp = T;
      else begin cnt++; cp = cp + best + 1; end
    end
    unres = (cp < T);
  endfunction

  task automatic expect_out(int exp_cnt, bit exp_unres, string what);
    checks++;
    if (int'(obstacles) != exp_cnt || unresolved !== exp_unres) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: got %0d/%0b expected %0d/%0b", what, obstacles, unresolved,
                 exp_cnt, exp_unres);
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
    int cnt; bit u;
    sub_maze = '1; sub_maze[10] = '0; #1; expect_out(0, 1'b0, "free row");
    sub_maze = '1; #1; expect_out(3, 1'b1, "all obstacles");
    // row 0 free on 0..2, row 1 free on 4..5, row 2 free on 7: obstacles at 3 and 6
    sub_maze = '1;
    sub_maze[0] = 8'b1111_1000;
    sub_maze[1] = 8'b1100_1111;
    sub_maze[2] = 8'b0111_1111;
    #1; expect_out(2, 1'b0, "staircase");
    for (int n = 0; n < 4000; n++) begin
      automatic int dens = $urandom_range(2, 7);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < T; c++)
          sub_maze[r][c] = ($urandom_range(7) < dens);
      #1;
      model(cnt, u);
      if (u) n_unres++;
      expect_out(cnt, u, "random");
    end
    checks++;
    if (n_unres == 0) begin
      failures++;
      $display("FAIL: no random case ran out of stages");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
