// tb_filter_decision: checks the obstacle sum and the accept/reject verdict.
//
// Default size: 13 sub-mazes, counts 0..3, thresholds 0..10. Includes the
// boundary cases sum == threshold (accept) and sum == threshold + 1 (reject).
module tb_filter_decision;
  localparam int N = 13;

  int checks = 0, failures = 0;

  logic [N-1:0][1:0] sub_obstacles;
  logic [3:0]        e_thresh;
  logic [5:0]        edits;
  logic              accept;

  filter_decision dut (.sub_obstacles(sub_obstacles), .e_thresh(e_thresh), .edits(edits), .accept(accept));

  task automatic run_one(string what);
    int sum = 0;
    for (int s = 0; s < N; s++) sum += int'(sub_obstacles[s]);
    #1;
    checks++;
    if (int'(edits) != sum || accept !== (sum <= int'(e_thresh))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: sum %0d e %0d got edits %0d accept %0b", what, sum, e_thresh, edits, accept);
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
    sub_obstacles = '0; e_thresh = 4'd0; run_one("all zero");
    sub_obstacles = '1; e_thresh = 4'd10; run_one("all max");
    // boundary: sum 5 against threshold 5 and 4
    sub_obstacles = '0; sub_obstacles[0] = 2'd3; sub_obstacles[12] = 2'd2;
    e_thresh = 4'd5; run_one("equal");
    e_thresh = 4'd4; run_one("one over");
    for (int n = 0; n < 3000; n++) begin
      for (int s = 0; s < N; s++) sub_obstacles[s] = 2'($urandom_range(3) * ($urandom_range(3) == 0));
      e_thresh = 4'($urandom_range(10));
      run_one("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
