// tb_fig2_example: the published worked example run through the whole filter.
//
// R = GGTGCAGAGCTC, Q = GGTGAGAGTTGT, E = 3. With one sub-maze as wide as the
// reads (T = 12) and enough stages (Y = 12) the filter is the unrestricted
// SneakySnake search, whose optimal signal net for this pair passes exactly
// three obstacles: the pair is accepted at E = 3 and rejected at E = 2. The
// same pair through the evaluated sub-maze shape (T = 8, Y = 3) must give the
// reference model's estimate, which may only be lower.
module tb_fig2_example;
  import ss_pkg::*;
  import ss_ref_pkg::*;

  int checks = 0, failures = 0;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid = 1'b0;
  logic         rdy_a, rdy_b;
  base_t [11:0] r_seq, q_seq;
  logic  [1:0]  e_thresh;
  logic         vld_a, vld_b, acc_a, acc_b, tr_a, tr_b;
  logic  [3:0]  ed_a;
  logic  [2:0]  ed_b;

  always #5 clk = ~clk;

  snake_on_chip #(.M(12), .E_MAX(3), .T(12), .Y(12)) dut_full (
    .clk, .rst_n, .in_valid, .in_ready(rdy_a), .ref_seq(r_seq), .qry_seq(q_seq), .e_thresh,
    .out_valid(vld_a), .out_ready(1'b1), .out_accept(acc_a), .out_edits(ed_a), .out_truncated(tr_a));

  snake_on_chip #(.M(12), .E_MAX(3), .T(8), .Y(3)) dut_sub (
    .clk, .rst_n, .in_valid, .in_ready(rdy_b), .ref_seq(r_seq), .qry_seq(q_seq), .e_thresh,
    .out_valid(vld_b), .out_ready(1'b1), .out_accept(acc_b), .out_edits(ed_b), .out_truncated(tr_b));

  function automatic base_t to_base(byte ch);
    case (ch)
      "A": return BASE_A;
      "C": return BASE_C;
      "G": return BASE_G;
      default: return BASE_T;
    endcase
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic string rs = "GGTGCAGAGCTC", qs = "GGTGAGAGTTGT";
    seq_t r, q;
    bit tr;
    int exp_sub;
    r = new[12]; q = new[12];
    for (int i = 0; i < 12; i++) begin
      r_seq[i] = to_base(rs[i]); r[i] = int'(r_seq[i]);
      q_seq[i] = to_base(qs[i]); q[i] = int'(q_seq[i]);
    end
    check(full_count(r, q, 3, 3) == 3, "reference model does not find 3 obstacles");
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 3; e >= 2; e--) begin
      @(negedge clk);
      e_thresh = 2'(e);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      repeat (2) @(negedge clk);
      check(vld_a && vld_b, "no verdict after 3 clocks");
      check(int'(ed_a) == 3, $sformatf("full search found %0d obstacles, expected 3", ed_a));
      check(acc_a == (e == 3), $sformatf("full search verdict %0b at E=%0d", acc_a, e));
      check(!tr_a, "full search truncated");
      exp_sub = chip_count(r, q, e, 3, 8, 3, tr);
      check(int'(ed_b) == exp_sub && tr_b == tr,
            $sformatf("sub-maze estimate %0d, expected %0d", ed_b, exp_sub));
      check(int'(ed_b) <= int'(ed_a), "sub-maze estimate above the full search");
      $display("E=%0d: full search %0d obstacles (accept=%0b), t=8/y=3 estimate %0d (accept=%0b)",
               e, ed_a, acc_a, ed_b, acc_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
