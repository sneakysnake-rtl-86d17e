// tb_snake_on_chip: end-to-end test of the filter at its default size.
//
// Size: 100-base reads, thresholds up to 10, sub-mazes of 8 columns, 3 escape
// stages (no parameter override). Random read pairs are generated with 0..14
// random substitutions, insertions and deletions, and random thresholds
// 0..15 (values above 10 exercise the clamp). Every verdict is compared, in
// order, with the independent reference model (sub-maze estimate, its sum and
// the truncation flag), and every pair whose true edit distance (dynamic
// programming) is within the threshold must be accepted: the filter must
// never reject a similar pair.
//
// Phases: (1) one isolated pair, latency must be 3 clocks from the input
// handshake to the output; (2) 40 pairs back to back with out_ready high,
// which must leave on 40 consecutive clocks; (3) random in_valid and
// out_ready, so the pipeline stalls. The test counts how often each
// mechanism happened (accept, reject, stall, truncated sub-maze, threshold
// clamp, threshold 0, identical reads) and fails one that never did.
module tb_snake_on_chip;
  import ss_pkg::*;
  import ss_ref_pkg::*;

  localparam int M = 100, EM = 10, T = 8, Y = 3;
  localparam int N_RANDOM = 1500;

  int checks = 0, failures = 0;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0, in_ready;
  base_t [M-1:0] ref_seq, qry_seq;
  logic  [3:0]   e_thresh;
  logic          out_valid, out_ready, out_accept, out_truncated;
  logic  [5:0]   out_edits;

  snake_on_chip dut (
    .clk, .rst_n, .in_valid, .in_ready, .ref_seq, .qry_seq, .e_thresh,
    .out_valid, .out_ready, .out_accept, .out_edits, .out_truncated
  );

  always #5 clk = ~clk;

  typedef struct {
    int  edits;
    bit  accept;
    bit  trunc;
    bit  similar;    // true edit distance within the threshold
    int  cyc_in;
  } exp_t;

  exp_t exp_q[$];
  int   cyc = 0;
  int   last_out_cyc = -1, run_len = 0, max_run = 0;
  int   lat_first = -1;

  // mechanism counters
  int n_accept = 0, n_reject = 0, n_stall = 0, n_trunc = 0, n_clamp = 0;
  int n_e0 = 0, n_exact = 0, n_similar = 0, n_full_reject = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  // Build a pair, drive it, and queue the expected verdict.
  task automatic make_pair(int nedit, int e);
    seq_t r, q;
    exp_t x;
    int   e_eff;
    bit   tr;
    rand_pair(M, nedit, r, q);
    if ($urandom_range(19) == 0) q = r;            // identical reads now and then
    e_eff = (e > EM) ? EM : e;
    for (int i = 0; i < M; i++) begin
      ref_seq[i] = base_t'(r[i]);
      qry_seq[i] = base_t'(q[i]);
    end
    e_thresh  = 4'(e);
    x.edits   = chip_count(r, q, e_eff, EM, T, Y, tr);
    x.trunc   = tr;
    x.accept  = (x.edits <= e_eff);
    x.similar = (edit_distance(r, q) <= e_eff);
    if (full_count(r, q, e_eff, EM) > e_eff) n_full_reject++;
    if (e > EM) n_clamp++;
    if (e == 0) n_e0++;
    if (r == q) n_exact++;
    exp_q.push_back(x);
  endtask

  // Input handshake bookkeeping and output checking.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      exp_t x;
      if (exp_q.size() == 0) fail("output with nothing expected");
      else begin
        x = exp_q.pop_front();
        checks++;
        if (int'(out_edits) != x.edits || out_accept !== x.accept || out_truncated !== x.trunc)
          fail($sformatf("verdict: got edits=%0d acc=%0b tr=%0b expected %0d %0b %0b",
                         out_edits, out_accept, out_truncated, x.edits, x.accept, x.trunc));
        if (x.similar) begin
          n_similar++;
          checks++;
          if (!out_accept) fail("similar pair rejected");
        end
        if (out_accept) n_accept++; else n_reject++;
        if (out_truncated) n_trunc++;
        if (lat_first < 0) lat_first = cyc - x.cyc_in;
      end
      if (last_out_cyc == cyc - 1) run_len++; else run_len = 1;
      if (run_len > max_run) max_run = run_len;
      last_out_cyc = cyc;
    end
  end

  // Stamp the input cycle of a pair when it is taken.
  // Only one pair is offered at a time, and it is the newest entry.
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) exp_q[$].cyc_in = cyc;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random backpressure while bp_on is set.
  bit bp_on = 1'b0;
  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(2) != 0) : 1'b1;

  // Drive one pair and wait for it to be taken.
  task automatic send(int nedit, int e);
    @(negedge clk);
    make_pair(nedit, e);
    in_valid = 1'b1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // (1) latency of one isolated pair
    send(2, 5);
    wait (exp_q.size() == 0);
    checks++;
    if (lat_first != 3) fail($sformatf("latency %0d, expected 3", lat_first));

    // (2) back to back, out_ready held high: one pair per clock
    max_run = 0;
    @(negedge clk);
    for (int n = 0; n < 40; n++) begin
      make_pair($urandom_range(8), $urandom_range(EM));
      in_valid = 1'b1;
      @(negedge clk);
      checks++;
      if (!in_ready) fail("in_ready low with out_ready high");
    end
    in_valid = 1'b0;
    wait (exp_q.size() == 0);
    checks++;
    if (max_run < 40) fail($sformatf("only %0d verdicts on consecutive clocks", max_run));

    // (3) random traffic with backpressure
    bp_on = 1'b1;
    for (int n = 0; n < N_RANDOM; n++) begin
      while ($urandom_range(4) == 0) @(negedge clk);
      send($urandom_range(14), $urandom_range(15));
    end
    @(negedge clk);
    bp_on = 1'b0;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);

    $display("mechanisms: accept=%0d reject=%0d stall=%0d truncated=%0d clamp=%0d e0=%0d identical=%0d similar=%0d",
             n_accept, n_reject, n_stall, n_trunc, n_clamp, n_e0, n_exact, n_similar);
    $display("unrestricted SneakySnake would reject %0d pairs; this filter rejected %0d",
             n_full_reject, n_reject);
    checks++; if (n_accept == 0)  fail("no pair accepted");
    checks++; if (n_reject == 0)  fail("no pair rejected");
    checks++; if (n_stall == 0)   fail("no stall");
    checks++; if (n_trunc == 0)   fail("no truncated sub-maze");
    checks++; if (n_clamp == 0)   fail("no threshold clamp");
    checks++; if (n_e0 == 0)      fail("no zero threshold");
    checks++; if (n_exact == 0)   fail("no identical pair");
    checks++; if (n_similar == 0) fail("no similar pair");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
