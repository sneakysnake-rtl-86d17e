// tb_workload_100bp: threshold sweep over 100-base read pairs at default size.
//
// Models a short-read filtering run: for every threshold E = 0..10 it streams
// N_PER_E synthetic pairs through the filter with out_ready held high. Half
// the pairs carry E-1..E+2 random edits (pairs close to the threshold, the
// hard case for a filter); the other half carry 0..3*E+3 edits. For each E
// the test reports the pairs accepted, the pairs truly within E (dynamic
// programming), the false accepts of this filter and of the unrestricted
// SneakySnake search, and the number of clocks used. Checks: every verdict
// equals the reference model; no pair within E is rejected (0 % false
// rejects); the run takes one clock per pair plus the 3-clock latency.
module tb_workload_100bp;
  import ss_pkg::*;
  import ss_ref_pkg::*;

  localparam int M = 100, EM = 10, T = 8, Y = 3;
  localparam int N_PER_E = 120;

  int checks = 0, failures = 0;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0, in_ready;
  base_t [M-1:0] ref_seq, qry_seq;
  logic  [3:0]   e_thresh;
  logic          out_valid, out_accept, out_truncated;
  logic  [5:0]   out_edits;

  snake_on_chip dut (
    .clk, .rst_n, .in_valid, .in_ready, .ref_seq, .qry_seq, .e_thresh,
    .out_valid, .out_ready(1'b1), .out_accept, .out_edits, .out_truncated
  );

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct {
    int edits;
    bit accept;
    bit similar;
    bit full_accept;
  } exp_t;

  exp_t exp_q[$];
  int n_out = 0, n_acc = 0, n_sim = 0, n_fa = 0, n_fa_full = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic exp_t x = exp_q.pop_front();
      n_out++;
      checks++;
      if (int'(out_edits) != x.edits || out_accept !== x.accept) begin
        failures++;
        if (failures < 10) $display("FAIL verdict: got %0d/%0b expected %0d/%0b",
                                    out_edits, out_accept, x.edits, x.accept);
      end
      if (x.similar) begin
        checks++;
        if (!out_accept) begin
          failures++;
          $display("FAIL: similar pair rejected");
        end
      end
      if (out_accept) n_acc++;
      if (x.similar) n_sim++;
      if (out_accept && !x.similar) n_fa++;
      if (x.full_accept && !x.similar) n_fa_full++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t r[N_PER_E], q[N_PER_E];
    exp_t x[N_PER_E];
    bit   tr;
    int   t0, cycles;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    $display("   E  accepted  within-E  false-acc(chip)  false-acc(unrestricted)  clocks");
    for (int e = 0; e <= EM; e++) begin
      // prepare the pairs and their expected verdicts first
      for (int n = 0; n < N_PER_E; n++) begin
        automatic int ne = (n % 2 == 0) ? $urandom_range(e + 2, (e > 0) ? e - 1 : 0)
                                        : $urandom_range(3 * e + 3);
        rand_pair(M, ne, r[n], q[n]);
        x[n].edits       = chip_count(r[n], q[n], e, EM, T, Y, tr);
        x[n].accept      = (x[n].edits <= e);
        x[n].similar     = (edit_distance(r[n], q[n]) <= e);
        x[n].full_accept = (full_count(r[n], q[n], e, EM) <= e);
      end
      n_out = 0; n_acc = 0; n_sim = 0; n_fa = 0; n_fa_full = 0;
      @(negedge clk);
      t0 = cyc;
      for (int n = 0; n < N_PER_E; n++) begin
        for (int i = 0; i < M; i++) begin
          ref_seq[i] = base_t'(r[n][i]);
          qry_seq[i] = base_t'(q[n][i]);
        end
        e_thresh = 4'(e);
        in_valid = 1'b1;
        exp_q.push_back(x[n]);
        @(negedge clk);
      end
      in_valid = 1'b0;
      while (n_out < N_PER_E) @(negedge clk);
      cycles = cyc - t0;
      checks++;
      if (cycles != N_PER_E + 3) begin
        failures++;
        $display("FAIL: %0d pairs took %0d clocks, expected %0d", N_PER_E, cycles, N_PER_E + 3);
      end
      checks++;
      if (n_fa_full > n_fa) begin
        failures++;
        $display("FAIL: sub-maze filter had fewer false accepts than the full search");
      end
      $display("  %2d  %8d  %8d  %15d  %23d  %6d", e, n_acc, n_sim, n_fa, n_fa_full, cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
