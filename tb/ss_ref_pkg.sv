// ss_ref_pkg: reference models used by the testbenches.
//
// These are written independently of the RTL, as plain loops over columns:
//   maze_bit       one chip maze entry from the maze equation
//   chip_count     Snake-on-Chip estimate: sub-mazes of width t, at most y
//                  escape segments each, padding columns free
//   full_count     the unrestricted SneakySnake estimate (one maze, no limit)
//   edit_distance  Levenshtein distance by dynamic programming
//   rand_pair      a random read and a copy of it with a given number of
//                  random substitutions, insertions and deletions
// Sequences are int arrays holding 0..3; index 0 is position 1.
package ss_ref_pkg;

  typedef int seq_t[];

  // Entry Z[r+1, c+1] for a maze laid out for emax, narrowed to e.
  function automatic bit maze_bit(input seq_t r, input seq_t q,
                                  int e, int emax, int row, int col);
    int i, ofs, qi, m;
    m = r.size();
    i = row + 1;
    if (i <= emax) ofs = -i;
    else           ofs = i - emax - 1;
    if ((ofs < 0 ? -ofs : ofs) > e) return 1'b1;
    qi = col + ofs;
    if (qi < 0 || qi >= m) return 1'b1;
    return (r[col] != q[qi]);
  endfunction

  // Free run on one row from column cp, stopping at column lim.
  function automatic int run_len(input seq_t r, input seq_t q,
                                 int e, int emax, int row, int cp, int lim);
    int n = 0;
    while (cp + n < lim) begin
      if (cp + n < r.size() && maze_bit(r, q, e, emax, row, cp + n)) break;
      n++;
    end
    return n;
  endfunction

  // Obstacles counted in columns [lo, hi) with at most ylimit segments
  // (ylimit < 0: no limit). unres is set when the limit stopped the search.
  function automatic int region_count(input seq_t r, input seq_t q,
                                      int e, int emax, int lo, int hi,
                                      int ylimit, output bit unres);
    int cp = lo, cnt = 0, steps = 0, best, len;
    unres = 1'b0;
    while (cp < hi) begin
      if (ylimit >= 0 && steps == ylimit) begin
        unres = 1'b1;
        break;
      end
      best = 0;
      for (int row = 0; row < 2 * emax + 1; row++) begin
        len = run_len(r, q, e, emax, row, cp, hi);
        if (len > best) best = len;
      end
      steps++;
      if (cp + best >= hi) cp = hi;
      else begin
        cnt++;
        cp = cp + best + 1;
      end
    end
    return cnt;
  endfunction

  function automatic int chip_count(input seq_t r, input seq_t q,
                                    int e, int emax, int t, int y,
                                    output bit trunc);
    int m = r.size();
    int nsub = (m + t - 1) / t;
    int total = 0;
    bit u;
    trunc = 1'b0;
    for (int s = 0; s < nsub; s++) begin
      total += region_count(r, q, e, emax, s * t, s * t + t, y, u);
      trunc |= u;
    end
    return total;
  endfunction

  function automatic int full_count(input seq_t r, input seq_t q,
                                    int e, int emax);
    bit u;
    return region_count(r, q, e, emax, 0, r.size(), -1, u);
  endfunction

  function automatic int edit_distance(input seq_t a, input seq_t b);
    int n = a.size(), m = b.size();
    int prev[], cur[];
    prev = new[m + 1];
    cur  = new[m + 1];
    for (int j = 0; j <= m; j++) prev[j] = j;
    for (int i = 1; i <= n; i++) begin
      cur[0] = i;
      for (int j = 1; j <= m; j++) begin
        int best = prev[j-1] + ((a[i-1] == b[j-1]) ? 0 : 1);
        if (prev[j] + 1 < best)  best = prev[j] + 1;
        if (cur[j-1] + 1 < best) best = cur[j-1] + 1;
        cur[j] = best;
      end
      prev = cur;
    end
    return prev[m];
  endfunction

  // Random reference of length m; query = reference with nedit random edits,
  // then cut or padded with random bases back to length m.
  function automatic void rand_pair(int m, int nedit,
                                    output seq_t r, output seq_t q);
    int tmp[$];
    r = new[m];
    for (int i = 0; i < m; i++) r[i] = $urandom_range(3);
    tmp = {};
    for (int i = 0; i < m; i++) tmp.push_back(r[i]);
    for (int k = 0; k < nedit; k++) begin
      int kind = $urandom_range(2);
      int pos  = $urandom_range(tmp.size() - 1);
      case (kind)
        0: tmp[pos] = (tmp[pos] + 1 + $urandom_range(2)) % 4;
        1: tmp.insert(pos, $urandom_range(3));
        default: if (tmp.size() > 1) tmp.delete(pos);
      endcase
    end
    while (tmp.size() > m) tmp.pop_back();
    while (tmp.size() < m) tmp.push_back($urandom_range(3));
    q = new[m];
    for (int i = 0; i < m; i++) q[i] = tmp[i];
  endfunction

endpackage
