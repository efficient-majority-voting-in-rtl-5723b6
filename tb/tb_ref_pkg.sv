// tb_ref_pkg: reference models used by the testbenches, written
// independently of the RTL: a plain count-and-compare majority vote and the
// cycle counts the architecture is specified to meet.
package tb_ref_pkg;

  function automatic int unsigned clog2i(input int unsigned n);
    int unsigned r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  function automatic int unsigned flog2i(input int unsigned n);
    int unsigned r = 0;
    while ((n >> (r + 1)) != 0) r++;
    return r;
  endfunction

  function automatic int unsigned popcount(input int unsigned v);
    int unsigned c = 0;
    for (int i = 0; i < 32; i++) c += (v >> i) & 1;
    return c;
  endfunction

  // class with the most votes; on a draw the highest class number
  function automatic int unsigned majority(input int votes[], input int unsigned k);
    int unsigned cnt[] = new[k];
    int unsigned best = 0;
    foreach (cnt[j]) cnt[j] = 0;
    foreach (votes[i]) if (votes[i] < k) cnt[votes[i]]++;
    for (int unsigned j = 0; j < k; j++) if (cnt[j] >= cnt[best]) best = j;
    return best;
  endfunction

  // largest class count
  function automatic int unsigned max_count(input int votes[], input int unsigned k);
    int unsigned cnt[] = new[k];
    int unsigned m = 0;
    foreach (cnt[j]) cnt[j] = 0;
    foreach (votes[i]) if (votes[i] < k) cnt[votes[i]]++;
    foreach (cnt[j]) if (cnt[j] > m) m = cnt[j];
    return m;
  endfunction

  // true when two or more classes share the largest count
  function automatic bit is_draw(input int votes[], input int unsigned k);
    int unsigned cnt[] = new[k];
    int unsigned m = max_count(votes, k);
    int unsigned n = 0;
    foreach (cnt[j]) cnt[j] = 0;
    foreach (votes[i]) if (votes[i] < k) cnt[votes[i]]++;
    foreach (cnt[j]) if (cnt[j] == m) n++;
    return n > 1;
  endfunction

  // cycles from in_valid to out_valid of the iterative majority decision:
  // ceil(log2 T) adder stages, one load cycle, one cycle per '1' bit of the
  // largest count and one more to drive every count negative
  function automatic int unsigned iter_latency(input int unsigned t, input int unsigned maxc);
    return clog2i(t) + popcount(maxc) + 2;
  endfunction

  // fixed latency of the pipelined majority decision
  function automatic int unsigned pipe_latency(input int unsigned t);
    return clog2i(t) + flog2i(t + 1) + 1;
  endfunction

endpackage
