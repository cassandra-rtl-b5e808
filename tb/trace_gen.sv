// trace_gen: testbench reference model of one static crypto branch's recorded trace.
//
// It builds a random pattern set and a trace of pattern references, writes the branch's trace
// region words (checkpoint word, 16 pattern elements, trace elements, End of Trace) and expands
// the trace into the plain sequence of target offsets the branch takes, one per execution,
// repeating forever. Positions are kept for fetch (looked up) and commit (retired), so a squash
// returns fetch to commit. Deltas may also be given by hand (set_* functions) for fixed examples.
package trace_gen;
  import cassandra_pkg::*;

  class trace_branch;
    logic [63:0]   pc;
    logic [11:0]   region;
    bit            short_tr;
    int            npat;
    pattern_elem_t pats [16];
    trace_elem_t   tr [$];
    int            seq [$];
    int            fetch_pos;
    int            commit_pos;

    function new(logic [63:0] pc_i, logic [11:0] region_i, bit short_i);
      pc         = pc_i;
      region     = region_i;
      short_tr   = short_i;
      npat       = 0;
      fetch_pos  = 0;
      commit_pos = 0;
      for (int k = 0; k < 16; k++) pats[k] = '0;
    endfunction

    // random pattern set of n elements and a trace of ntr elements
    function void randomize_trace(int n, int ntr, int max_t);
      npat = n;
      for (int k = 0; k < n; k++) begin
        pats[k].delta = 12'(2 + ($urandom % 200) * 4);
        if ($urandom % 2 == 1) pats[k].delta = 12'(-int'(pats[k].delta));
        pats[k].reps  = 8'(1 + $urandom % 3);
      end
      tr.delete();
      for (int i = 0; i < ntr; i++) begin
        trace_elem_t e;
        int          sz, sum;
        e.pidx  = 4'($urandom % n);
        sz      = 1 + int'($urandom % 4);
        if (sz > n - int'(e.pidx)) sz = n - int'(e.pidx);
        e.psize = 4'(sz);
        sum = 0;
        for (int j = 0; j < sz; j++) sum += int'(pats[int'(e.pidx) + j].reps);
        e.pcnt = 8'(sum);
        e.tcnt = 16'(1 + $urandom % max_t);
        tr.push_back(e);
      end
      expand();
    endfunction

    function void add_pattern(logic [11:0] delta, int reps);
      pats[npat].delta = delta;
      pats[npat].reps  = 8'(reps);
      npat++;
    endfunction

    function void add_trace(int pidx, int psize, int times);
      trace_elem_t e;
      int sum;
      sum = 0;
      for (int j = 0; j < psize; j++) sum += int'(pats[pidx + j].reps);
      e.pidx = 4'(pidx); e.psize = 4'(psize); e.pcnt = 8'(sum); e.tcnt = 16'(times);
      tr.push_back(e);
      expand();
    endfunction

    function void expand();
      seq.delete();
      foreach (tr[i])
        for (int t = 0; t < int'(tr[i].tcnt); t++)
          for (int j = 0; j < int'(tr[i].psize); j++)
            for (int r = 0; r < int'(pats[int'(tr[i].pidx) + j].reps); r++)
              seq.push_back(int'($signed(pats[int'(tr[i].pidx) + j].delta)));
    endfunction

    function logic [63:0] base();
      return pc + (64'(region) << 6);
    endfunction

    // word w of the trace region (w = 0: checkpoint, 1..16 patterns, 17.. trace, then EOT)
    function logic [63:0] word(int w);
      if (w == 0) return 64'd0;
      if (w <= 16) return 64'(pats[w-1]);
      if (w - 17 < tr.size()) return 64'(tr[w-17]);
      return 64'd0;
    endfunction

    function int nwords();
      return 17 + tr.size() + 1;
    endfunction

    function logic [63:0] expect_target(int pos);
      return pc + 64'(longint'(seq[pos % seq.size()]));
    endfunction
  endclass

endpackage
