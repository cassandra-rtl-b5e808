// trace_cache_tb: plays the controller and the checkpoint table around the Trace Cache.
//
// Entry 3 holds a long trace (40 elements, filled 16 at a time and refilled element by element,
// End of Trace moving the tail back to 0); entry 9 holds a short trace of 5 elements that must
// rotate by itself. Random cycles look up, commit (with head-finished computed by counting
// outcomes), refill and squash (restoring from the committed position). Each lookup's element
// and position inside the pattern pass are compared with the trace expanded outcome by outcome;
// each commit's head element is compared too. Also checks that a lookup of a wrong tag misses.
module trace_cache_tb;
  import cassandra_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic [3:0]         lk_entry = '0, cm_entry = '0, fl_entry = '0, al_entry = '0;
  logic [3:0]         rs_entry = '0, inv_entry = '0;
  logic [63:0]        lk_tag = '0, cm_tag = '0, al_tag = '0, al_base = '0;
  logic               lk_hit, lk_ready, lk_consume = 1'b0;
  trace_elem_t        lk_elem, cm_head, cm_next, fl_elem = '0;
  logic [7:0]         lk_pos;
  logic               cm_resident, cm_next_known, cm_en = 1'b0, cm_head_done = 1'b0;
  logic [11:0]        cm_head_tix, cm_next_tix, fl_tail_next = '0, al_tail = '0;
  logic               fl_en = 1'b0, fl_append = 1'b0, al_en = 1'b0, al_short = 1'b0;
  logic               rs_all = 1'b0, rs_one = 1'b0, inv_en = 1'b0;
  logic [15:0]        ct_resume = '0;
  logic [15:0][7:0]   ct_lat_p = '0;
  logic [15:0][15:0]  ct_lat_t = '0;
  logic [15:0]        st_valid, st_busy, st_short;
  logic [15:0][4:0]   st_cnt;
  logic [15:0][11:0]  st_tail;
  logic [15:0][9:0]   st_inflight;
  logic [15:0][63:0]  st_base, st_tag;

  always #5 clk = ~clk;

  trace_cache dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference: per branch the trace and its outcomes (element, position, last-of-element)
  typedef struct { int elem; int pos; int t; bit last; } outcome_t;
  trace_elem_t tr   [2][$];
  outcome_t    outs [2][$];
  int          fpos [2], cpos [2];
  logic [3:0]  ent  [2];
  logic [63:0] tag  [2];

  function automatic outcome_t out_at(int b, int n);
    return outs[b][n % outs[b].size()];
  endfunction

  initial begin
    int lookups, commits, n_squash, tail;
    ent[0] = 4'd3; tag[0] = 64'h1_0003; ent[1] = 4'd9; tag[1] = 64'h2_0009;
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < (b == 0 ? 40 : 5); i++) begin
        trace_elem_t e;
        e.pidx = 4'($urandom); e.psize = 4'(1 + $urandom % 15);
        e.pcnt = 8'(1 + $urandom % 4); e.tcnt = 16'(1 + $urandom % 3);
        tr[b].push_back(e);
        for (int t = 0; t < int'(e.tcnt); t++)
          for (int p = 0; p < int'(e.pcnt); p++) begin
            outcome_t o;
            o.elem = i; o.pos = p; o.t = t; o.last = (t == int'(e.tcnt) - 1 && p == int'(e.pcnt) - 1);
            outs[b].push_back(o);
          end
      end
      fpos[b] = 0; cpos[b] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // allocate and fill both entries
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      al_en = 1'b1; al_entry = ent[b]; al_tag = tag[b]; al_base = 64'h100 * 64'(b);
      al_short = (b == 1); al_tail = '0;
      @(negedge clk);
      al_en = 1'b0;
      for (int i = 0; i < (b == 0 ? 16 : 5); i++) begin
        fl_en = 1'b1; fl_entry = ent[b]; fl_append = 1'b1; fl_elem = tr[b][i];
        fl_tail_next = 12'(i + 1);
        @(negedge clk);
      end
      fl_en = 1'b0;
      lk_entry = ent[b]; lk_tag = tag[b];
      #1 check(!lk_hit, "busy entry does not hit");
      rs_one = 1'b1; rs_entry = ent[b];
      @(negedge clk);
      rs_one = 1'b0;
    end
    lk_entry = ent[0]; lk_tag = tag[0] ^ 64'h100;
    #1 check(!lk_hit, "wrong tag misses");
    tail = 16;
    lookups = 0; commits = 0; n_squash = 0;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      int b, c;
      @(negedge clk);
      lk_consume = 1'b0; cm_en = 1'b0; fl_en = 1'b0; rs_all = 1'b0;
      if ($urandom % 200 == 0) begin
        // squash: restore both entries to their committed positions
        for (int k = 0; k < 2; k++) begin
          outcome_t o;
          fpos[k] = cpos[k];
          o = out_at(k, cpos[k]);
          ct_resume[ent[k]] = !(o.pos == 0 && o.t == 0);
          ct_lat_p[ent[k]]  = 8'(int'(tr[k][o.elem].pcnt) - o.pos);
          ct_lat_t[ent[k]]  = 16'(int'(tr[k][o.elem].tcnt) - o.t);
        end
        rs_all = 1'b1;
        n_squash++;
        continue;
      end
      // lookup
      b = int'($urandom % 2);
      lk_entry = ent[b]; lk_tag = tag[b];
      // commit
      c = int'($urandom % 2);
      cm_entry = ent[c]; cm_tag = tag[c];
      #1;
      if (lk_ready && $urandom % 4 != 0) begin
        outcome_t o;
        o = out_at(b, fpos[b]);
        check(lk_hit, "hit");
        check(lk_elem == tr[b][o.elem] && int'(lk_pos) == o.pos, "lookup element and position");
        lk_consume = 1'b1;
        fpos[b]++;
        lookups++;
      end
      if (cpos[c] < fpos[c]) begin
        outcome_t o;
        o = out_at(c, cpos[c]);
        check(cm_resident && cm_head == tr[c][o.elem], "commit head element");
        cm_en = 1'b1;
        cm_head_done = o.last;
        cpos[c]++;
        commits++;
      end
      // refill the long trace like the controller would
      if (st_cnt[ent[0]] < 5'd16) begin
        fl_en = 1'b1; fl_entry = ent[0];
        if (tail == 40) begin
          fl_append = 1'b0; fl_tail_next = '0; tail = 0;
        end else begin
          fl_append = 1'b1; fl_elem = tr[0][tail]; fl_tail_next = 12'(tail + 1); tail++;
        end
      end
    end
    @(negedge clk);
    lk_consume = 1'b0; cm_en = 1'b0; fl_en = 1'b0;
    check(lookups > 10000, "lookups kept flowing");
    check(cpos[0] > outs[0].size() && cpos[1] > 3 * outs[1].size(), "traces wrapped and rotated");
    check(n_squash > 0, "squashes happened");
    $display("lookups=%0d commits=%0d squashes=%0d", lookups, commits, n_squash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
