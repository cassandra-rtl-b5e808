// branch_trace_unit_tb: self-checking test of the Branch Trace Unit against a reference
// expansion of each branch's trace.
//
// Five crypto branches with random pattern sets and traces (long ones that need prefetching,
// short ones that rotate in place, two pairs sharing a direct-mapped entry so they evict each
// other) are fetched in loop-like runs. Every target the BTU gives is compared with the branch's
// expanded outcome sequence at the fetch position; commits retire in order after random delays;
// random squashes return every fetch position to its commit position; one flush in the middle
// writes every checkpoint back, after which the branches must resume where they committed.
// A lookup of a resident, loaded branch must be answered in the cycle it is asked. The test also
// counts each mechanism (miss, eviction, prefetch, End-of-Trace wrap, short-trace refresh,
// squash, flush) and fails if one never happened.
module branch_trace_unit_tb;
  import cassandra_pkg::*;
  import trace_gen::*;

  localparam int NBR = 5;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        lk_valid = 1'b0, lk_short = 1'b0;
  logic [63:0] lk_pc = '0;
  logic [11:0] lk_region = '0;
  logic        lk_ready;
  logic [63:0] lk_target;
  logic        cm_valid = 1'b0;
  logic [63:0] cm_pc = '0;
  logic        squash = 1'b0, flush_req = 1'b0, flush_busy;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0] mem_req_addr, mem_req_wdata, mem_resp_rdata;
  logic        ev_miss, ev_evict, ev_prefetch, ev_wrap, ev_refresh, ev_wait;

  always #5 clk = ~clk;

  branch_trace_unit dut (
    .clk, .rst_n, .lk_valid, .lk_pc, .lk_region, .lk_short, .lk_ready, .lk_target,
    .cm_valid, .cm_pc, .squash, .flush_req, .flush_busy,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .ev_miss, .ev_evict, .ev_prefetch, .ev_wrap, .ev_refresh, .ev_wait
  );

  trace_mem_model #(.LATENCY(3)) u_mem (
    .clk, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata
  );

  int checks = 0, failures = 0;
  int n_miss = 0, n_evict = 0, n_pf = 0, n_wrap = 0, n_refresh = 0, n_squash = 0, n_flush = 0;
  int n_same_cycle = 0, n_hits = 0;

  always @(posedge clk) begin
    if (ev_miss) n_miss++;
    if (ev_evict) n_evict++;
    if (ev_prefetch) n_pf++;
    if (ev_wrap) n_wrap++;
    if (ev_refresh) n_refresh++;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  trace_branch br [NBR];
  int          inflight [$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int cur, run, waited, lookups;
    bit was_resident [NBR];
    // entry 0: br0 (long) and br2 (short) collide; entry 5: br3 (long) and br4 (long) collide
    br[0] = new(64'h0000_1000, 12'h100, 1'b0); br[0].randomize_trace(12, 37, 3);
    br[1] = new(64'h0001_2001, 12'h100, 1'b1); br[1].randomize_trace(6, 5, 2);
    br[2] = new(64'h0002_3000, 12'h100, 1'b1); br[2].randomize_trace(4, 15, 2);
    br[3] = new(64'h0003_4005, 12'h100, 1'b0); br[3].randomize_trace(16, 22, 4);
    br[4] = new(64'h0004_5005, 12'h100, 1'b0); br[4].randomize_trace(3, 18, 2);
    foreach (br[b])
      for (int w = 0; w < br[b].nwords(); w++) u_mem.words[br[b].base() + 64'(w * 8)] = br[b].word(w);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    cur = 0; run = 4; waited = 0; lookups = 0;
    for (int cyc = 0; cyc < 150000 && lookups < 6000; cyc++) begin
      @(negedge clk);
      lk_valid = 1'b0; cm_valid = 1'b0; squash = 1'b0; flush_req = 1'b0;
      // flush once, half way: commits drain while the BTU writes back
      if (lookups == 3000 && n_flush == 0) begin
        flush_req = 1'b1;
        @(negedge clk);
        flush_req = 1'b0;
        while (flush_busy || inflight.size() != 0) begin
          if (inflight.size() != 0) begin
            cm_valid = 1'b1; cm_pc = br[inflight[0]].pc;
            br[inflight[0]].commit_pos++; void'(inflight.pop_front());
          end
          @(negedge clk);
          cm_valid = 1'b0;
        end
        n_flush++;
        check(!dut.u_tc.st_valid, "flush leaves every entry invalid");
        continue;
      end
      if (cyc > 20 && $urandom % 150 == 0) begin
        squash = 1'b1;
        n_squash++;
        inflight.delete();
        foreach (br[b]) br[b].fetch_pos = br[b].commit_pos;
        continue;
      end
      if (inflight.size() != 0 && ($urandom % 3) != 0) begin
        cm_valid = 1'b1;
        cm_pc    = br[inflight[0]].pc;
        br[inflight[0]].commit_pos++;
        void'(inflight.pop_front());
      end
      lk_valid  = 1'b1;
      lk_pc     = br[cur].pc;
      lk_region = br[cur].region;
      lk_short  = br[cur].short_tr;
      if (waited == 0) begin
        // resident and the fetch position loaded: must answer this cycle
        was_resident[cur] = dut.u_tc.st_valid[lk_pc[3:0]] && !dut.u_tc.st_busy[lk_pc[3:0]] &&
                            dut.u_tc.st_tag[lk_pc[3:0]] == lk_pc &&
                            dut.u_tc.meta[lk_pc[3:0]].fptr < dut.u_tc.meta[lk_pc[3:0]].cnt;
      end
      #1;
      if (lk_ready) begin
        check(lk_target == br[cur].expect_target(br[cur].fetch_pos), "target");
        if (waited == 0 && was_resident[cur]) n_same_cycle++;
        n_hits++;
        br[cur].fetch_pos++;
        inflight.push_back(cur);
        lookups++;
        waited = 0;
        if (--run == 0) begin
          cur = int'($urandom % NBR);
          run = 1 + int'($urandom % 12);
        end
      end else begin
        if (waited == 0 && was_resident[cur]) check(1'b0, "resident lookup answered at once");
        waited++;
        check(waited < 2000, "lookup does not wait forever");
        if (waited >= 2000) break;
      end
    end
    @(negedge clk);
    lk_valid = 1'b0; cm_valid = 1'b0;

    check(lookups >= 6000, "all lookups done");
    check(n_same_cycle > 1000, "hits answered in the cycle asked");
    check(n_miss > 0, "miss happened");
    check(n_evict > 0, "eviction happened");
    check(n_pf > 0, "prefetch happened");
    check(n_wrap > 0, "End of Trace wrap happened");
    check(n_refresh > 0, "short-trace refresh happened");
    check(n_squash > 0, "squash happened");
    check(n_flush > 0, "flush happened");
    $display("lookups=%0d misses=%0d evictions=%0d prefetches=%0d wraps=%0d refresh=%0d squash=%0d flush=%0d same_cycle=%0d mem_reads=%0d mem_writes=%0d",
             lookups, n_miss, n_evict, n_pf, n_wrap, n_refresh, n_squash, n_flush, n_same_cycle,
             u_mem.reads, u_mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
