// cassandra_frontend_tb: end-to-end test of the frontend at its default sizes.
//
// Phase 1 runs the small two-block, three-round "toy AES" program three times: its branch
// sequence is produced by walking the program's loops (main -> encrypt -> Sbox), and every next
// PC the frontend gives must equal the branch's real successor. Calls with one target (into
// Sbox, into encrypt, and the return from encrypt) carry the single-target mark in their hint;
// the loop branches and the return from Sbox have recorded traces replayed by the BTU, with the
// pattern sets and compressed traces of the worked example (e.g. the Sbox return: pattern
// {back-to-loop x3, to-encrypt-tail x1}, repeated twice).
// Phase 2 mixes random multi-target crypto branches (long and short traces, entry conflicts),
// single-target and trace-less crypto branches, and non-crypto branches whose BPU prediction
// sometimes points into crypto code, with random commit delays, squashes and one flush.
// Checked: every next PC and its source, that crypto branches never enable the BPU lookup, that
// only non-crypto commits update the BPU, and that every mechanism occurred at least once.
module cassandra_frontend_tb;
  import cassandra_pkg::*;
  import trace_gen::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        csr_wr_en = 1'b0, csr_wr_idx = 1'b0, csr_wr_enable = 1'b0;
  logic [63:0] csr_wr_base = '0, csr_wr_limit = '0;
  logic        br_valid = 1'b0;
  logic [63:0] br_pc = '0;
  hint_t       br_hint = '0;
  logic        next_valid;
  logic [63:0] next_pc;
  next_src_e   next_src;
  logic        bpu_lookup_en, bpu_update_en;
  logic [63:0] bpu_next_pc = '0;
  logic        cm_valid = 1'b0, cm_from_btu = 1'b0;
  logic [63:0] cm_pc = '0;
  logic        squash = 1'b0, flush_req = 1'b0, flush_busy;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0] mem_req_addr, mem_req_wdata, mem_resp_rdata;
  logic        ev_miss, ev_evict, ev_prefetch, ev_wrap, ev_refresh, ev_integrity;

  always #5 clk = ~clk;

  cassandra_frontend dut (
    .clk, .rst_n, .csr_wr_en, .csr_wr_idx, .csr_wr_enable, .csr_wr_base, .csr_wr_limit,
    .br_valid, .br_pc, .br_hint, .next_valid, .next_pc, .next_src,
    .bpu_lookup_en, .bpu_next_pc, .bpu_update_en,
    .cm_valid, .cm_pc, .cm_from_btu, .squash, .flush_req, .flush_busy,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .ev_miss, .ev_evict, .ev_prefetch, .ev_wrap, .ev_refresh, .ev_integrity
  );

  trace_mem_model #(.LATENCY(4)) u_mem (
    .clk, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata
  );

  int checks = 0, failures = 0;
  int n_miss = 0, n_evict = 0, n_pf = 0, n_wrap = 0, n_refresh = 0, n_integrity = 0;
  int n_btu = 0, n_hint = 0, n_bpu = 0, n_resolve = 0, n_wait = 0, n_squash = 0, n_flush = 0;
  int n_bpu_upd = 0, toy_branches = 0;

  always @(posedge clk) begin
    if (ev_miss) n_miss++;
    if (ev_evict) n_evict++;
    if (ev_prefetch) n_pf++;
    if (ev_wrap) n_wrap++;
    if (ev_refresh) n_refresh++;
    if (ev_integrity) n_integrity++;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
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

  // ---------------------------------------------------------------- in-flight branches
  typedef struct {
    logic [63:0] pc;
    bit          from_btu;
    bit          crypto;
    int          model;     // index into the trace models, -1 if none
  } flight_t;
  flight_t     inflight [$];
  trace_branch models [$];

  localparam logic [63:0] CRYPTO_LO = 64'h0001_0000;
  localparam logic [63:0] CRYPTO_HI = 64'h0010_0000;

  function automatic bit is_crypto(logic [63:0] pc);
    return pc >= CRYPTO_LO && pc < CRYPTO_HI;
  endfunction

  // one commit, if any is waiting and the dice say so; call at a negedge
  task automatic maybe_commit(bit force_it);
    cm_valid = 1'b0;
    if (inflight.size() != 0 && (force_it || ($urandom % 3) != 0)) begin
      flight_t f;
      f = inflight.pop_front();
      cm_valid    = 1'b1;
      cm_pc       = f.pc;
      cm_from_btu = f.from_btu;
      if (f.model >= 0) models[f.model].commit_pos++;
      #1;
      check(bpu_update_en == !f.crypto, "only non-crypto commits update the BPU");
      if (bpu_update_en) n_bpu_upd++;
    end
  endtask

  // Present one branch until the frontend gives a next PC (or says to wait for resolution).
  // exp_src/exp_pc: expected answer; model >= 0 for a BTU branch.
  task automatic fetch_branch(logic [63:0] pc, hint_t hint, logic [63:0] bpu_pc,
                              next_src_e exp_src, logic [63:0] exp_pc, int model);
    int waited;
    waited = 0;
    forever begin
      @(negedge clk);
      maybe_commit(1'b0);
      br_valid    = 1'b1;
      br_pc       = pc;
      br_hint     = hint;
      bpu_next_pc = bpu_pc;
      #1;
      check(bpu_lookup_en == !is_crypto(pc), "crypto branches do not use the BPU");
      if (next_src == SRC_WAIT && exp_src == SRC_BTU) begin
        n_wait++;
        waited++;
        if (waited > 3000) begin
          check(1'b0, "BTU wait bounded");
          break;
        end
        continue;
      end
      check(next_src == exp_src, "next PC source");
      if (exp_src != SRC_RESOLVE) begin
        flight_t f;
        check(next_valid && next_pc == exp_pc, "next PC");
        f.pc = pc; f.from_btu = (exp_src == SRC_BTU); f.crypto = is_crypto(pc); f.model = model;
        inflight.push_back(f);
        if (model >= 0) models[model].fetch_pos++;
      end else begin
        check(!next_valid, "no next PC while waiting for resolution");
      end
      case (next_src)
        SRC_BTU:     n_btu++;
        SRC_HINT:    n_hint++;
        SRC_BPU:     n_bpu++;
        SRC_RESOLVE: n_resolve++;
        default: ;
      endcase
      break;
    end
    @(negedge clk);
    br_valid = 1'b0;
    maybe_commit(1'b0);
  endtask

  task automatic drain();
    while (inflight.size() != 0) begin
      @(negedge clk);
      maybe_commit(1'b1);
    end
    @(negedge clk);
    cm_valid = 1'b0;
  endtask

  function automatic hint_t single(logic [63:0] from, logic [63:0] to);
    hint_t h;
    h.single_target = 1'b1;
    h.offset        = 12'(to - from);
    h.short_trace   = 1'b0;
    return h;
  endfunction

  function automatic hint_t traced(trace_branch b);
    hint_t h;
    h.single_target = 1'b0;
    h.offset        = b.region;
    h.short_trace   = b.short_tr;
    return h;
  endfunction

  task automatic load_region(trace_branch b);
    for (int w = 0; w < b.nwords(); w++) u_mem.words[b.base() + 64'(w * 8)] = b.word(w);
  endtask

  // ---------------------------------------------------------------- toy AES program
  localparam logic [63:0] PC1 = 64'h1_0100, BR1 = 64'h1_0141, BR2 = 64'h1_0222,
                          BR3 = 64'h1_0243, PC3 = 64'h1_0200, PC4 = 64'h1_0280,
                          BR4 = 64'h1_02a4, BR5 = 64'h1_02e5, BR6 = 64'h1_0326,
                          BR7 = 64'h1_0347, PC7 = 64'h1_0380;
  int m_br1, m_br2, m_br6;

  task automatic toy_branch(logic [63:0] pc, logic [63:0] target);
    toy_branches++;
    if (pc == BR1)      fetch_branch(pc, traced(models[m_br1]), '0, SRC_BTU, target, m_br1);
    else if (pc == BR2) fetch_branch(pc, traced(models[m_br2]), '0, SRC_BTU, target, m_br2);
    else if (pc == BR6) fetch_branch(pc, traced(models[m_br6]), '0, SRC_BTU, target, m_br6);
    else                fetch_branch(pc, single(pc, target), '0, SRC_HINT, target, -1);
  endtask

  task automatic sbox(logic [63:0] ret);
    toy_branch(BR1, ret);                 // return
  endtask

  task automatic encrypt();
    for (int i = 0; i < 3; i++) begin
      toy_branch(BR2, BR3);               // loop body
      toy_branch(BR3, PC1);               // call Sbox
      sbox(BR2);
    end
    toy_branch(BR2, PC4);                 // loop exit
    toy_branch(BR4, PC1);                 // call Sbox
    sbox(BR5);
    toy_branch(BR5, BR6);                 // return to main
  endtask

  task automatic toy_main();
    for (int i = 0; i < 2; i++) begin
      toy_branch(BR6, BR7);
      toy_branch(BR7, PC3);               // call encrypt
      encrypt();
    end
    toy_branch(BR6, PC7);
  endtask

  function automatic logic [11:0] d(logic [63:0] from, logic [63:0] to);
    return 12'(to - from);
  endfunction

  // ---------------------------------------------------------------- stimulus
  initial begin
    trace_branch b;
    int rnd [$];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    csr_wr_en = 1'b1; csr_wr_idx = 1'b0; csr_wr_enable = 1'b1;
    csr_wr_base = CRYPTO_LO; csr_wr_limit = CRYPTO_HI;
    @(negedge clk);
    csr_wr_en = 1'b0;

    // toy AES traces: BR1 {C: BR2x3 . BR5x1} C x2 ; BR2 {G: BR3x3 . PC4x1} G x2 ;
    //                 BR6 {T: BR7x2 . PC7x1} T x1
    b = new(BR1, 12'h400, 1'b1); b.add_pattern(d(BR1, BR2), 3); b.add_pattern(d(BR1, BR5), 1);
    b.add_trace(0, 2, 2); m_br1 = models.size(); models.push_back(b); load_region(b);
    b = new(BR2, 12'h400, 1'b1); b.add_pattern(d(BR2, BR3), 3); b.add_pattern(d(BR2, PC4), 1);
    b.add_trace(0, 2, 2); m_br2 = models.size(); models.push_back(b); load_region(b);
    b = new(BR6, 12'h400, 1'b1); b.add_pattern(d(BR6, BR7), 2); b.add_pattern(d(BR6, PC7), 1);
    b.add_trace(0, 2, 1); m_br6 = models.size(); models.push_back(b); load_region(b);

    for (int run = 0; run < 3; run++) toy_main();
    drain();
    check(toy_branches == 3 * 31, "toy program branch count");
    $display("toy AES: %0d branches, btu=%0d hint=%0d misses=%0d", toy_branches, n_btu, n_hint,
             n_miss);

    // random phase
    for (int k = 0; k < 6; k++) begin
      b = new(64'h2_0000 + 64'(k * 64'h1000) + 64'(k % 3), 12'h100, k % 2 == 1);
      if (k % 2 == 1) b.randomize_trace(5, 1 + k * 2, 3);
      else            b.randomize_trace(14, 20 + k * 3, 3);
      rnd.push_back(models.size()); models.push_back(b); load_region(b);
    end
    for (int step = 0; step < 4000; step++) begin
      int kind;
      kind = int'($urandom % 10);
      if (step == 2000) begin
        drain();
        @(negedge clk); flush_req = 1'b1;
        @(negedge clk); flush_req = 1'b0;
        while (flush_busy) @(negedge clk);
        n_flush++;
      end
      if (step > 10 && $urandom % 120 == 0) begin
        @(negedge clk);
        cm_valid = 1'b0;
        squash = 1'b1;
        inflight.delete();
        foreach (models[m]) models[m].fetch_pos = models[m].commit_pos;
        n_squash++;
        @(negedge clk);
        squash = 1'b0;
      end
      if (kind < 6) begin
        int m;
        m = rnd[$urandom % rnd.size()];
        for (int r = 0; r < 1 + int'($urandom % 6); r++)
          fetch_branch(models[m].pc, traced(models[m]), '0, SRC_BTU,
                       models[m].expect_target(models[m].fetch_pos), m);
      end else if (kind == 6) begin
        logic [63:0] pc;
        pc = 64'h3_0000 + 64'($urandom % 4096);
        fetch_branch(pc, single(pc, pc + 64'h40), '0, SRC_HINT, pc + 64'h40, -1);
      end else if (kind == 7) begin
        hint_t h;
        h = '0;                          // multi-target, no trace: wait for resolution
        fetch_branch(64'h3_8000, h, '0, SRC_RESOLVE, '0, -1);
      end else if (kind == 8) begin
        logic [63:0] pc, tgt;
        pc  = 64'h0100_0000 + 64'($urandom % 4096);
        tgt = 64'h0200_0000 + 64'($urandom % 4096);
        fetch_branch(pc, '0, tgt, SRC_BPU, tgt, -1);
      end else begin
        logic [63:0] pc;
        pc = 64'h0100_0000 + 64'($urandom % 4096);
        fetch_branch(pc, '0, CRYPTO_LO + 64'h10, SRC_RESOLVE, '0, -1);   // integrity check
      end
    end
    drain();

    check(n_btu > 0 && n_hint > 0 && n_bpu > 0, "all next-PC sources used");
    check(n_resolve > 0, "stall until resolve happened");
    check(n_integrity > 0, "integrity check happened");
    check(n_wait > 0, "BTU miss stall happened");
    check(n_miss > 0, "BTU miss happened");
    check(n_evict > 0, "BTU eviction happened");
    check(n_pf > 0, "trace prefetch happened");
    check(n_wrap > 0, "End of Trace wrap happened");
    check(n_refresh > 0, "short-trace refresh happened");
    check(n_squash > 0, "squash recovery happened");
    check(n_flush > 0, "flush happened");
    check(n_bpu_upd > 0, "BPU update for non-crypto commit happened");
    $display("btu=%0d hint=%0d bpu=%0d resolve=%0d wait=%0d miss=%0d evict=%0d prefetch=%0d wrap=%0d refresh=%0d integrity=%0d squash=%0d flush=%0d",
             n_btu, n_hint, n_bpu, n_resolve, n_wait, n_miss, n_evict, n_pf, n_wrap, n_refresh,
             n_integrity, n_squash, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
