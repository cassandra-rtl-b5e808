// cassandra_workloads_tb: replays traces with the sizes of real constant-time crypto libraries
// through the whole frontend at its default sizes.
//
// The fifteen programs are BearSSL RSA-2048, EC_c25519, DES, AES-128, ChaCha20, Poly1305 and
// SHA-256; OpenSSL curve25519, chacha20 and sha256; Kyber-512/768 and three SPHINCS+ variants.
// For each program the table below gives the measured average and largest size of one static
// branch's compressed trace (pattern set plus trace elements). The branches' contents are not
// known, so each program is stood in for by four random branches:
// * one of the largest size;
// * three of the average size.
// Each branch's size is split into min(16, size/4) pattern elements and the rest as trace
// elements. A branch with fewer than 16 trace elements carries the short-trace mark.
// Each branch is replayed through its whole trace and past its End of Trace (or around its
// rotation several times), interleaved at random, with random commit delays. After that the
// resident short-trace branches run again, and this run must cause no memory read. A flush,
// as on a context switch, separates the programs.
// Checked: every next PC against the expanded trace, the lack of memory traffic for resident
// short traces, and that each program's long trace was prefetched and wrapped.
// Reported: cycles, lookups and BTU waits per program.
module cassandra_workloads_tb;
  import cassandra_pkg::*;
  import trace_gen::*;

  localparam int NPROG = 15;
  // average size x10 and largest size per static branch, in elements
  localparam int AVG10 [NPROG] = '{350, 79, 79, 76, 355, 149, 107, 43, 30, 258, 53, 56, 205, 245,
                                   246};
  localparam int MAXSZ [NPROG] = '{2312, 134, 34, 50, 561, 134, 70, 18, 3, 803, 24, 54, 348, 544,
                                   389};
  localparam string NAMES [NPROG] = '{"bearssl_rsa2048", "bearssl_ec_c25519", "bearssl_des",
    "bearssl_aes128", "bearssl_chacha20", "bearssl_poly1305", "bearssl_sha256",
    "openssl_curve25519", "openssl_chacha20", "openssl_sha256", "pqc_kyber512", "pqc_kyber768",
    "pqc_sphincs_shake_128s", "pqc_sphincs_haraka_128s", "pqc_sphincs_sha2_128s"};

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
  int n_pf = 0, n_wrap = 0, n_refresh = 0, n_wait = 0, n_lookup = 0;
  longint cycle = 0;

  always @(posedge clk) begin
    cycle++;
    if (ev_prefetch) n_pf++;
    if (ev_wrap) n_wrap++;
    if (ev_refresh) n_refresh++;
  end

  initial begin
    #50_000_000;
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

  trace_branch br [4];
  int          inflight [$];    // branch numbers of looked-up, uncommitted BTU branches

  task automatic maybe_commit(bit force_it);
    cm_valid = 1'b0;
    if (inflight.size() != 0 && (force_it || ($urandom % 3) != 0)) begin
      int k;
      k = inflight.pop_front();
      cm_valid    = 1'b1;
      cm_pc       = br[k].pc;
      cm_from_btu = 1'b1;
      br[k].commit_pos++;
    end
  endtask

  // one BTU lookup of branch k, retried while the BTU is loading its trace
  task automatic lookup(int k);
    hint_t h;
    h.single_target = 1'b0;
    h.offset        = br[k].region;
    h.short_trace   = br[k].short_tr;
    forever begin
      @(negedge clk);
      maybe_commit(1'b0);
      br_valid = 1'b1;
      br_pc    = br[k].pc;
      br_hint  = h;
      #1;
      if (next_src == SRC_WAIT) begin
        n_wait++;
        continue;
      end
      check(next_src == SRC_BTU, "BTU answers a crypto branch with a trace");
      check(next_valid && next_pc == br[k].expect_target(br[k].fetch_pos), "next PC");
      br[k].fetch_pos++;
      inflight.push_back(k);
      n_lookup++;
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

  function automatic trace_branch make_branch(int prog, int k, int size);
    trace_branch b;
    int np, nt;
    np = size / 4;
    if (np > 16) np = 16;
    if (np < 1) np = 1;
    nt = size - np;
    if (nt < 1) nt = 1;
    // entry index = low PC bits = k, regions 64 KiB apart inside the crypto range
    b = new(64'h0010_0000 + 64'(prog) * 64'h4_0000 + 64'(k) * 64'h1_0000 + 64'(k), 12'h100,
            nt < 16);
    b.randomize_trace(np, nt, 1);
    for (int w = 0; w < b.nwords(); w++) u_mem.words[b.base() + 64'(w * 8)] = b.word(w);
    return b;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    csr_wr_en = 1'b1; csr_wr_idx = 1'b0; csr_wr_enable = 1'b1;
    csr_wr_base = 64'h0010_0000; csr_wr_limit = 64'h0100_0000;
    @(negedge clk);
    csr_wr_en = 1'b0;

    for (int p = 0; p < NPROG; p++) begin
      int     goal [4];
      int     pf0, wrap0, wait0, look0, reads0;
      longint cyc0;
      bit     any_long, any_short;
      pf0 = n_pf; wrap0 = n_wrap; wait0 = n_wait; look0 = n_lookup; cyc0 = cycle;
      any_long = 1'b0; any_short = 1'b0;
      for (int k = 0; k < 4; k++) begin
        br[k] = make_branch(p, k, k == 0 ? MAXSZ[p] : (AVG10[p] + 5) / 10);
        // once through the whole trace and 20 outcomes past the End of Trace; short traces
        // go around their rotation three times
        goal[k] = br[k].short_tr ? 3 * br[k].seq.size() : br[k].seq.size() + 20;
        if (br[k].short_tr) any_short = 1'b1;
        else                any_long  = 1'b1;
      end
      forever begin
        int left [$];
        left.delete();
        for (int k = 0; k < 4; k++) if (br[k].fetch_pos < goal[k]) left.push_back(k);
        if (left.size() == 0) break;
        lookup(left[$urandom % left.size()]);
      end
      drain();

      // resident short traces replay with no memory traffic
      if (any_short) begin
        repeat (40) @(negedge clk);    // let a last prefetch of the long trace finish
        reads0 = u_mem.reads;
        for (int r = 0; r < 40; r++)
          for (int k = 0; k < 4; k++)
            if (br[k].short_tr) lookup(k);
        drain();
        check(u_mem.reads == reads0, "resident short traces read no memory");
      end
      if (any_long) begin
        check(n_pf > pf0, "long trace prefetched");
        check(n_wrap > wrap0, "long trace wrapped at End of Trace");
      end
      $display("%s max=%0d avg=%0d.%0d: %0d lookups in %0d cycles, %0d BTU waits",
               NAMES[p], MAXSZ[p], AVG10[p] / 10, AVG10[p] % 10, n_lookup - look0, cycle - cyc0,
               n_wait - wait0);

      // context switch to the next program
      @(negedge clk); flush_req = 1'b1;
      @(negedge clk); flush_req = 1'b0;
      while (flush_busy) @(negedge clk);
    end

    check(n_refresh > 0, "short-trace refresh happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
