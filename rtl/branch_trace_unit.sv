// branch_trace_unit: the Branch Trace Unit (BTU), which replays the recorded sequential
// outcomes of multi-target crypto branches instead of predicting them.
//
// It ties together the Pattern Table (pattern sets), the Trace Cache (trace windows and the
// fetch-side position) and the Checkpoint Table (committed position), all direct-mapped on the
// low branch-PC bits, and adds the controller that moves traces between them and memory.
//
//  * Lookup (fetch flow): lk_valid with the branch PC. If the branch is resident and its fetch
//    position is loaded, lk_ready rises in the same cycle with lk_target = PC + pattern offset,
//    and the position advances at the clock edge. Otherwise fetch holds the request; a branch
//    that is not resident starts a miss. While not ready the frontend must not redirect: there
//    is no fall-back to prediction.
//  * Miss: the direct-mapped victim waits until it has no looked-up, uncommitted instances,
//    then its checkpoint word is written back to its trace region and it is invalidated. The new
//    branch's checkpoint, its 16 pattern elements and its trace elements (from the checkpointed
//    trace index, wrapping at End of Trace) are read in, and the live counters are set from the
//    checkpoint. A short trace is read whole; a long trace fills the 16 slots.
//  * Prefetch: whenever a resident long trace has an empty slot, the next trace element is read
//    from memory and appended (End of Trace wraps to element 0).
//  * Commit: cm_valid with the PC of a committed branch whose target came from the BTU.
//  * Squash: every fetch-side position returns to the committed checkpoint.
//  * Flush (context switch between crypto programs): every entry's checkpoint is written back and
//    the entry invalidated; flush_busy is high until done.
// Memory port: one request at a time, valid/ready, 64-bit words at byte addresses; a read
// returns exactly one mem_resp_valid later. The region of a branch starts at PC + (hint offset
// << 6). The 16 x 16 table sizes, element formats, commit/shift/refresh/checkpoint behaviour
// and the stall on a miss follow the design; the replacement is direct-mapped (see the README:
// the description names both direct-mapped tables and LRU), and the waiting for in-flight
// instances before eviction, the memory layout and the handshake are this design's choices.
module branch_trace_unit
  import cassandra_pkg::*;
#(
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned ELEMS      = 16,
  parameter int unsigned PC_W       = 64,
  parameter int unsigned INFLIGHT_W = 10,
  localparam int unsigned EW        = $clog2(ENTRIES),
  localparam int unsigned SW        = $clog2(ELEMS),
  localparam int unsigned CW        = $clog2(ELEMS) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // fetch lookup
  input  logic               lk_valid,
  input  logic [PC_W-1:0]    lk_pc,
  input  logic [HOFF_W-1:0]  lk_region,     // trace region offset from the branch hint
  input  logic               lk_short,      // short-trace mark from the branch hint
  output logic               lk_ready,
  output logic [PC_W-1:0]    lk_target,
  // commit
  input  logic               cm_valid,
  input  logic [PC_W-1:0]    cm_pc,
  // squash / flush
  input  logic               squash,
  input  logic               flush_req,
  output logic               flush_busy,
  // memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [PC_W-1:0]    mem_req_addr,
  output logic [MEM_W-1:0]   mem_req_wdata,
  input  logic               mem_resp_valid,
  input  logic [MEM_W-1:0]   mem_resp_rdata,
  // event pulses (for performance counters)
  output logic               ev_miss,
  output logic               ev_evict,
  output logic               ev_prefetch,
  output logic               ev_wrap,
  output logic               ev_refresh,
  output logic               ev_wait
);

  typedef enum logic [3:0] {
    S_IDLE, S_EV_WAIT, S_EV_WB, S_ALLOC, S_CK_REQ, S_CK_WAIT, S_PAT_REQ, S_PAT_WAIT,
    S_TR_REQ, S_TR_WAIT, S_RESTORE, S_PF_REQ, S_PF_WAIT, S_FLUSH
  } state_e;

  state_e              state;
  logic [EW-1:0]       tgt;          // entry being evicted / loaded / prefetched / flushed
  logic [PC_W-1:0]     ld_pc;
  logic [PC_W-1:0]     ld_base;
  logic                ld_short;
  logic [SW:0]         pat_k;
  logic [TIDX_W-1:0]   start_tix;
  logic                wrapped;
  logic                flushing;

  // ------------------------------------------------------------ sub-blocks
  logic                lk_hit, tc_ready;
  trace_elem_t         lk_elem;
  logic [PCNT_W-1:0]   lk_pos;
  logic [DELTA_W-1:0]  pt_delta;
  logic                pt_found;
  logic                cm_resident, cm_next_known, cm_head_done, cm_en;
  trace_elem_t         cm_head, cm_next;
  logic [TIDX_W-1:0]   cm_head_tix, cm_next_tix;
  logic                fl_en, fl_append, al_en, rs_one, inv_en, ck_ld_en, pt_wr_en;
  trace_elem_t         fl_elem;
  logic [TIDX_W-1:0]   fl_tail_next;
  logic [ENTRIES-1:0]  st_valid, st_busy, st_short;
  logic [ENTRIES-1:0][CW-1:0]         st_cnt;
  logic [ENTRIES-1:0][TIDX_W-1:0]     st_tail;
  logic [ENTRIES-1:0][INFLIGHT_W-1:0] st_inflight;
  logic [ENTRIES-1:0][PC_W-1:0]       st_base, st_tag;
  logic [ENTRIES-1:0]                 nx_resume;
  logic [ENTRIES-1:0][PCNT_W-1:0]     nx_lat_p;
  logic [ENTRIES-1:0][TCNT_W-1:0]     nx_lat_t;
  logic [MEM_W-1:0]    ck_rd_word;

  wire [EW-1:0] lk_entry = lk_pc[EW-1:0];
  wire [EW-1:0] cm_entry = cm_pc[EW-1:0];

  trace_cache #(.ENTRIES(ENTRIES), .ELEMS(ELEMS), .PC_W(PC_W), .INFLIGHT_W(INFLIGHT_W)) u_tc (
    .clk, .rst_n,
    .lk_entry, .lk_tag(lk_pc), .lk_hit, .lk_ready(tc_ready), .lk_elem, .lk_pos,
    .lk_consume(lk_valid && lk_ready),
    .cm_entry, .cm_tag(cm_pc), .cm_resident, .cm_head, .cm_head_tix, .cm_next_known, .cm_next,
    .cm_next_tix, .cm_en, .cm_head_done,
    .fl_en, .fl_entry(tgt), .fl_append, .fl_elem, .fl_tail_next,
    .al_en, .al_entry(tgt), .al_tag(ld_pc), .al_base(ld_base), .al_short(ld_short),
    .al_tail('0),
    .rs_all(squash), .rs_one, .rs_entry(tgt), .ct_resume(nx_resume), .ct_lat_p(nx_lat_p),
    .ct_lat_t(nx_lat_t),
    .inv_en, .inv_entry(tgt),
    .st_valid, .st_busy, .st_short, .st_cnt, .st_tail, .st_inflight, .st_base, .st_tag
  );

  pattern_table #(.ENTRIES(ENTRIES), .ELEMS(ELEMS)) u_pt (
    .clk,
    .wr_en(pt_wr_en), .wr_entry(tgt), .wr_slot(pat_k[SW-1:0]),
    .wr_data(pattern_elem_t'(mem_resp_rdata[$bits(pattern_elem_t)-1:0])),
    .rd_entry(lk_entry), .rd_pidx(lk_elem.pidx), .rd_psize(lk_elem.psize), .rd_pos(lk_pos),
    .rd_delta(pt_delta), .rd_found(pt_found)
  );

  checkpoint_table #(.ENTRIES(ENTRIES)) u_ct (
    .clk, .rst_n,
    .cm_en, .cm_entry, .cm_head, .cm_head_tix, .cm_next_known, .cm_next, .cm_next_tix,
    .cm_head_done,
    .ld_en(ck_ld_en), .ld_entry(tgt), .ld_word(mem_resp_rdata),
    .rd_entry(tgt), .rd_word(ck_rd_word),
    .nx_resume, .nx_lat_p, .nx_lat_t
  );

  // ------------------------------------------------------------ lookup and commit
  assign lk_ready  = tc_ready && pt_found;
  assign lk_target = lk_pc + PC_W'($signed(pt_delta));
  assign cm_en     = cm_valid && cm_resident;

  // ------------------------------------------------------------ prefetch candidate
  logic          pf_any;
  logic [EW-1:0] pf_entry;
  always_comb begin
    pf_any   = 1'b0;
    pf_entry = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (st_valid[e] && !st_busy[e] && !st_short[e] && st_cnt[e] < CW'(ELEMS)) begin
        pf_any   = 1'b1;
        pf_entry = EW'(e);
      end
    end
  end

  // ------------------------------------------------------------ memory request
  trace_elem_t resp_elem;
  assign resp_elem = trace_elem_t'(mem_resp_rdata[$bits(trace_elem_t)-1:0]);

  function automatic logic [PC_W-1:0] word_addr(logic [PC_W-1:0] base, int unsigned w);
    return base + PC_W'(w * 8);
  endfunction

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = ck_rd_word;
    unique case (state)
      S_EV_WB: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = word_addr(st_base[tgt], MEM_CKPT_WORD);
      end
      S_CK_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = word_addr(ld_base, MEM_CKPT_WORD);
      end
      S_PAT_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = word_addr(ld_base, MEM_PAT_WORD + int'(pat_k));
      end
      S_TR_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = word_addr(ld_base, MEM_TRACE_WORD + int'(st_tail[tgt]));
      end
      S_PF_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = word_addr(st_base[tgt], MEM_TRACE_WORD + int'(st_tail[tgt]));
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ controller
  logic miss_now;
  assign miss_now = lk_valid && !lk_hit;

  // Done with a trace load after this response?
  logic tr_eot, tr_done;
  always_comb begin
    logic [CW-1:0]     cnt_after;
    logic [TIDX_W-1:0] tail_after;
    tr_eot     = is_eot(resp_elem);
    cnt_after  = st_cnt[tgt] + (tr_eot ? CW'(0) : CW'(1));
    tail_after = tr_eot ? '0 : st_tail[tgt] + 1'b1;
    if (cnt_after == CW'(ELEMS))
      tr_done = 1'b1;
    else if (ld_short)
      tr_done = (wrapped || tr_eot) && tail_after == start_tix;
    else
      tr_done = 1'b0;
    // an empty trace (End of Trace at index 0, twice) ends the load too
    if (tr_eot && wrapped && st_tail[tgt] == '0 && cnt_after == '0) tr_done = 1'b1;
  end

  always_comb begin
    fl_en        = 1'b0;
    fl_append    = 1'b0;
    fl_elem      = resp_elem;
    fl_tail_next = '0;
    al_en        = (state == S_ALLOC);
    rs_one       = (state == S_RESTORE);
    inv_en       = (state == S_EV_WB) && mem_req_ready;
    ck_ld_en     = (state == S_CK_WAIT) && mem_resp_valid;
    pt_wr_en     = (state == S_PAT_WAIT) && mem_resp_valid;
    if (state == S_CK_WAIT && mem_resp_valid) begin
      fl_en        = 1'b1;            // the trace load starts at the checkpointed index
      fl_tail_next = mem_resp_rdata[$bits(ckpt_elem_t)-1 -: TIDX_W];
    end
    if ((state == S_TR_WAIT || state == S_PF_WAIT) && mem_resp_valid) begin
      fl_en        = 1'b1;
      fl_append    = !is_eot(resp_elem);
      fl_tail_next = is_eot(resp_elem) ? '0 : st_tail[tgt] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tgt       <= '0;
      ld_pc     <= '0;
      ld_base   <= '0;
      ld_short  <= 1'b0;
      pat_k     <= '0;
      start_tix <= '0;
      wrapped   <= 1'b0;
      flushing  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (flush_req) begin
            flushing <= 1'b1;
            tgt      <= '0;
            state    <= S_FLUSH;
          end else if (miss_now) begin
            tgt      <= lk_entry;
            ld_pc    <= lk_pc;
            ld_base  <= lk_pc + (PC_W'(lk_region) << REGION_SHIFT);
            ld_short <= lk_short;
            state    <= st_valid[lk_entry] ? S_EV_WAIT : S_ALLOC;
          end else if (pf_any) begin
            tgt   <= pf_entry;
            state <= S_PF_REQ;
          end
        end
        S_EV_WAIT: if (st_inflight[tgt] == '0) state <= S_EV_WB;
        S_EV_WB: if (mem_req_ready) state <= flushing ? S_FLUSH : S_ALLOC;
        S_ALLOC: state <= S_CK_REQ;
        S_CK_REQ: if (mem_req_ready) state <= S_CK_WAIT;
        S_CK_WAIT: if (mem_resp_valid) begin
          start_tix <= mem_resp_rdata[$bits(ckpt_elem_t)-1 -: TIDX_W];
          wrapped   <= 1'b0;
          pat_k     <= '0;
          state     <= S_PAT_REQ;
        end
        S_PAT_REQ: if (mem_req_ready) state <= S_PAT_WAIT;
        S_PAT_WAIT: if (mem_resp_valid) begin
          pat_k <= pat_k + 1'b1;
          state <= (pat_k == (SW+1)'(ELEMS - 1)) ? S_TR_REQ : S_PAT_REQ;
        end
        S_TR_REQ: if (mem_req_ready) state <= S_TR_WAIT;
        S_TR_WAIT: if (mem_resp_valid) begin
          if (tr_eot) wrapped <= 1'b1;
          state <= tr_done ? S_RESTORE : S_TR_REQ;
        end
        S_RESTORE: state <= S_IDLE;
        S_PF_REQ: if (mem_req_ready) state <= S_PF_WAIT;
        S_PF_WAIT: if (mem_resp_valid) state <= S_IDLE;
        S_FLUSH: begin
          // tgt is the next entry to examine; after an entry is written back we come back here
          if (st_valid[tgt]) begin
            state <= S_EV_WAIT;
          end else if (tgt == EW'(ENTRIES - 1)) begin
            flushing <= 1'b0;
            state    <= S_IDLE;
          end else begin
            tgt <= tgt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign flush_busy = flushing;

  // ------------------------------------------------------------ events
  assign ev_miss     = (state == S_IDLE) && !flush_req && miss_now;
  assign ev_evict    = inv_en;
  assign ev_prefetch = (state == S_PF_WAIT) && mem_resp_valid && !is_eot(resp_elem);
  assign ev_wrap     = (state == S_PF_WAIT || state == S_TR_WAIT) && mem_resp_valid &&
                       is_eot(resp_elem);
  assign ev_refresh  = cm_en && cm_head_done && st_short[cm_entry];
  assign ev_wait     = lk_valid && !lk_ready;

  // ------------------------------------------------------------ rules of the interfaces
  // A committed BTU branch is always resident: eviction waits for its in-flight instances.
  a_commit_resident: assert property (@(posedge clk) disable iff (!rst_n)
    cm_valid |-> cm_resident);
  // A memory request is held until accepted.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
