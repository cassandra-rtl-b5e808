// trace_cache: the Trace Cache (TC) of the Branch Trace Unit.
//
// One direct-mapped entry per resident static branch, each a window of ELEMS trace elements
// (pattern index, pattern size, pattern counter, trace counter). The first slot is the head: the
// element the committed program is in. Fetch walks ahead of commit:
//   * Lookup: the slot at the fetch pointer gives the pattern and the position inside the current
//     pass of it (original pattern counter minus live pattern counter). Consuming a lookup
//     decrements the live pattern counter; at zero it is reloaded and the live trace counter is
//     decremented; when that reaches zero the fetch pointer moves to the next slot. If the fetch
//     pointer has run past the loaded slots the lookup is not ready and fetch waits.
//   * Commit: when the checkpoint table reports that the head element is finished, the window
//     shifts by one. A short trace (whole trace resident) re-inserts a fresh copy of the removed
//     element at the back, so the entry rotates; a long trace leaves the back slot empty for the
//     controller to prefetch the next element from memory.
//   * Restore (ROB squash, or end of a load): the head's live counters are taken from the
//     checkpoint table's committed counters and every other slot from its original values; the
//     fetch pointer returns to the head.
// Operations in one cycle are applied in the order consume, commit shift, fill, restore, so they
// may all hit the same entry. Every slot keeps its element as loaded next to the live counters;
// this copy (and the per-slot trace index, the tag, the region base, the in-flight count) is this
// design's own bookkeeping, not part of the 32-bit element of the design. Reads are
// combinational; all updates happen at the clock edge. Reset (synchronous, active low) clears valid bits and counts.
module trace_cache
  import cassandra_pkg::*;
#(
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned ELEMS      = 16,
  parameter int unsigned PC_W       = 64,
  parameter int unsigned INFLIGHT_W = 10,
  localparam int unsigned EW        = $clog2(ENTRIES),
  localparam int unsigned CW        = $clog2(ELEMS) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // fetch lookup
  input  logic [EW-1:0]                 lk_entry,
  input  logic [PC_W-1:0]               lk_tag,
  output logic                          lk_hit,
  output logic                          lk_ready,
  output trace_elem_t                   lk_elem,
  output logic [PCNT_W-1:0]             lk_pos,
  input  logic                          lk_consume,
  // commit
  input  logic [EW-1:0]                 cm_entry,
  input  logic [PC_W-1:0]               cm_tag,
  output logic                          cm_resident,
  output trace_elem_t                   cm_head,
  output logic [TIDX_W-1:0]             cm_head_tix,
  output logic                          cm_next_known,
  output trace_elem_t                   cm_next,
  output logic [TIDX_W-1:0]             cm_next_tix,
  input  logic                          cm_en,
  input  logic                          cm_head_done,
  // fill from memory (append, or just move the tail on End of Trace)
  input  logic                          fl_en,
  input  logic [EW-1:0]                 fl_entry,
  input  logic                          fl_append,
  input  trace_elem_t                   fl_elem,
  input  logic [TIDX_W-1:0]             fl_tail_next,
  // allocate an entry for a new branch (it stays busy until restored)
  input  logic                          al_en,
  input  logic [EW-1:0]                 al_entry,
  input  logic [PC_W-1:0]               al_tag,
  input  logic [PC_W-1:0]               al_base,
  input  logic                          al_short,
  input  logic [TIDX_W-1:0]             al_tail,
  // restore live counters from the checkpoint table
  input  logic                          rs_all,
  input  logic                          rs_one,
  input  logic [EW-1:0]                 rs_entry,
  input  logic [ENTRIES-1:0]            ct_resume,
  input  logic [ENTRIES-1:0][PCNT_W-1:0] ct_lat_p,
  input  logic [ENTRIES-1:0][TCNT_W-1:0] ct_lat_t,
  // invalidate
  input  logic                          inv_en,
  input  logic [EW-1:0]                 inv_entry,
  // entry status for the controller
  output logic [ENTRIES-1:0]            st_valid,
  output logic [ENTRIES-1:0]            st_busy,
  output logic [ENTRIES-1:0]            st_short,
  output logic [ENTRIES-1:0][CW-1:0]    st_cnt,
  output logic [ENTRIES-1:0][TIDX_W-1:0] st_tail,
  output logic [ENTRIES-1:0][INFLIGHT_W-1:0] st_inflight,
  output logic [ENTRIES-1:0][PC_W-1:0]  st_base,
  output logic [ENTRIES-1:0][PC_W-1:0]  st_tag
);

  typedef struct packed {
    trace_elem_t         orig;  // element as loaded
    logic [TIDX_W-1:0]   tix;   // its index in the whole trace
    logic [PCNT_W-1:0]   p;     // live pattern counter
    logic [TCNT_W-1:0]   t;     // live trace counter
  } slot_t;

  typedef struct packed {
    logic                  valid;
    logic                  busy;
    logic                  short_tr;
    logic [PC_W-1:0]       tag;
    logic [PC_W-1:0]       base;
    logic [CW-1:0]         cnt;      // loaded slots
    logic [CW-1:0]         fptr;     // fetch pointer (== cnt: ran past the loaded slots)
    logic [TIDX_W-1:0]     tail;     // trace index of the next element to load
    logic [INFLIGHT_W-1:0] inflight; // looked up, not yet committed
  } meta_t;

  meta_t meta  [ENTRIES];
  slot_t slots [ENTRIES][ELEMS];

  // ---------------------------------------------------------------- lookup
  always_comb begin
    meta_t m;
    slot_t s;
    m        = meta[lk_entry];
    s        = slots[lk_entry][m.fptr[CW-2:0]];
    lk_hit   = m.valid && !m.busy && (m.tag == lk_tag);
    lk_ready = lk_hit && (m.fptr < m.cnt);
    lk_elem  = s.orig;
    lk_pos   = s.orig.pcnt - s.p;
  end

  // ---------------------------------------------------------------- commit view
  always_comb begin
    meta_t m;
    m             = meta[cm_entry];
    cm_resident   = m.valid && !m.busy && (m.tag == cm_tag) && (m.cnt != '0);
    cm_head       = slots[cm_entry][0].orig;
    cm_head_tix   = slots[cm_entry][0].tix;
    if (m.cnt >= CW'(2)) begin
      cm_next_known = 1'b1;
      cm_next       = slots[cm_entry][1].orig;
      cm_next_tix   = slots[cm_entry][1].tix;
    end else if (m.short_tr) begin
      cm_next_known = 1'b1;            // a one-element short trace repeats itself
      cm_next       = slots[cm_entry][0].orig;
      cm_next_tix   = slots[cm_entry][0].tix;
    end else begin
      cm_next_known = 1'b0;            // still to be prefetched
      cm_next       = '0;
      cm_next_tix   = m.tail;
    end
  end

  // ---------------------------------------------------------------- status
  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      st_valid[e]    = meta[e].valid;
      st_busy[e]     = meta[e].busy;
      st_short[e]    = meta[e].short_tr;
      st_cnt[e]      = meta[e].cnt;
      st_tail[e]     = meta[e].tail;
      st_inflight[e] = meta[e].inflight;
      st_base[e]     = meta[e].base;
      st_tag[e]      = meta[e].tag;
    end
  end

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        meta[e] <= '0;
      end
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        meta_t m;
        slot_t s [ELEMS];
        slot_t head;
        logic  squash_now;
        m = meta[e];
        for (int k = 0; k < ELEMS; k++) s[k] = slots[e][k];
        squash_now = rs_all || (rs_one && EW'(e) == rs_entry);

        // 1. fetch consumes one outcome of the slot at the fetch pointer
        if (lk_consume && lk_ready && EW'(e) == lk_entry && !squash_now) begin
          slot_t c;
          c = s[m.fptr[CW-2:0]];
          c.p = c.p - 1'b1;
          if (c.p == '0) begin
            c.t = c.t - 1'b1;
            c.p = c.orig.pcnt;
          end
          s[m.fptr[CW-2:0]] = c;
          if (c.t == '0) m.fptr = m.fptr + 1'b1;
          m.inflight = m.inflight + 1'b1;
        end

        // 2. commit: the head may be finished
        if (cm_en && EW'(e) == cm_entry) begin
          if (m.inflight != '0) m.inflight = m.inflight - 1'b1;
          if (cm_head_done) begin
            head = s[0];
            for (int k = 0; k < ELEMS - 1; k++) s[k] = s[k+1];
            if (m.fptr != '0) m.fptr = m.fptr - 1'b1;
            if (m.short_tr) begin
              head.p = head.orig.pcnt;     // refreshed copy goes to the back
              head.t = head.orig.tcnt;
              s[m.cnt[CW-2:0] - 1'b1] = head;
            end else begin
              m.cnt = m.cnt - 1'b1;
            end
          end
        end

        // 3. fill from memory
        if (fl_en && EW'(e) == fl_entry) begin
          if (fl_append && m.cnt < CW'(ELEMS)) begin
            s[m.cnt[CW-2:0]].orig = fl_elem;
            s[m.cnt[CW-2:0]].tix  = m.tail;
            s[m.cnt[CW-2:0]].p    = fl_elem.pcnt;
            s[m.cnt[CW-2:0]].t    = fl_elem.tcnt;
            m.cnt = m.cnt + 1'b1;
          end
          m.tail = fl_tail_next;
        end

        // 4. restore from the committed checkpoint
        if (squash_now) begin
          for (int k = 0; k < ELEMS; k++) begin
            s[k].p = s[k].orig.pcnt;
            s[k].t = s[k].orig.tcnt;
          end
          if (ct_resume[e]) begin
            s[0].p = ct_lat_p[e];
            s[0].t = ct_lat_t[e];
          end
          m.fptr     = '0;
          m.inflight = '0;
          if (rs_one && EW'(e) == rs_entry) m.busy = 1'b0;
        end

        // 5. allocate / invalidate
        if (al_en && EW'(e) == al_entry) begin
          m.valid    = 1'b1;
          m.busy     = 1'b1;
          m.short_tr = al_short;
          m.tag      = al_tag;
          m.base     = al_base;
          m.cnt      = '0;
          m.fptr     = '0;
          m.tail     = al_tail;
          m.inflight = '0;
        end
        if (inv_en && EW'(e) == inv_entry) m.valid = 1'b0;

        meta[e] <= m;
        for (int k = 0; k < ELEMS; k++) slots[e][k] <= s[k];
      end
    end
  end

endmodule
