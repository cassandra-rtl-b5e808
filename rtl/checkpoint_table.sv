// checkpoint_table: the Checkpoint Table (CT) of the Branch Trace Unit.
//
// One checkpoint element per resident static branch: the trace index of the head element and
// the head's latest (committed) and original pattern and trace counters. It is the committed
// counterpart of the trace cache's fetch-side counters. On each commit of a branch that took its
// target from the BTU, the committed counters advance the same way the fetch counters did:
// pattern counter minus one, at zero reload it and decrement the trace counter. When the trace
// counter reaches zero the head element is finished: cm_head_done tells the trace cache to
// shift, and the checkpoint moves to the next element (its trace index, its original counts).
// The checkpoint is what is written to memory on eviction and read back when the branch
// returns, and what the trace cache restores from after a ROB squash.
//
// A "resume" bit per entry is this design's addition: when clear, the latest counters are not
// yet meaningful and the head element starts from its own original counts (a fresh trace, or a
// head that has not yet committed once). In the 64-bit memory word it is bit 63 above the 60-bit
// checkpoint element. nx_* outputs give the state as it will be after this cycle's commit, so
// that a squash in the same cycle restores the post-commit counters. cm_head_done is
// combinational from the commit inputs; updates happen at the clock edge.
module checkpoint_table
  import cassandra_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned EW     = $clog2(ENTRIES)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // commit
  input  logic                           cm_en,
  input  logic [EW-1:0]                  cm_entry,
  input  trace_elem_t                    cm_head,
  input  logic [TIDX_W-1:0]              cm_head_tix,
  input  logic                           cm_next_known,
  input  trace_elem_t                    cm_next,
  input  logic [TIDX_W-1:0]              cm_next_tix,
  output logic                           cm_head_done,
  // load from memory
  input  logic                           ld_en,
  input  logic [EW-1:0]                  ld_entry,
  input  logic [MEM_W-1:0]               ld_word,
  // read for write-back
  input  logic [EW-1:0]                  rd_entry,
  output logic [MEM_W-1:0]               rd_word,
  // committed counters after this cycle
  output logic [ENTRIES-1:0]             nx_resume,
  output logic [ENTRIES-1:0][PCNT_W-1:0] nx_lat_p,
  output logic [ENTRIES-1:0][TCNT_W-1:0] nx_lat_t
);

  ckpt_elem_t ck     [ENTRIES];
  logic       resume [ENTRIES];

  ckpt_elem_t cm_new;
  logic       cm_new_resume;

  always_comb begin
    logic [PCNT_W-1:0] p;
    logic [TCNT_W-1:0] t;
    if (resume[cm_entry]) begin
      p = ck[cm_entry].lat_pcnt;
      t = ck[cm_entry].lat_tcnt;
    end else begin
      p = cm_head.pcnt;
      t = cm_head.tcnt;
    end
    p = p - 1'b1;
    if (p == '0) begin
      t = t - 1'b1;
      p = cm_head.pcnt;
    end
    cm_head_done = (t == '0);
    if (cm_head_done) begin
      cm_new.tidx      = cm_next_tix;
      cm_new.orig_pcnt = cm_next_known ? cm_next.pcnt : '0;
      cm_new.orig_tcnt = cm_next_known ? cm_next.tcnt : '0;
      cm_new.lat_pcnt  = cm_new.orig_pcnt;
      cm_new.lat_tcnt  = cm_new.orig_tcnt;
      cm_new_resume    = 1'b0;
    end else begin
      cm_new.tidx      = cm_head_tix;
      cm_new.orig_pcnt = cm_head.pcnt;
      cm_new.orig_tcnt = cm_head.tcnt;
      cm_new.lat_pcnt  = p;
      cm_new.lat_tcnt  = t;
      cm_new_resume    = 1'b1;
    end
  end

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      if (cm_en && EW'(e) == cm_entry) begin
        nx_resume[e] = cm_new_resume;
        nx_lat_p[e]  = cm_new.lat_pcnt;
        nx_lat_t[e]  = cm_new.lat_tcnt;
      end else begin
        nx_resume[e] = resume[e];
        nx_lat_p[e]  = ck[e].lat_pcnt;
        nx_lat_t[e]  = ck[e].lat_tcnt;
      end
    end
  end

  assign rd_word = {resume[rd_entry], 3'b000, ck[rd_entry]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) resume[e] <= 1'b0;
    end else begin
      if (ld_en) resume[ld_entry] <= ld_word[MEM_W-1];
      if (cm_en) resume[cm_entry] <= cm_new_resume;
    end
  end

  always_ff @(posedge clk) begin
    if (ld_en) ck[ld_entry] <= ck_elem_of(ld_word);
    if (cm_en) ck[cm_entry] <= cm_new;
  end

  function automatic ckpt_elem_t ck_elem_of(logic [MEM_W-1:0] w);
    return w[$bits(ckpt_elem_t)-1:0];
  endfunction

endmodule
