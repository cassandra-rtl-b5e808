// cassandra_frontend: the fetch-side additions of the design around a conventional core.
//
// For every branch the fetch unit presents (PC and its 14-bit hint), the Crypto PC Ranges
// register decides whether it belongs to crypto code. Non-crypto branches take the BPU's
// prediction, subject to the integrity check; crypto branches take their next PC from the hint
// (single-target) or from the Branch Trace Unit, and never touch the BPU. When no next PC can be
// given, next_src says whether fetch waits for the BTU or for the branch to resolve. At commit,
// branches whose target came from the BTU (the core keeps next_src with the branch) advance the
// BTU's checkpoint; only non-crypto branches update the BPU. Squash and flush go to the BTU; the
// BTU reaches the trace regions in memory through the mem_* port.
//
// The BPU, the fetch/decode/execute/commit pipeline and the memory hierarchy are the baseline
// core's and are outside this module; their signals are ports. Timing: next_pc is combinational
// from the branch inputs in the cycle the BTU is ready; all state changes at the rising clock
// edge; reset is synchronous and active low. Default sizes are those of the evaluated
// configuration (16-entry tables of 16 elements, 64-bit x86 PCs); the number of crypto ranges and
// the in-flight counter width (512-entry ROB) are this design's choices.
module cassandra_frontend
  import cassandra_pkg::*;
#(
  parameter int unsigned PC_W       = 64,
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned ELEMS      = 16,
  parameter int unsigned NUM_RANGES = 2,
  parameter int unsigned INFLIGHT_W = 10,
  localparam int unsigned RW        = (NUM_RANGES > 1) ? $clog2(NUM_RANGES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // Crypto PC Ranges register write
  input  logic              csr_wr_en,
  input  logic [RW-1:0]     csr_wr_idx,
  input  logic              csr_wr_enable,
  input  logic [PC_W-1:0]   csr_wr_base,
  input  logic [PC_W-1:0]   csr_wr_limit,
  // fetched branch
  input  logic              br_valid,
  input  logic [PC_W-1:0]   br_pc,
  input  hint_t             br_hint,
  output logic              next_valid,
  output logic [PC_W-1:0]   next_pc,
  output next_src_e         next_src,
  // branch prediction unit
  output logic              bpu_lookup_en,
  input  logic [PC_W-1:0]   bpu_next_pc,
  output logic              bpu_update_en,
  // commit / squash / flush
  input  logic              cm_valid,
  input  logic [PC_W-1:0]   cm_pc,
  input  logic              cm_from_btu,
  input  logic              squash,
  input  logic              flush_req,
  output logic              flush_busy,
  // trace memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [PC_W-1:0]   mem_req_addr,
  output logic [MEM_W-1:0]  mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [MEM_W-1:0]  mem_resp_rdata,
  // event pulses
  output logic              ev_miss,
  output logic              ev_evict,
  output logic              ev_prefetch,
  output logic              ev_wrap,
  output logic              ev_refresh,
  output logic              ev_integrity
);

  logic [2:0]        in_crypto;
  logic              btu_lk_valid, btu_ready, btu_lk_short;
  logic [HOFF_W-1:0] btu_lk_region;
  logic [PC_W-1:0]   btu_target;
  logic              ev_wait_unused;

  crypto_pc_ranges #(.PC_W(PC_W), .NUM_RANGES(NUM_RANGES), .NPORTS(3)) u_ranges (
    .clk, .rst_n,
    .wr_en(csr_wr_en), .wr_idx(csr_wr_idx), .wr_enable(csr_wr_enable),
    .wr_base(csr_wr_base), .wr_limit(csr_wr_limit),
    .q_pc({cm_pc, bpu_next_pc, br_pc}), .q_in(in_crypto)
  );

  fetch_redirect #(.PC_W(PC_W)) u_redirect (
    .br_valid, .br_pc, .br_hint, .br_in_crypto(in_crypto[0]),
    .bpu_next_pc, .bpu_next_in_crypto(in_crypto[1]),
    .btu_ready, .btu_target,
    .bpu_lookup_en, .btu_lk_valid, .btu_lk_region, .btu_lk_short,
    .next_valid, .next_pc, .next_src
  );

  branch_trace_unit #(.ENTRIES(ENTRIES), .ELEMS(ELEMS), .PC_W(PC_W),
                      .INFLIGHT_W(INFLIGHT_W)) u_btu (
    .clk, .rst_n,
    .lk_valid(btu_lk_valid), .lk_pc(br_pc), .lk_region(btu_lk_region), .lk_short(btu_lk_short),
    .lk_ready(btu_ready), .lk_target(btu_target),
    .cm_valid(cm_valid && cm_from_btu), .cm_pc,
    .squash, .flush_req, .flush_busy,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .ev_miss, .ev_evict, .ev_prefetch, .ev_wrap, .ev_refresh, .ev_wait(ev_wait_unused)
  );

  assign bpu_update_en = cm_valid && !in_crypto[2];
  assign ev_integrity  = br_valid && !in_crypto[0] && in_crypto[1];

endmodule
