// fetch_redirect: next-PC selection for a fetched branch, the two-way multiplexer in front of
// fetch whose select is the Crypto PC Ranges check.
//
//  * Non-crypto branch (select 0): the BPU's next PC is used, except when it points into crypto
//    code. Then fetch is not redirected and waits for the branch to resolve (integrity check), so
//    crypto code is never entered on a predicted path.
//  * Crypto branch (select 1), never predicted and never looked up in the BPU:
//      - single-target mark in the hint: next PC = branch PC + sign-extended hint offset;
//      - otherwise the BTU is asked: when it is ready its target is used, when not (miss,
//        refill) fetch waits;
//      - a multi-target crypto branch whose hint offset is 0 has no recorded trace (its trace
//        depends on the input); fetch waits for the branch to resolve.
// Purely combinational. The case split follows the design; using hint offset 0 as the "no trace"
// mark and taking the hint together with the branch at fetch are this design's choices.
module fetch_redirect
  import cassandra_pkg::*;
#(
  parameter int unsigned PC_W = 64
) (
  input  logic              br_valid,
  input  logic [PC_W-1:0]   br_pc,
  input  hint_t             br_hint,
  input  logic              br_in_crypto,
  input  logic [PC_W-1:0]   bpu_next_pc,
  input  logic              bpu_next_in_crypto,
  input  logic              btu_ready,
  input  logic [PC_W-1:0]   btu_target,
  output logic              bpu_lookup_en,
  output logic              btu_lk_valid,
  output logic [HOFF_W-1:0] btu_lk_region,
  output logic              btu_lk_short,
  output logic              next_valid,
  output logic [PC_W-1:0]   next_pc,
  output next_src_e         next_src
);

  always_comb begin
    bpu_lookup_en = 1'b0;
    btu_lk_valid  = 1'b0;
    btu_lk_region = br_hint.offset;
    btu_lk_short  = br_hint.short_trace;
    next_valid    = 1'b0;
    next_pc       = '0;
    next_src      = SRC_NONE;
    if (br_valid) begin
      if (!br_in_crypto) begin
        bpu_lookup_en = 1'b1;
        if (bpu_next_in_crypto) begin
          next_src = SRC_RESOLVE;
        end else begin
          next_valid = 1'b1;
          next_pc    = bpu_next_pc;
          next_src   = SRC_BPU;
        end
      end else if (br_hint.single_target) begin
        next_valid = 1'b1;
        next_pc    = br_pc + PC_W'($signed(br_hint.offset));
        next_src   = SRC_HINT;
      end else if (br_hint.offset == '0) begin
        next_src = SRC_RESOLVE;
      end else begin
        btu_lk_valid = 1'b1;
        if (btu_ready) begin
          next_valid = 1'b1;
          next_pc    = btu_target;
          next_src   = SRC_BTU;
        end else begin
          next_src = SRC_WAIT;
        end
      end
    end
  end

endmodule
