// pattern_table: the Pattern Table (PT) of the Branch Trace Unit.
//
// One entry per resident static branch, each holding the branch's pattern set: ELEMS pattern
// elements of {12-bit signed target offset, 8-bit repetition count}. A trace element names a
// pattern as a window [pidx, pidx+psize) of this set; the trace cache tracks how far the
// current pass of the pattern has got as a position 0 .. pattern counter-1. The lookup port turns
// (entry, pidx, psize, position) into the target offset of the pattern element that covers that
// position, by walking the running sum of repetitions over the window. Pattern elements of
// overlapping patterns are shared, as in the compact pattern-set form of the design.
//
// Interface: one write port used while a pattern set is loaded from memory; one combinational
// lookup port used by the fetch flow. Entry count and element count follow the design (16 x 16);
// the window walk (rather than, say, a precomputed per-position table) is this design's choice.
// A window running past element ELEMS-1 wraps to element 0 (never produced by a well formed set).
module pattern_table
  import cassandra_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned ELEMS   = 16,
  localparam int unsigned EW     = $clog2(ENTRIES),
  localparam int unsigned SW     = $clog2(ELEMS)
) (
  input  logic                clk,
  // fill port
  input  logic                wr_en,
  input  logic [EW-1:0]       wr_entry,
  input  logic [SW-1:0]       wr_slot,
  input  pattern_elem_t       wr_data,
  // lookup port
  input  logic [EW-1:0]       rd_entry,
  input  logic [PIDX_W-1:0]   rd_pidx,
  input  logic [PSIZE_W-1:0]  rd_psize,
  input  logic [PCNT_W-1:0]   rd_pos,
  output logic [DELTA_W-1:0]  rd_delta,
  output logic                rd_found   // position lies inside the pattern window
);

  pattern_elem_t mem [ENTRIES][ELEMS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_entry][wr_slot] <= wr_data;
  end

  always_comb begin
    logic [PCNT_W+PSIZE_W-1:0] run;
    logic [SW-1:0]             slot;
    rd_delta = '0;
    rd_found = 1'b0;
    run      = '0;
    for (int j = 0; j < ELEMS; j++) begin
      slot = SW'(rd_pidx) + SW'(j);
      if (j < int'(rd_psize) && !rd_found) begin
        run = run + (PCNT_W+PSIZE_W)'(mem[rd_entry][slot].reps);
        if ((PCNT_W+PSIZE_W)'(rd_pos) < run) begin
          rd_found = 1'b1;
          rd_delta = mem[rd_entry][slot].delta;
        end
      end
    end
  end

endmodule
