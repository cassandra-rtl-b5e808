// cassandra_pkg: element formats and constants shared by the Branch Trace Unit (BTU) and the
// fetch redirection logic.
//
// The three table element formats and their field widths follow the element diagrams of the
// design: a pattern element is a 12-bit signed target offset plus an 8-bit repetition count, a
// trace element is pattern index (4) / pattern size (4) / pattern counter (8) / trace counter
// (16), and a checkpoint element is trace index (12) plus latest and original pattern (8) and
// trace (16) counters. With 16 entries of 16 elements these give 1.74 KiB of table storage.
// The 14-bit branch hint (single-target mark, 12-bit offset, short-trace mark) is also the
// design's. Own choices, not given by the design description: the field order inside a packed
// word (left-to-right as drawn = MSB first), the End-of-Trace encoding (pattern size 0), the
// 64-bit memory word layout of a branch's trace region and how its base address is formed.
package cassandra_pkg;

  localparam int unsigned DELTA_W = 12;  // pattern element: signed target offset
  localparam int unsigned REP_W   = 8;   // pattern element: repetitions
  localparam int unsigned PIDX_W  = 4;   // trace element: pattern index
  localparam int unsigned PSIZE_W = 4;   // trace element: pattern size
  localparam int unsigned PCNT_W  = 8;   // trace element: pattern counter
  localparam int unsigned TCNT_W  = 16;  // trace element: trace counter
  localparam int unsigned TIDX_W  = 12;  // checkpoint element: trace index
  localparam int unsigned HOFF_W  = 12;  // hint: trace region offset / single target offset

  typedef struct packed {
    logic [DELTA_W-1:0] delta;  // target PC minus branch PC, two's complement
    logic [REP_W-1:0]   reps;   // consecutive outcomes with this target
  } pattern_elem_t;             // 20 bits

  typedef struct packed {
    logic [PIDX_W-1:0]  pidx;   // first pattern element in the pattern set
    logic [PSIZE_W-1:0] psize;  // number of pattern elements (0 = End of Trace)
    logic [PCNT_W-1:0]  pcnt;   // outcomes in one pass of the pattern
    logic [TCNT_W-1:0]  tcnt;   // passes of the pattern
  } trace_elem_t;               // 32 bits

  typedef struct packed {
    logic [TIDX_W-1:0] tidx;       // trace index of the head element
    logic [PCNT_W-1:0] lat_pcnt;   // committed pattern counter of the head
    logic [TCNT_W-1:0] lat_tcnt;   // committed trace counter of the head
    logic [PCNT_W-1:0] orig_pcnt;  // pattern counter of the head as loaded
    logic [TCNT_W-1:0] orig_tcnt;  // trace counter of the head as loaded
  } ckpt_elem_t;                   // 60 bits

  typedef struct packed {
    logic              single_target;  // branch always goes to pc + offset
    logic [HOFF_W-1:0] offset;         // single target offset, or trace region offset
    logic              short_trace;    // whole trace fits in one trace cache entry
  } hint_t;                            // 14 bits

  // Memory word layout of a branch's trace region (64-bit words):
  //   word 0                  : checkpoint word, bit 63 = "resume" (latest counters valid)
  //   word 1 .. 16            : pattern elements, bits [19:0]
  //   word 17 + i             : trace element i, bits [31:0]; pattern size 0 = End of Trace
  localparam int unsigned MEM_W          = 64;
  localparam int unsigned MEM_CKPT_WORD  = 0;
  localparam int unsigned MEM_PAT_WORD   = 1;
  localparam int unsigned MEM_TRACE_WORD = 17;
  localparam int unsigned REGION_SHIFT   = 6;   // region offset counts 64-byte units

  // Where the fetch PC came from.
  typedef enum logic [2:0] {
    SRC_NONE    = 3'd0,  // no branch this cycle
    SRC_BPU     = 3'd1,  // non-crypto branch, BPU prediction used
    SRC_HINT    = 3'd2,  // single-target crypto branch, target from the hint
    SRC_BTU     = 3'd3,  // multi-target crypto branch, target from the BTU
    SRC_WAIT    = 3'd4,  // crypto branch waiting for the BTU (miss or refill)
    SRC_RESOLVE = 3'd5   // stall until the branch resolves
  } next_src_e;

  function automatic logic is_eot(trace_elem_t e);
    return e.psize == '0;
  endfunction

endpackage
