// crypto_pc_ranges: the Crypto PC Ranges status register and its range comparators.
//
// Software marks the code of constant-time crypto programs by writing NUM_RANGES base/limit
// pairs, each with an enable bit. Every query port reports, combinationally, whether its PC lies
// in any enabled range [base, limit). The frontend uses it three times: for the fetched branch
// (does it take its next PC from the BTU or the BPU), for the BPU's predicted target (the
// integrity check that keeps prediction from steering into crypto code) and for committed
// branches (crypto branches do not update the BPU). The register lets the frontend classify a
// branch without waiting for its hint to be decoded, as the design intends. The number of ranges,
// the base/limit form and the write port are this design's choices; writes take effect at the
// next clock edge and reset clears all enables.
module crypto_pc_ranges #(
  parameter int unsigned PC_W       = 64,
  parameter int unsigned NUM_RANGES = 2,
  parameter int unsigned NPORTS     = 3,
  localparam int unsigned RW        = (NUM_RANGES > 1) ? $clog2(NUM_RANGES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [RW-1:0]               wr_idx,
  input  logic                        wr_enable,
  input  logic [PC_W-1:0]             wr_base,
  input  logic [PC_W-1:0]             wr_limit,
  input  logic [NPORTS-1:0][PC_W-1:0] q_pc,
  output logic [NPORTS-1:0]           q_in
);

  logic [NUM_RANGES-1:0]           en;
  logic [NUM_RANGES-1:0][PC_W-1:0] base;
  logic [NUM_RANGES-1:0][PC_W-1:0] limit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      en    <= '0;
      base  <= '0;
      limit <= '0;
    end else if (wr_en) begin
      en[wr_idx]    <= wr_enable;
      base[wr_idx]  <= wr_base;
      limit[wr_idx] <= wr_limit;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      q_in[p] = 1'b0;
      for (int r = 0; r < NUM_RANGES; r++) begin
        if (en[r] && q_pc[p] >= base[r] && q_pc[p] < limit[r]) q_in[p] = 1'b1;
      end
    end
  end

endmodule
