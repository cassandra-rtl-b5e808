// trace_mem_model: behavioural model of the memory that holds the branch trace regions
// (checkpoint word, pattern set, trace elements) for testbenches. Not synthesizable.
//
// Sparse 64-bit word memory addressed by byte address; unwritten words read as zero. Requests
// use valid/ready; ready is low on random cycles to exercise back-pressure. A read answers with
// one mem_resp_valid pulse LATENCY cycles after it is accepted; writes have no response. Only
// one read is outstanding at a time, as the Branch Trace Unit issues them. Testbenches fill the
// memory by writing `words` directly and read the counters `reads` and `writes`.
module trace_mem_model #(
  parameter int unsigned LATENCY = 3
) (
  input  logic        clk,
  input  logic        mem_req_valid,
  output logic        mem_req_ready,
  input  logic        mem_req_we,
  input  logic [63:0] mem_req_addr,
  input  logic [63:0] mem_req_wdata,
  output logic        mem_resp_valid,
  output logic [63:0] mem_resp_rdata
);

  logic [63:0] words [logic [63:0]];
  int          reads  = 0;
  int          writes = 0;
  int          wait_cnt = -1;
  logic [63:0] pend_data = '0;

  initial begin
    mem_req_ready  = 1'b1;
    mem_resp_valid = 1'b0;
    mem_resp_rdata = '0;
  end

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
    if (wait_cnt == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= pend_data;
      wait_cnt       <= -1;
    end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin
        words[mem_req_addr] = mem_req_wdata;
        writes++;
      end else begin
        pend_data = words.exists(mem_req_addr) ? words[mem_req_addr] : 64'd0;
        wait_cnt <= int'(LATENCY) - 1;
        reads++;
      end
    end
    mem_req_ready <= ($urandom % 4) != 0;
  end

endmodule
