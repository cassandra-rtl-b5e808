// checkpoint_table_tb: commits a random trace through one Checkpoint Table entry and checks,
// after each commit, the head-finished flag (by counting outcomes: an element is finished after
// pattern counter x trace counter commits) and the stored checkpoint word (trace index, latest
// and original counters, resume bit) against values computed from that count. Also checks the
// post-commit nx_* outputs in the commit cycle, load of a checkpoint word from memory and its
// read-back, and that other entries are untouched.
module checkpoint_table_tb;
  import cassandra_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic               cm_en = 1'b0, cm_next_known = 1'b0;
  logic [3:0]         cm_entry = '0, ld_entry = '0, rd_entry = '0;
  trace_elem_t        cm_head = '0, cm_next = '0;
  logic [11:0]        cm_head_tix = '0, cm_next_tix = '0;
  logic               cm_head_done;
  logic               ld_en = 1'b0;
  logic [63:0]        ld_word = '0, rd_word;
  logic [15:0]        nx_resume;
  logic [15:0][7:0]   nx_lat_p;
  logic [15:0][15:0]  nx_lat_t;

  always #5 clk = ~clk;

  checkpoint_table dut (.*);

  int checks = 0, failures = 0;
  trace_elem_t tr [$];

  initial begin
    #5_000_000;
    failures++;
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

  initial begin
    logic [63:0] other;
    for (int i = 0; i < 30; i++) begin
      trace_elem_t e;
      e.pidx = 4'($urandom); e.psize = 4'(1 + $urandom % 15);
      e.pcnt = 8'(1 + $urandom % 5); e.tcnt = 16'(1 + $urandom % 4);
      tr.push_back(e);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // entry 7 gets a loaded checkpoint that must survive the commits to entry 2
    other = {1'b1, 3'b0, 12'd5, 8'd3, 16'd9, 8'd4, 16'd11};
    ld_en = 1'b1; ld_entry = 4'd7; ld_word = other;
    @(negedge clk);
    ld_en = 1'b0; rd_entry = 4'd7;
    #1 check(rd_word == other, "load and read back");
    // entry 2 starts fresh
    ld_en = 1'b1; ld_entry = 4'd2; ld_word = '0;
    @(negedge clk);
    ld_en = 1'b0; rd_entry = 4'd2;
    for (int i = 0; i < tr.size(); i++) begin
      int n;
      n = int'(tr[i].pcnt) * int'(tr[i].tcnt);
      for (int k = 1; k <= n; k++) begin
        logic [63:0] exp;
        cm_en = 1'b1; cm_entry = 4'd2;
        cm_head = tr[i]; cm_head_tix = 12'(i);
        cm_next_known = (i + 1 < tr.size());
        cm_next = cm_next_known ? tr[i+1] : '0;
        cm_next_tix = 12'(i + 1);
        #1;
        check(cm_head_done == (k == n), "head finished exactly after pcnt*tcnt commits");
        if (k == n) begin
          exp = {1'b0, 3'b0, 12'(i + 1), cm_next.pcnt, cm_next.tcnt, cm_next.pcnt, cm_next.tcnt};
        end else begin
          exp = {1'b1, 3'b0, 12'(i), 8'(int'(tr[i].pcnt) - k % int'(tr[i].pcnt)),
                 16'(int'(tr[i].tcnt) - k / int'(tr[i].pcnt)), tr[i].pcnt, tr[i].tcnt};
        end
        check(nx_resume[2] == exp[63] && nx_lat_p[2] == exp[47:40] && nx_lat_t[2] == exp[39:24],
              "post-commit counters in the commit cycle");
        @(negedge clk);
        cm_en = 1'b0;
        #1 check(rd_word == exp, "checkpoint word after commit");
      end
    end
    rd_entry = 4'd7;
    #1 check(rd_word == other, "other entry untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
