// pattern_table_tb: fills random pattern sets into every Pattern Table entry and checks the
// lookup port against an independent walk of the same pattern window: for random (entry,
// pattern index, pattern size, position) the target offset must be that of the element covering
// the position, and "found" must be low past the end of the window. Lookups are combinational.
module pattern_table_tb;
  import cassandra_pkg::*;

  logic          clk = 1'b0;
  logic          wr_en = 1'b0;
  logic [3:0]    wr_entry = '0, wr_slot = '0;
  pattern_elem_t wr_data = '0;
  logic [3:0]    rd_entry = '0, rd_pidx = '0, rd_psize = '0;
  logic [7:0]    rd_pos = '0;
  logic [11:0]   rd_delta;
  logic          rd_found;

  always #5 clk = ~clk;

  pattern_table dut (.*);

  pattern_elem_t ref_mem [16][16];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 16; e++)
      for (int s = 0; s < 16; s++) begin
        @(negedge clk);
        wr_en    = 1'b1;
        wr_entry = 4'(e);
        wr_slot  = 4'(s);
        wr_data.delta = 12'($urandom);
        wr_data.reps  = 8'(1 + $urandom % 5);
        ref_mem[e][s] = wr_data;
      end
    @(negedge clk);
    wr_en = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      int sum, idx, pidx, psize;
      bit found;
      logic [11:0] exp_delta;
      pidx  = int'($urandom % 16);
      psize = 1 + int'($urandom % (16 - pidx));
      if (psize > 15) psize = 15;
      sum = 0;
      for (int j = 0; j < psize; j++) sum += int'(ref_mem[n % 16][pidx + j].reps);
      rd_entry = 4'(n % 16);
      rd_pidx  = 4'(pidx);
      rd_psize = 4'(psize);
      rd_pos   = 8'($urandom % (sum + 2));
      // reference walk
      found = 1'b0; exp_delta = '0; idx = 0;
      for (int j = 0; j < psize && !found; j++) begin
        idx += int'(ref_mem[n % 16][pidx + j].reps);
        if (int'(rd_pos) < idx) begin
          found = 1'b1;
          exp_delta = ref_mem[n % 16][pidx + j].delta;
        end
      end
      #1;
      checks++;
      if (rd_found !== found || (found && rd_delta !== exp_delta)) begin
        failures++;
        if (failures < 10)
          $display("FAIL entry %0d pidx %0d psize %0d pos %0d: got %0b/%h exp %0b/%h",
                   rd_entry, pidx, psize, rd_pos, rd_found, rd_delta, found, exp_delta);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
