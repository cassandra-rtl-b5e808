// crypto_pc_ranges_tb: writes random crypto PC ranges (some disabled) and checks every query port
// against a reference [base, limit) test of the same ranges, including the exact boundaries.
module crypto_pc_ranges_tb;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 wr_en = 1'b0, wr_idx = 1'b0, wr_enable = 1'b0;
  logic [63:0]          wr_base = '0, wr_limit = '0;
  logic [2:0][63:0]     q_pc = '0;
  logic [2:0]           q_in;

  always #5 clk = ~clk;

  crypto_pc_ranges dut (.*);

  logic [63:0] rb [2], rl [2];
  bit          ren [2];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_in(logic [63:0] pc);
    for (int r = 0; r < 2; r++) if (ren[r] && pc >= rb[r] && pc < rl[r]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    ren[0] = 0; ren[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 50; round++) begin
      @(negedge clk);
      wr_en     = 1'b1;
      wr_idx    = 1'(round % 2);
      wr_enable = ($urandom % 4) != 0;
      wr_base   = 64'($urandom % 100000);
      wr_limit  = wr_base + 64'($urandom % 5000);
      ren[round % 2] = wr_enable; rb[round % 2] = wr_base; rl[round % 2] = wr_limit;
      @(negedge clk);
      wr_en = 1'b0;
      for (int n = 0; n < 40; n++) begin
        for (int p = 0; p < 3; p++) begin
          case ($urandom % 4)
            0: q_pc[p] = rb[$urandom % 2];
            1: q_pc[p] = rl[$urandom % 2];
            2: q_pc[p] = rl[$urandom % 2] - 1;
            default: q_pc[p] = 64'($urandom % 110000);
          endcase
        end
        #1;
        for (int p = 0; p < 3; p++) begin
          checks++;
          if (q_in[p] !== ref_in(q_pc[p])) begin
            failures++;
            if (failures < 10) $display("FAIL pc %h got %0b", q_pc[p], q_in[p]);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
