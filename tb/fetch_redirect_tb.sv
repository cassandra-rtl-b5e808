// fetch_redirect_tb: drives random branches (crypto or not, single-target, traced or trace-less
// hints, BPU targets inside or outside crypto code, BTU ready or not) through the next-PC
// selection and compares next PC, its source, the BPU and BTU request lines with a reference
// decision table written out case by case.
module fetch_redirect_tb;
  import cassandra_pkg::*;

  logic        br_valid, br_in_crypto, bpu_next_in_crypto, btu_ready;
  logic [63:0] br_pc, bpu_next_pc, btu_target;
  hint_t       br_hint;
  logic        bpu_lookup_en, btu_lk_valid, btu_lk_short, next_valid;
  logic [11:0] btu_lk_region;
  logic [63:0] next_pc;
  next_src_e   next_src;

  fetch_redirect dut (.*);

  int checks = 0, failures = 0;
  int seen [8];

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      next_src_e   e_src;
      logic [63:0] e_pc;
      bit          e_bpu, e_btu;
      br_valid           = ($urandom % 8) != 0;
      br_in_crypto       = $urandom % 2;
      bpu_next_in_crypto = ($urandom % 4) == 0;
      btu_ready          = $urandom % 2;
      br_pc              = {$urandom, $urandom};
      bpu_next_pc        = {$urandom, $urandom};
      btu_target         = {$urandom, $urandom};
      br_hint            = 14'($urandom);
      if ($urandom % 4 == 0) br_hint.offset = '0;
      // reference
      e_src = SRC_NONE; e_pc = '0; e_bpu = 0; e_btu = 0;
      if (br_valid && !br_in_crypto) begin
        e_bpu = 1;
        if (bpu_next_in_crypto) e_src = SRC_RESOLVE;
        else begin e_src = SRC_BPU; e_pc = bpu_next_pc; end
      end else if (br_valid && br_hint.single_target) begin
        e_src = SRC_HINT;
        e_pc  = br_pc + {{52{br_hint.offset[11]}}, br_hint.offset};
      end else if (br_valid && br_hint.offset == 0) begin
        e_src = SRC_RESOLVE;
      end else if (br_valid) begin
        e_btu = 1;
        if (btu_ready) begin e_src = SRC_BTU; e_pc = btu_target; end
        else e_src = SRC_WAIT;
      end
      #1;
      checks++;
      seen[int'(e_src)]++;
      if (next_src !== e_src || bpu_lookup_en !== e_bpu || btu_lk_valid !== e_btu ||
          next_valid !== (e_src inside {SRC_BPU, SRC_HINT, SRC_BTU}) ||
          (next_valid && next_pc !== e_pc) ||
          (e_btu && (btu_lk_region !== br_hint.offset || btu_lk_short !== br_hint.short_trace))) begin
        failures++;
        if (failures < 10) $display("FAIL case %0d: src %0d exp %0d", n, next_src, e_src);
      end
      #1;
    end
    for (int s = 0; s <= 5; s++) begin
      checks++;
      if (seen[s] == 0) begin failures++; $display("FAIL source %0d never produced", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
