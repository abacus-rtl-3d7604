// tb_abacus_counter_table: checks the counter table at its full default size
// (2720 entries, 17-bit row IDs, 10-bit RAC fields, 32-bit SAVs) against a
// reference copy kept in the testbench. It checks that after reset every entry
// is a replacement candidate only while the spillover value is 0 (lowest index
// first); that writes are visible to both searches; that the row-ID search
// returns the matching entry's RAC and SAV; that the RAC search returns the
// lowest matching index and never an entry with the overflow bit set; and that
// clear invalidates everything.
module tb_abacus_counter_table;
  import abacus_pkg::*;
  localparam int unsigned NE = N_ENTRIES_DEF, SR = S_RID_DEF, SRAC = S_RAC_DEF, NB = S_SAV_DEF;
  localparam int unsigned IDXW = $clog2(NE);

  logic clk = 0, rst_n = 0, wr_en = 0, clr = 0;
  logic [SR-1:0]   srch_row = 0, wr_row = 0;
  logic [SRAC-1:0] srch_spill = 0, wr_rac = 0, hit_rac;
  logic [NB-1:0]   wr_sav = 0, hit_sav;
  logic [IDXW-1:0] wr_idx = 0, hit_idx, cand_idx;
  logic hit, cand;

  abacus_counter_table dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit r_valid[NE];
  int r_row[NE], r_rac[NE];
  bit [NB-1:0] r_sav[NE];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int idx, int row, int rac, bit [NB-1:0] sav);
    wr_en = 1; wr_idx = IDXW'(idx); wr_row = SR'(row); wr_rac = SRAC'(rac); wr_sav = sav;
    @(negedge clk);
    wr_en = 0;
    r_valid[idx] = 1; r_row[idx] = row; r_rac[idx] = rac; r_sav[idx] = sav;
  endtask

  task automatic search(int row, int spill);
    int eh = -1, ec = -1;
    srch_row = SR'(row); srch_spill = SRAC'(spill);
    #1;
    for (int i = NE - 1; i >= 0; i--) begin
      if (r_valid[i] && r_row[i] == row) eh = i;
      if (r_valid[i] ? (r_rac[i] == spill) : (spill == 0)) ec = i;
    end
    check(hit == (eh >= 0), $sformatf("hit for row %0d", row));
    if (eh >= 0) check(int'(hit_idx) == eh && int'(hit_rac) == r_rac[eh] && hit_sav == r_sav[eh],
                       $sformatf("hit contents for row %0d", row));
    check(cand == (ec >= 0), $sformatf("candidate for spill %0d", spill));
    if (ec >= 0) check(int'(cand_idx) == ec, $sformatf("candidate index %0d expected %0d", cand_idx, ec));
    @(negedge clk);
  endtask

  initial begin
    foreach (r_valid[i]) r_valid[i] = 0;
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    search(5, 0);                                   // empty table: entry 0 is the candidate
    search(5, 3);                                   // no candidate for a non-zero spillover
    // fill every entry with distinct row IDs and small RAC values
    for (int i = 0; i < int'(NE); i++) write(i, 3 * i + 1, 1 + (i % 7), NB'($urandom) | NB'(1));
    for (int k = 0; k < 400; k++) search($urandom_range(0, 3 * NE + 3), $urandom_range(0, 8));
    // overflowed entries (top bit set) are never candidates
    write(10, 31, (1 << (SRAC - 1)) | 3, '1);
    search(31, 3);
    search(31, (1 << (SRAC - 1)) - 1);
    // random rewrites, including row IDs moving between entries
    for (int k = 0; k < 300; k++) begin
      automatic int idx = $urandom_range(0, NE - 1);
      automatic int row = $urandom_range(3 * NE + 10, 3 * NE + 2000);
      automatic bit dup = 0;
      foreach (r_valid[i]) if (r_valid[i] && r_row[i] == row) dup = 1;
      if (!dup) write(idx, row, $urandom_range(0, 500), NB'($urandom));
      search(row, $urandom_range(0, 9));
      search(r_row[$urandom_range(0, NE - 1)], r_rac[$urandom_range(0, NE - 1)] & ((1 << (SRAC - 1)) - 1));
    end
    // clear
    clr = 1;
    @(negedge clk);
    clr = 0;
    foreach (r_valid[i]) r_valid[i] = 0;
    search(r_row[0], 0);
    search(r_row[NE - 1], 1);
    // a write in the same cycle as clear is dropped
    wr_en = 1; wr_idx = 3; wr_row = 99; wr_rac = 1; wr_sav = 1; clr = 1;
    @(negedge clk);
    wr_en = 0; clr = 0;
    search(99, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
