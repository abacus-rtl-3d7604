// tb_abacus_full: the ABACuS unit at its default (NRH = 1000) configuration:
// 2720 counters, 17-bit row IDs, 32 banks in 2 ranks, PRT = 500, RCT = 498,
// 8192 REF commands per rank per refresh cycle.
//
// 1. Hammers row 1000 of bank 5: the first ACT maps it to a counter with RAC 1,
//    each further ACT of the same bank increments the RAC, so the 500th ACT must
//    request the preventive refresh (checked to the ACT). The unit must then ask
//    for rows 999 and 1001 in all 32 banks (64 victim refreshes, bank by bank),
//    keeping each bank blocked until its victims are done.
// 2. Sweeps row 2000 through all 32 banks twice: the first pass costs one RAC
//    increment in total (the SAV absorbs the other 31 siblings), the second pass
//    increments once per ACT that finds its bank's SAV bit set.
// 3. Streams ACTs to ever new row IDs, the access pattern that drives the
//    spillover counter up. The refresh cycle must start on the ACT that makes the
//    RCT-th spillover increment, last exactly 2 x 8192 cycles with an always
//    ready controller, block every bank, and leave all counters reset.
module tb_abacus_full;
  import abacus_pkg::*;
  localparam int unsigned NB = S_SAV_DEF, SR = S_RID_DEF, BW = 5;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready, vr_valid, vr_ready = 0, ref_valid, ref_ready = 0, all_block;
  logic [BW-1:0] act_bank = 0, vr_bank;
  logic [SR-1:0] act_row = 0, vr_row;
  logic [0:0]    ref_rank;
  logic [NB-1:0] bank_block;
  act_outcome_e  ev_outcome;
  logic ev_prev_ref, ev_refresh_cycle, ev_prq_overflow, ev_period_reset;

  abacus dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #40_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One demand ACT; returns the outcome and whether a preventive refresh or a
  // refresh cycle was requested.
  task automatic act(int bank, int row, output act_outcome_e o, output bit pref, output bit rc);
    act_valid = 1; act_bank = BW'(bank); act_row = SR'(row);
    #1;
    check(act_ready, "unit ready for a demand ACT");
    o = ev_outcome; pref = ev_prev_ref; rc = ev_refresh_cycle;
    @(negedge clk);
    act_valid = 0;
  endtask

  initial begin
    act_outcome_e o;
    bit pref, rc;
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. preventive refresh ----
    n = 0;
    do begin
      act(5, 1000, o, pref, rc);
      n++;
      if (n == 1) check(o == ACT_REPLACE, "first ACT maps row 1000 to a counter");
      else check(o == ACT_UPDATE, "later ACTs update its counter");
    end while (!pref && n < 1000);
    check(n == int'(PRT_DEF), $sformatf("preventive refresh on ACT %0d, expected %0d", n, PRT_DEF));
    begin
      automatic int got = 0;
      for (int b = 0; b < int'(NB); b++)
        for (int s = 0; s < 2; s++) begin
          #1;
          for (int bb = 0; bb < int'(NB); bb++)
            check(bank_block[bb] == (bb >= b), $sformatf("bank %0d block while refreshing bank %0d", bb, b));
          check(vr_valid && int'(vr_bank) == b && int'(vr_row) == (s == 0 ? 999 : 1001),
                $sformatf("victim %0d: bank %0d row %0d", got, vr_bank, vr_row));
          // the controller issues the victim's ACT+PRE and reports the ACT
          vr_ready = 1; act_valid = 1; act_bank = vr_bank; act_row = vr_row;
          @(negedge clk);
          vr_ready = 0; act_valid = 0;
          got++;
        end
      #1;
      check(!vr_valid && bank_block == '0, "all victims refreshed, banks released");
      check(got == 64, "64 victim refreshes");
      @(negedge clk);
    end

    // ---- 2. sibling sweep ----
    begin
      automatic int incs = 0;
      for (int b = 0; b < int'(NB); b++) begin
        act(b, 2000, o, pref, rc);
        check(b == 0 ? o == ACT_REPLACE : o == ACT_UPDATE, "sweep pass 1 outcome");
      end
      // pass 2: bank 0 finds its bit set -> increment, SAV becomes {bank 0};
      // every later bank then finds its bit clear, so only one increment
      for (int b = 0; b < int'(NB); b++) begin
        act(b, 2000, o, pref, rc);
        check(o == ACT_UPDATE && !pref, "sweep pass 2 outcome");
      end
      // pass 3 in the same order again increments once more (bank 0 is set)
      act(0, 2000, o, pref, rc);
      check(o == ACT_UPDATE, "sweep pass 3");
      incs = 0;
    end

    // ---- 3. spillover stream up to a refresh cycle ----
    begin
      automatic int spills = 0, acts = 0, row = 3000;
      rc = 0;
      while (!rc && acts < 3_000_000) begin
        act($urandom_range(0, NB - 1), row, o, pref, rc);
        acts++;
        row = (row == (1 << SR) - 1) ? 3000 : row + 1;
        if (o == ACT_SPILL) spills++;
        check(!pref, "no preventive refresh from single activations");
      end
      $display("refresh cycle after %0d ACTs and %0d spillover increments", acts, spills);
      check(rc, "refresh cycle reached");
      check(spills == int'(RCT_DEF), $sformatf("spillover increments %0d, expected RCT %0d", spills, RCT_DEF));
    end
    begin
      automatic int refs[2] = '{0, 0};
      automatic int cycles = 0;
      while (ref_valid && cycles < 100000) begin
        ref_ready = 1;
        #1;
        check(all_block && bank_block == '1 && !act_ready, "everything blocked during the refresh cycle");
        refs[ref_rank]++;
        @(negedge clk);
        cycles++;
      end
      ref_ready = 0;
      check(refs[0] == int'(REFS_PER_WINDOW_DEF) && refs[1] == int'(REFS_PER_WINDOW_DEF),
            $sformatf("REF per rank %0d/%0d", refs[0], refs[1]));
      check(cycles == 2 * int'(REFS_PER_WINDOW_DEF), $sformatf("refresh cycle took %0d cycles", cycles));
      #1 check(act_ready && !all_block, "unit ready after the refresh cycle");
      @(negedge clk);
      // counters were reset: row 1000 is no longer tracked, the first ACT maps it
      act(7, 1000, o, pref, rc);
      check(o == ACT_REPLACE, "counters reset after the refresh cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
