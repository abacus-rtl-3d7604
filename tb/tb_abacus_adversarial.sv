// tb_abacus_adversarial: the "ABACuS-Adversarial" access pattern on the ABACuS
// unit in its NRH = 500 configuration (5440 counters, PRT = 250, RCT = 248,
// 9-bit RAC fields, 32 banks), the configuration under which the paper evaluates
// attacks.
//
// Every ACT goes to a row ID that was not activated recently, in a random bank,
// one ACT per cycle. No counter can keep a row, so the spillover counter climbs:
// once every counter whose RAC equals the spillover value has been replaced, the
// next new row finds no candidate and increments it. The testbench expects a
// refresh cycle on exactly the RCT-th spillover increment, after at most
// RCT x (N_ENTRIES + 1) ACTs; no preventive refresh on the way; then
// 2 x 8192 REF commands during which every bank is blocked and no ACT is
// accepted; and empty counters afterwards.
module tb_abacus_adversarial;
  import abacus_pkg::*;
  localparam int unsigned NE = 5440, PRT = 250, RCT = 248, SRAC = 9;
  localparam int unsigned NB = 32, SR = 17, BW = 5;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready, vr_valid, vr_ready = 0, ref_valid, ref_ready = 0, all_block;
  logic [BW-1:0] act_bank = 0, vr_bank;
  logic [SR-1:0] act_row = 0, vr_row;
  logic [0:0]    ref_rank;
  logic [NB-1:0] bank_block;
  act_outcome_e  ev_outcome;
  logic ev_prev_ref, ev_refresh_cycle, ev_prq_overflow, ev_period_reset;

  abacus #(.N_ENTRIES(NE), .PRT(PRT), .RCT(RCT), .S_RAC(SRAC)) dut (.*);

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
    #30_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    begin
      automatic int spills = 0, acts = 0, row = 20000;
      automatic bit rc = 0;
      automatic int refs[2] = '{0, 0};
      automatic int cycles = 0;
      while (!rc && acts < 3_000_000) begin
        act_valid = 1; act_bank = BW'($urandom_range(0, NB - 1)); act_row = SR'(row);
        #1;
        check(act_ready && !ev_prev_ref, "adversarial ACT accepted, no preventive refresh");
        if (ev_outcome == ACT_SPILL) spills++;
        rc = ev_refresh_cycle;
        @(negedge clk);
        act_valid = 0;
        acts++;
        row = (row == (1 << SR) - 1) ? 20000 : row + 1;
      end
      $display("ABACuS-Adversarial: refresh cycle after %0d ACTs, %0d spillover increments", acts, spills);
      check(rc && spills == int'(RCT), $sformatf("refresh cycle on spillover increment %0d, expected %0d", spills, RCT));
      // each spillover value v is left only after every counter holding RAC v has
      // been replaced, so a round takes at most N_ENTRIES+1 ACTs
      check(acts <= int'(RCT) * (int'(NE) + 1) && acts >= (int'(RCT) - 1) * (int'(NE) - 200),
            $sformatf("%0d ACTs to the refresh cycle", acts));
      while (ref_valid && cycles < 100000) begin
        ref_ready = 1;
        #1;
        check(all_block && bank_block == '1 && !act_ready, "everything blocked during the refresh cycle");
        refs[ref_rank]++;
        @(negedge clk);
        cycles++;
      end
      ref_ready = 0;
      check(refs[0] == 8192 && refs[1] == 8192, $sformatf("REF per rank %0d/%0d", refs[0], refs[1]));
      #1 check(act_ready && !all_block, "unit ready after the refresh cycle");
      @(negedge clk);
      act_valid = 1; act_bank = 0; act_row = SR'(1000);
      #1 check(ev_outcome == ACT_REPLACE, "counters empty after the refresh cycle");
      @(negedge clk);
      act_valid = 0;
    end
    check(!vr_valid && !ev_prq_overflow, "no victim refresh pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
