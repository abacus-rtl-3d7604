// tb_abacus: end-to-end test of the ABACuS unit with a small memory controller
// model.
//
// Sizes are reduced so that every mechanism happens many times in a short run:
// 8 counters, 4 banks in 2 ranks, 64 row IDs, PRT = 16 (NRH = 32), RCT = 14,
// blast radius 1, 8 REF commands per rank per refresh cycle, a 3000-cycle reset
// period and a 2-deep preventive refresh queue.
//
// The memory controller model issues one command per cycle: a REF when a refresh
// cycle asks for one, otherwise (randomly) a pending victim refresh, reported as
// an ACT of the victim row, or a demand ACT to a bank that is not blocked. Demand
// traffic mixes random rows, sibling sweeps (one row ID in every bank), double-
// sided hammering and a stream of distinct rows that drives the spillover
// counter up (the access pattern the paper calls ABACuS-Adversarial).
//
// Checks: every ACT's outcome, preventive refresh request and refresh cycle
// against a reference model of the algorithm; victim requests are exactly the
// neighbours of each aggressor in all banks; a bank with outstanding victims is
// blocked; a refresh cycle issues 8 REF per rank with all banks blocked and no
// ACT accepted; the reset period is exactly 3000 cycles; and, as the security
// property, no row is activated more than PRT+1 times between two refreshes of
// its neighbours within a tracking period. Each mechanism must occur.
module tb_abacus;
  import abacus_pkg::*;
  localparam int unsigned NE = 8, SR = 6, NB = 4, SRAC = 6, PRT = 16, RCT = 14;
  localparam int unsigned NRK = 2, BR = 1, NREF = 8, PERIOD = 3000, QD = 2;
  localparam int unsigned NROWS = 1 << SR, BW = 2, CW = SRAC - 1;
  localparam int unsigned CYCLES = 60000;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready, vr_valid, vr_ready = 0, ref_valid, ref_ready = 0, all_block;
  logic [BW-1:0] act_bank = 0, vr_bank;
  logic [SR-1:0] act_row = 0, vr_row;
  logic [0:0]    ref_rank;
  logic [NB-1:0] bank_block;
  act_outcome_e  ev_outcome;
  logic ev_prev_ref, ev_refresh_cycle, ev_prq_overflow, ev_period_reset;

  abacus #(.N_ENTRIES(NE), .S_RID(SR), .S_RAC(SRAC), .S_SAV(NB), .PRT(PRT), .RCT(RCT),
           .N_RANKS(NRK), .BLAST_RADIUS(BR), .REFS_PER_WINDOW(NREF), .RESET_PERIOD(PERIOD),
           .PRQ_DEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_update_sav = 0, n_update_inc = 0, n_replace = 0, n_spill = 0, n_prev = 0;
  int n_victim = 0, n_victim_act_prev = 0, n_block_stall = 0, n_rc_rct = 0, n_rc_ovf = 0;
  int n_period = 0, n_refs = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #((CYCLES + 5000) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model of the tracking algorithm ----------------
  bit m_valid[NE];
  int m_row[NE], m_cnt[NE];
  bit m_ovf[NE];
  bit [NB-1:0] m_sav[NE];
  int m_spill;

  function automatic void model_clear();
    foreach (m_valid[i]) m_valid[i] = 0;
    m_spill = 0;
  endfunction

  function automatic void model_act(input int bank, input int row, output act_outcome_e o,
                                    output bit inc, output bit pref, output bit rc);
    int h = -1, c = -1;
    pref = 0; rc = 0; inc = 0;
    for (int i = 0; i < NE; i++) if (m_valid[i] && m_row[i] == row) h = i;
    if (h >= 0) begin
      o = ACT_UPDATE;
      if (!m_sav[h][bank]) m_sav[h][bank] = 1'b1;
      else begin
        inc = 1;
        m_sav[h] = '0;
        m_sav[h][bank] = 1'b1;
        m_cnt[h]++;
        if (m_cnt[h] == PRT) begin m_cnt[h] = 0; m_ovf[h] = 1; pref = 1; end
      end
      return;
    end
    for (int i = NE - 1; i >= 0; i--) begin
      int rac = m_valid[i] ? (m_ovf[i] ? -1 : m_cnt[i]) : 0;
      if (rac == m_spill) c = i;
    end
    if (c >= 0) begin
      o = ACT_REPLACE;
      m_valid[c] = 1; m_row[c] = row; m_cnt[c] = m_spill + 1;
      m_ovf[c] = 0; m_sav[c] = '0; m_sav[c][bank] = 1'b1;
      return;
    end
    o = ACT_SPILL;
    m_spill++;
    if (m_spill == RCT) rc = 1;
  endfunction

  // ---------------- victim bookkeeping and security check ----------------
  int pending[NB][NROWS];          // victim refreshes still owed, per bank and row
  int hammer[NB][NROWS];           // ACTs of a row since both its neighbours were refreshed,
                                   // in the current tracking period
  int hammer_prev[NB][NROWS];      // the same, in the previous reset period
  int max_two_window = 0;
  bit lo_done[NB][NROWS], hi_done[NB][NROWS];

  function automatic void add_victims(int agg);
    for (int b = 0; b < NB; b++)
      for (int d = 1; d <= BR; d++) begin
        if (agg - d >= 0) pending[b][agg - d]++;
        if (agg + d < NROWS) pending[b][agg + d]++;
      end
  endfunction

  function automatic bit bank_has_pending(int b);
    for (int r = 0; r < NROWS; r++) if (pending[b][r] > 0) return 1;
    return 0;
  endfunction

  function automatic void all_refreshed();
    foreach (pending[b, r]) pending[b][r] = 0;
    foreach (hammer[b, r]) begin
      hammer[b][r] = 0; hammer_prev[b][r] = 0; lo_done[b][r] = 0; hi_done[b][r] = 0;
    end
  endfunction

  // row v of bank b has been refreshed (victim refresh or its own activation)
  function automatic void row_refreshed(int b, int v);
    if (v + 1 < NROWS) begin
      lo_done[b][v + 1] = 1;
      if (lo_done[b][v + 1] && (hi_done[b][v + 1] || v + 2 >= NROWS)) begin
        hammer[b][v + 1] = 0; hammer_prev[b][v + 1] = 0; lo_done[b][v + 1] = 0; hi_done[b][v + 1] = 0;
      end
    end
    if (v - 1 >= 0) begin
      hi_done[b][v - 1] = 1;
      if (hi_done[b][v - 1] && (lo_done[b][v - 1] || v - 2 < 0)) begin
        hammer[b][v - 1] = 0; hammer_prev[b][v - 1] = 0; lo_done[b][v - 1] = 0; hi_done[b][v - 1] = 0;
      end
    end
  endfunction

  // ---------------- demand traffic ----------------
  int sweep_row = 0, sweep_bank = 0, adv_row = 20, phase = 0;

  function automatic void next_demand(output int b, output int r);
    case (phase)
      0: begin b = $urandom_range(0, NB - 1); r = $urandom_range(0, NROWS - 1); end
      1: begin // sibling sweep: one row ID through every bank, then the next
           b = sweep_bank; r = sweep_row;
         end
      2: begin // double-sided hammering of rows 30 and 32 in a random bank
           b = $urandom_range(0, NB - 1); r = ($urandom_range(0, 1) != 0) ? 30 : 32;
         end
      default: begin // distinct rows, each activated once: drives the spillover counter
           b = $urandom_range(0, NB - 1); r = adv_row;
         end
    endcase
  endfunction

  // ---------------- the memory controller model ----------------
  initial begin
    automatic int rc_refs_left = 0;
    automatic int period_ctr = 0, last_period = -1;
    automatic bit in_rc = 0;
    model_clear();
    all_refreshed();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      int db, dr;
      bit issue_victim, issue_demand;
      if (cyc % 2500 == 0) phase = (phase + 1) % 4;
      // decide this cycle's command
      act_valid = 0; vr_ready = 0; ref_ready = 0;
      issue_victim = 0; issue_demand = 0;
      if (ref_valid) begin
        ref_ready = ($urandom_range(0, 3) != 0);
      end else if (act_ready) begin
        if (vr_valid && $urandom_range(0, 1) != 0) issue_victim = 1;
        else if ($urandom_range(0, 4) != 0) begin
          next_demand(db, dr);
          if (bank_block[db]) n_block_stall++;
          else issue_demand = 1;
        end
      end
      if (issue_victim) begin
        vr_ready = 1; act_valid = 1; act_bank = vr_bank; act_row = vr_row;
      end else if (issue_demand) begin
        act_valid = 1; act_bank = BW'(db); act_row = SR'(dr);
      end
      #1;
      // ---- check this cycle against the models ----
      for (int b = 0; b < NB; b++) if (bank_has_pending(b))
        check(bank_block[b], $sformatf("bank %0d not blocked with victims pending", b));
      if (ev_period_reset) begin
        n_period++;
        if (last_period >= 0) check(cyc - last_period == PERIOD, $sformatf("reset period %0d", cyc - last_period));
        last_period = cyc;
        check(!act_ready, "no ACT accepted in the reset cycle");
        model_clear();
        // The DRAM refreshes every row once per reset period on its own, so
        // activations older than the previous period no longer matter.
        foreach (hammer[b, r]) begin hammer_prev[b][r] = hammer[b][r]; hammer[b][r] = 0; end
      end
      if (in_rc) begin
        check(all_block && bank_block == '1 && !act_ready, "everything blocked during a refresh cycle");
      end
      if (ref_valid && ref_ready) begin
        n_refs++;
        rc_refs_left--;
        check(in_rc && rc_refs_left >= 0, "REF outside a refresh cycle");
      end
      if (act_valid) begin
        act_outcome_e o;
        bit inc, pref, rc;
        automatic int b = int'(act_bank), r = int'(act_row);
        check(act_ready, "ACT only when ready");
        model_act(b, r, o, inc, pref, rc);
        check(ev_outcome == o, $sformatf("ACT b%0d r%0d outcome %s expected %s", b, r, ev_outcome.name(), o.name()));
        check(ev_prev_ref == pref, $sformatf("ACT b%0d r%0d prev_ref %0b expected %0b", b, r, ev_prev_ref, pref));
        check(ev_refresh_cycle == (rc || ev_prq_overflow), "refresh cycle start");
        check(!ev_prq_overflow || pref, "queue overflow only on a preventive refresh request");
        if (o == ACT_UPDATE) begin if (inc) n_update_inc++; else n_update_sav++; end
        if (o == ACT_REPLACE) n_replace++;
        if (o == ACT_SPILL) n_spill++;
        if (o == ACT_SPILL && phase == 3) adv_row = (adv_row >= 60) ? 20 : adv_row + 1;
        if (phase == 1) begin
          sweep_bank = (sweep_bank + 1) % NB;
          if (sweep_bank == 0) sweep_row = (sweep_row + 1) % 8;
        end
        if (pref) n_prev++;
        if (pref && issue_victim) n_victim_act_prev++;
        if (issue_victim) begin
          n_victim++;
          check(pending[b][r] > 0, $sformatf("unexpected victim refresh b%0d r%0d", b, r));
          if (pending[b][r] > 0) pending[b][r]--;
        end
        // security bookkeeping: the ACT disturbs its neighbours and restores itself
        hammer[b][r]++;
        check(hammer[b][r] <= PRT + 1, $sformatf("row b%0d r%0d activated %0d times unprotected", b, r, hammer[b][r]));
        if (hammer[b][r] + hammer_prev[b][r] > max_two_window) max_two_window = hammer[b][r] + hammer_prev[b][r];
        row_refreshed(b, r);
        if (ev_refresh_cycle) begin
          if (ev_prq_overflow) n_rc_ovf++; else n_rc_rct++;
          model_clear();
          all_refreshed();
          in_rc = 1;
          rc_refs_left = NRK * NREF;
        end else if (pref) add_victims(r);
      end else begin
        check(ev_outcome == ACT_NONE && !ev_prev_ref && !ev_refresh_cycle, "no event without an ACT");
      end
      @(negedge clk);
      if (in_rc && !ref_valid) begin
        check(rc_refs_left == 0, $sformatf("refresh cycle ended with %0d REF missing", rc_refs_left));
        in_rc = 0;
      end
    end
    $display("sav_only=%0d rac_inc=%0d replace=%0d spill=%0d prev_ref=%0d victims=%0d victim_triggered_prev=%0d",
             n_update_sav, n_update_inc, n_replace, n_spill, n_prev, n_victim, n_victim_act_prev);
    $display("most activations of a row over two reset periods without neighbour refresh: %0d (NRH = %0d)",
             max_two_window, 2 * PRT);
    $display("bank_block_stalls=%0d rc_by_rct=%0d rc_by_queue_overflow=%0d refs=%0d period_resets=%0d",
             n_block_stall, n_rc_rct, n_rc_ovf, n_refs, n_period);
    check(max_two_window < 2 * PRT, "no row reaches NRH activations between neighbour refreshes");
    check(n_update_sav > 0, "sibling activation absorbed by the SAV");
    check(n_update_inc > 0, "RAC incremented");
    check(n_replace > 0, "counter replaced");
    check(n_spill > 0, "spillover incremented");
    check(n_prev > 0, "preventive refresh");
    check(n_victim > 0, "victim refreshes issued");
    check(n_block_stall > 0, "demand request held by bank blocking");
    check(n_rc_rct > 0, "refresh cycle by RCT");
    check(n_rc_ovf > 0, "refresh cycle by preventive queue overflow");
    check(n_period > 0, "periodic reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
