// tb_abacus_controller: checks the ABACuS controller together with a counter
// table and a spillover counter (3 counters, 4 banks, 64 row IDs, PRT = 40,
// RCT = 30).
//
// Part 1 rebuilds the initial state of the worked example of four ACT commands
// in the ABACuS paper (rows 13/9/1 with RAC 27/12/14, SAV 0001/0101/1000,
// spillover 12) and then checks the printed state after each of the example's
// ACTs: (13, bank 1) sets a SAV bit; (13, bank 1) again increments RAC to 28 and
// leaves SAV = 0010; (20, bank 2) replaces the counter of row 9 with RAC 13,
// SAV 0100; (7, bank 1) increments the spillover counter to 13.
// Part 2 drives random and hammering ACT streams and compares every decision
// (update/replace/spill, preventive refresh request, refresh cycle request) and
// the stored RAC/SAV values with a behavioural reference model kept in this
// testbench, and checks the invariant the design relies on: a tracked row ID's
// counter (overflows included) is never below the true activation count of any
// of its sibling rows, and the spillover counter is never below the count of any
// untracked row.
module tb_abacus_controller;
  import abacus_pkg::*;
  localparam int unsigned NE = 3, SR = 6, SRAC = 7, NB = 4, PRT = 40, RCT = 30;
  localparam int unsigned IDXW = 2, BW = 2, CW = SRAC - 1;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0;
  logic [BW-1:0]   act_bank = 0;
  logic [SR-1:0]   act_row = 0;
  logic hit, cand, wr_en, spill_inc, spill_at_rct, prev_ref_req, rc_start, tb_clr = 0;
  logic [IDXW-1:0] hit_idx, cand_idx, wr_idx;
  logic [SRAC-1:0] hit_rac, wr_rac, spill_value;
  logic [NB-1:0]   hit_sav, wr_sav;
  logic [SR-1:0]   wr_row, prev_ref_row;
  act_outcome_e    outcome;

  abacus_counter_table #(.N_ENTRIES(NE), .S_RID(SR), .S_RAC(SRAC), .S_SAV(NB)) u_table (
    .clk, .rst_n, .srch_row(act_row), .srch_spill(spill_value),
    .hit, .hit_idx, .hit_rac, .hit_sav, .cand, .cand_idx,
    .wr_en, .wr_idx, .wr_row, .wr_rac, .wr_sav, .clr(rc_start || tb_clr));
  spillover_counter #(.S_RAC(SRAC), .RCT(RCT)) u_spill (
    .clk, .rst_n, .inc(spill_inc), .clr(rc_start || tb_clr), .value(spill_value), .at_rct(spill_at_rct));
  abacus_controller #(.N_ENTRIES(NE), .S_RID(SR), .S_RAC(SRAC), .S_SAV(NB), .PRT(PRT)) dut (
    .act_valid, .act_bank, .act_row, .hit, .hit_idx, .hit_rac, .hit_sav, .cand, .cand_idx,
    .spill_value, .spill_at_rct, .spill_inc, .wr_en, .wr_idx, .wr_row, .wr_rac, .wr_sav,
    .prev_ref_req, .prev_ref_row, .rc_start, .outcome);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_update = 0, n_replace = 0, n_spill = 0, n_prev = 0, n_rc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  bit m_valid[NE];
  int m_row[NE], m_cnt[NE], m_total[NE];
  bit m_ovf[NE];
  bit [NB-1:0] m_sav[NE];
  int m_spill;
  int true_cnt[NB][1 << SR];

  function automatic void model_clear();
    foreach (m_valid[i]) m_valid[i] = 0;
    m_spill = 0;
    foreach (true_cnt[b, r]) true_cnt[b][r] = 0;
  endfunction

  // Applies one ACT to the model; returns what the controller should do.
  function automatic void model_act(input int bank, input int row,
                                    output act_outcome_e o, output bit pref, output bit rc);
    int h = -1, c = -1;
    pref = 0; rc = 0;
    true_cnt[bank][row]++;
    for (int i = 0; i < NE; i++) if (m_valid[i] && m_row[i] == row) h = i;
    if (h >= 0) begin
      o = ACT_UPDATE;
      if (!m_sav[h][bank]) m_sav[h][bank] = 1'b1;
      else begin
        m_sav[h] = '0;
        m_sav[h][bank] = 1'b1;
        m_total[h]++;
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
      m_valid[c] = 1; m_row[c] = row; m_cnt[c] = m_spill + 1; m_total[c] = m_spill + 1;
      m_ovf[c] = 0; m_sav[c] = '0; m_sav[c][bank] = 1'b1;
      return;
    end
    o = ACT_SPILL;
    m_spill++;
    if (m_spill == RCT) begin rc = 1; model_clear(); end
  endfunction

  // One ACT through the design; checks the decision against the model.
  task automatic do_act(int bank, int row);
    act_outcome_e o;
    bit pref, rc;
    model_act(bank, row, o, pref, rc);
    act_valid = 1; act_bank = BW'(bank); act_row = SR'(row);
    #1;
    check(outcome == o, $sformatf("ACT b%0d r%0d: outcome %s expected %s", bank, row, outcome.name(), o.name()));
    check(prev_ref_req == pref, $sformatf("ACT b%0d r%0d: prev_ref_req %0b expected %0b", bank, row, prev_ref_req, pref));
    if (pref) check(prev_ref_row == SR'(row), "prev_ref_row");
    check(rc_start == rc, $sformatf("ACT b%0d r%0d: rc_start %0b expected %0b", bank, row, rc_start, rc));
    case (outcome)
      ACT_UPDATE:  n_update++;
      ACT_REPLACE: n_replace++;
      ACT_SPILL:   n_spill++;
      default: ;
    endcase
    if (prev_ref_req) n_prev++;
    if (rc_start) n_rc++;
    @(negedge clk);
    act_valid = 0;
  endtask

  // Looks up a row ID without activating it (takes one idle cycle).
  task automatic probe(int row, output bit h, output int rac, output bit [NB-1:0] sav);
    act_valid = 0; act_row = SR'(row);
    #1;
    h = hit; rac = int'(hit_rac); sav = hit_sav;
    @(negedge clk);
  endtask

  task automatic expect_entry(int row, int rac, bit [NB-1:0] sav);
    bit h; int r; bit [NB-1:0] s;
    probe(row, h, r, s);
    check(h && r == rac && s == sav,
          $sformatf("row %0d: hit %0b RAC %0d SAV %b, expected RAC %0d SAV %b", row, h, r, s, rac, sav));
  endtask

  // Checks stored state and the max-count invariant against the model.
  task automatic check_state();
    for (int i = 0; i < NE; i++) if (m_valid[i]) begin
      bit h; int r; bit [NB-1:0] s;
      probe(m_row[i], h, r, s);
      check(h && r == (m_ovf[i] ? (1 << CW) : 0) + m_cnt[i] && s == m_sav[i],
            $sformatf("state of row %0d", m_row[i]));
    end
    check(int'(spill_value) == m_spill, "spillover value");
    foreach (true_cnt[b, r]) if (true_cnt[b][r] > 0) begin
      int bound = m_spill;
      for (int i = 0; i < NE; i++) if (m_valid[i] && m_row[i] == r) bound = m_total[i];
      check(true_cnt[b][r] <= bound,
            $sformatf("invariant: bank %0d row %0d count %0d > bound %0d", b, r, true_cnt[b][r], bound));
    end
  endtask

  initial begin
    model_clear();
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- Part 1: the paper's worked example ----
    do_act(0, 13);                                   // row 13 -> counter 0
    repeat (26) do_act(0, 13);                       // RAC 27, SAV 0001
    do_act(0, 9);                                    // row 9 -> counter 1
    repeat (11) do_act(0, 9);                        // RAC 12
    do_act(2, 9);                                    // SAV 0101
    do_act(3, 1);                                    // row 1 -> counter 2
    repeat (13) do_act(3, 1);                        // RAC 14, SAV 1000
    for (int i = 0; i < 12; i++) do_act(0, 40 + i);  // spillover -> 12
    expect_entry(13, 27, 4'b0001);
    expect_entry(9, 12, 4'b0101);
    expect_entry(1, 14, 4'b1000);
    check(spill_value == 12, "initial spillover 12");
    do_act(1, 13);                                   // (1) update: SAV bit set
    expect_entry(13, 27, 4'b0011);
    do_act(1, 13);                                   // (2) update: RAC incremented
    expect_entry(13, 28, 4'b0010);
    do_act(2, 20);                                   // (3) replace counter of row 9
    expect_entry(20, 13, 4'b0100);
    begin automatic bit h; automatic int r; automatic bit [NB-1:0] s; probe(9, h, r, s); check(!h, "row 9 no longer tracked"); end
    expect_entry(13, 28, 4'b0010);
    expect_entry(1, 14, 4'b1000);
    check(spill_value == 12, "spillover unchanged by replace");
    do_act(1, 7);                                    // (4) spillover update
    check(spill_value == 13, $sformatf("spillover 13 after the fourth ACT (got %0d, model %0d)", spill_value, m_spill));
    check_state();

    // ---- Part 2: random traffic against the reference model ----
    tb_clr = 1; @(negedge clk); tb_clr = 0;
    model_clear();
    for (int n = 0; n < 6000; n++) begin
      automatic int kind = $urandom_range(0, 9);
      if (kind < 4) do_act($urandom_range(0, NB - 1), $urandom_range(0, 3));        // hot rows
      else if (kind < 8) do_act($urandom_range(0, NB - 1), $urandom_range(0, 63));  // random rows
      else repeat ($urandom_range(20, 120)) do_act($urandom_range(0, 1), 5);       // hammer row 5
      if (n % 7 == 0) check_state();
    end
    check_state();
    $display("updates=%0d replaces=%0d spills=%0d preventive=%0d refresh_cycles=%0d",
             n_update, n_replace, n_spill, n_prev, n_rc);
    check(n_update > 0 && n_replace > 0 && n_spill > 0, "all three outcomes seen");
    check(n_prev > 0, "preventive refresh requested at least once");
    check(n_rc > 0, "refresh cycle requested at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
