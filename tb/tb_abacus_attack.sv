// tb_abacus_attack: the "RowHammer Attack" access pattern on the ABACuS unit in
// its NRH = 500 configuration (5440 counters, PRT = 250, RCT = 248, 9-bit RAC
// fields, 32 banks), the configuration under which the paper evaluates attacks.
//
// The attacker repeatedly activates the same 32 row IDs in each of the 32 banks,
// bank-interleaved: for each pass, for each row, for each bank, one ACT. A memory
// controller model serves preventive refreshes first, as the paper prescribes,
// and would hold an attack ACT while its bank is blocked (with victims served
// first, the block is always lifted by the time the next attack ACT comes).
//
// Because all 32 siblings of a row are activated once per pass, the shared
// counter rises by one per pass (pass 1 maps the row with RAC 1; from pass 2 on,
// bank 0 finds its SAV bit set and increments, the other 31 banks only set their
// bits). The testbench therefore expects every aggressor's preventive refresh in
// pass PRT = 250, exactly 32 of them in 300 passes, 64 victim refreshes per
// aggressor, no refresh cycle, and no row activated more than PRT+1 times
// between refreshes of its neighbours. With 32 separate counters per row ID (one
// per bank) the same pattern would need 32 times as many counters.
module tb_abacus_attack;
  import abacus_pkg::*;
  localparam int unsigned NE = 5440, PRT = 250, RCT = 248, SRAC = 9;
  localparam int unsigned NB = 32, SR = 17, BW = 5, NROWS_ATT = 32, PASSES = 300;

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
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int agg_row(int k);
    return 1000 + 4 * k;            // victims of different aggressors never coincide
  endfunction

  int hammer[int];                  // key bank*2^17+row: ACTs since neighbours refreshed
  int prev_pass[int];               // aggressor row -> pass of its preventive refresh
  int n_prev = 0, n_victims = 0, n_stalls = 0, n_blocked = 0, n_rc = 0, max_hammer = 0;

  // one ACT (attack or victim); returns whether a preventive refresh was requested
  task automatic issue(int b, int r, bit victim, int pass);
    int key = b * (1 << SR) + r;
    act_valid = 1; act_bank = BW'(b); act_row = SR'(r); vr_ready = victim;
    #1;
    check(act_ready, "ACT accepted");
    if (ev_prev_ref) begin
      n_prev++;
      check(!prev_pass.exists(r), $sformatf("second preventive refresh of row %0d", r));
      prev_pass[r] = pass;
    end
    if (ev_refresh_cycle) n_rc++;
    if (!hammer.exists(key)) hammer[key] = 0;
    hammer[key]++;
    if (hammer[key] > max_hammer) max_hammer = hammer[key];
    if (victim) n_victims++;
    @(negedge clk);
    act_valid = 0; vr_ready = 0;
  endtask

  // serve all pending victim refreshes; clears the aggressor's count when both of
  // its neighbours in a bank have been refreshed
  task automatic serve_victims(int pass);
    while (vr_valid) begin
      int b = int'(vr_bank), v = int'(vr_row);
      check(bank_block[b], "bank of a pending victim refresh is blocked");
      n_blocked++;
      issue(b, v, 1, pass);
      if (((v - 1000) % 4) == 1) begin   // upper victim of aggressor v-1: both done in this bank
        hammer[b * (1 << SR) + v - 1] = 0;
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 1; p <= int'(PASSES); p++) begin
      for (int k = 0; k < int'(NROWS_ATT); k++)
        for (int b = 0; b < int'(NB); b++) begin
          serve_victims(p);
          #1;
          while (bank_block[b]) begin
            n_stalls++;
            serve_victims(p);
            #1;
          end
          issue(b, agg_row(k), 0, p);
        end
    end
    serve_victims(PASSES + 1);
    $display("preventive refreshes=%0d victim refreshes=%0d stalls=%0d refresh cycles=%0d max ACTs between refreshes=%0d",
             n_prev, n_victims, n_stalls, n_rc, max_hammer);
    check(n_prev == NROWS_ATT, $sformatf("%0d preventive refreshes, expected %0d", n_prev, NROWS_ATT));
    for (int k = 0; k < int'(NROWS_ATT); k++)
      check(prev_pass.exists(agg_row(k)) && prev_pass[agg_row(k)] == int'(PRT),
            $sformatf("row %0d refreshed in pass %0d, expected %0d", agg_row(k),
                      prev_pass.exists(agg_row(k)) ? prev_pass[agg_row(k)] : -1, PRT));
    check(n_victims == NROWS_ATT * 2 * NB, "64 victim refreshes per aggressor");
    check(n_blocked == n_victims, "every victim refresh found its bank blocked");
    check(n_rc == 0, "no refresh cycle under this attack");
    check(max_hammer <= int'(PRT) + 1, $sformatf("a row was activated %0d times between refreshes", max_hammer));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
