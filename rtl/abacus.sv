// abacus: the ABACuS RowHammer mitigation unit, placed in a DDR4 memory controller.
//
// ABACuS observes every ACT command the memory controller issues and keeps, for
// each tracked row ID, one activation counter shared by the rows with that ID in
// all banks (sibling rows). The counter holds the highest activation count among
// the siblings; a per-counter sibling activation vector (one bit per bank) lets
// many siblings be activated once each for a single increment. Row IDs that have
// no counter are covered by one spillover counter (Misra-Gries frequent-item
// tracking). Three things leave the unit:
//   * preventive refreshes: when a counter reaches PRT = NRH/2, the victim rows of
//     that row ID in all banks are requested on vr_*; demand requests to a bank
//     are held off (bank_block) until that bank's victims are done;
//   * refresh cycles: when the spillover counter reaches RCT, REF commands for
//     every row of every rank are requested on ref_* and all counters are reset;
//     all_block is high meanwhile;
//   * periodic reset: all counters are reset once per 64 ms window.
// If a preventive refresh is requested while the preventive refresh queue is
// full, a refresh cycle is started instead (it refreshes every row, so the
// request's victims are covered) and the queue is emptied. This fallback is this
// design's own; the paper does not discuss a full queue.
// Victim refreshes are themselves ACT commands; when the memory controller issues
// them it reports them on act_* like any other ACT, so each preventive refresh
// is counted as an activation of the victim row, as the paper prescribes for
// blast-radius (Half-Double) safety.
//
// Interface and timing: one ACT is accepted per cycle with act_valid && act_ready
// and is fully accounted for at the next rising edge (the paper's counter update
// fits inside tRRD). act_ready is low while a refresh cycle runs and in the cycle
// of a periodic reset; the memory controller must not issue an ACT then. A victim
// refresh is issued by raising vr_ready and, in the same cycle, reporting the
// victim's ACT on act_*. bank IDs are flat:
// {rank, bank group, bank} = 5 bits for 2 ranks of 16 banks. ev_* are one-cycle
// event strobes for statistics. The default parameters are the paper's
// configuration for NRH = 1000 (see abacus_pkg).
module abacus
  import abacus_pkg::*;
#(
  parameter int unsigned N_ENTRIES       = abacus_pkg::N_ENTRIES_DEF,
  parameter int unsigned S_RID           = abacus_pkg::S_RID_DEF,
  parameter int unsigned S_RAC           = abacus_pkg::S_RAC_DEF,
  parameter int unsigned S_SAV           = abacus_pkg::S_SAV_DEF,
  parameter int unsigned PRT             = abacus_pkg::PRT_DEF,
  parameter int unsigned RCT             = abacus_pkg::RCT_DEF,
  parameter int unsigned N_RANKS         = abacus_pkg::N_RANKS_DEF,
  parameter int unsigned BLAST_RADIUS    = abacus_pkg::BLAST_RADIUS_DEF,
  parameter int unsigned REFS_PER_WINDOW = abacus_pkg::REFS_PER_WINDOW_DEF,
  parameter int unsigned RESET_PERIOD    = abacus_pkg::RESET_PERIOD_DEF,
  parameter int unsigned PRQ_DEPTH       = 4,
  localparam int unsigned N_BANKS        = S_SAV,
  localparam int unsigned BW             = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned RW             = (N_RANKS > 1) ? $clog2(N_RANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // ACT commands issued by the memory controller (demand and preventive)
  input  logic               act_valid,
  input  logic [BW-1:0]      act_bank,
  input  logic [S_RID-1:0]   act_row,
  output logic               act_ready,
  // preventive refresh requests (ACT+PRE of one victim row)
  output logic               vr_valid,
  output logic [BW-1:0]      vr_bank,
  output logic [S_RID-1:0]   vr_row,
  input  logic               vr_ready,
  // REF requests of a refresh cycle
  output logic               ref_valid,
  output logic [RW-1:0]      ref_rank,
  input  logic               ref_ready,
  // request blocking
  output logic [N_BANKS-1:0] bank_block,
  output logic               all_block,
  // event strobes
  output act_outcome_e       ev_outcome,
  output logic               ev_prev_ref,
  output logic               ev_refresh_cycle,
  output logic               ev_prq_overflow,
  output logic               ev_period_reset
);

  localparam int unsigned IDXW = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1;

  logic             act_fire;
  logic             hit, cand;
  logic [IDXW-1:0]  hit_idx, cand_idx, wr_idx;
  logic [S_RAC-1:0] hit_rac, wr_rac, spill_value;
  logic [S_SAV-1:0] hit_sav, wr_sav;
  logic [S_RID-1:0] wr_row, prev_ref_row;
  logic             wr_en, spill_inc, spill_at_rct, prev_ref_req, rc_start;
  logic             rc_busy, prq_can_accept, period_pulse, clr;
  logic             prq_push, prq_overflow, rc_go;
  logic [N_BANKS-1:0] prq_block;

  assign act_ready    = !rc_busy && !period_pulse;
  assign act_fire     = act_valid && act_ready;
  assign prq_push     = prev_ref_req && prq_can_accept;
  assign prq_overflow = prev_ref_req && !prq_can_accept;
  assign rc_go        = rc_start || prq_overflow;
  assign clr          = rc_go || period_pulse;

  abacus_counter_table #(
    .N_ENTRIES(N_ENTRIES), .S_RID(S_RID), .S_RAC(S_RAC), .S_SAV(S_SAV)
  ) u_table (
    .clk, .rst_n,
    .srch_row(act_row), .srch_spill(spill_value),
    .hit, .hit_idx, .hit_rac, .hit_sav, .cand, .cand_idx,
    .wr_en, .wr_idx, .wr_row, .wr_rac, .wr_sav,
    .clr
  );

  spillover_counter #(.S_RAC(S_RAC), .RCT(RCT)) u_spill (
    .clk, .rst_n, .inc(spill_inc), .clr, .value(spill_value), .at_rct(spill_at_rct)
  );

  abacus_controller #(
    .N_ENTRIES(N_ENTRIES), .S_RID(S_RID), .S_RAC(S_RAC), .S_SAV(S_SAV), .PRT(PRT)
  ) u_ctrl (
    .act_valid(act_fire), .act_bank, .act_row,
    .hit, .hit_idx, .hit_rac, .hit_sav, .cand, .cand_idx,
    .spill_value, .spill_at_rct, .spill_inc,
    .wr_en, .wr_idx, .wr_row, .wr_rac, .wr_sav,
    .prev_ref_req, .prev_ref_row, .rc_start, .outcome(ev_outcome)
  );

  preventive_refresh_engine #(
    .N_BANKS(N_BANKS), .S_RID(S_RID), .N_ROWS(1 << S_RID),
    .BLAST_RADIUS(BLAST_RADIUS), .QDEPTH(PRQ_DEPTH)
  ) u_prev (
    .clk, .rst_n,
    .flush(rc_go), .req(prq_push), .req_row(prev_ref_row), .can_accept(prq_can_accept),
    .vr_valid, .vr_bank, .vr_row, .vr_ready,
    .bank_block(prq_block)
  );

  refresh_cycle_engine #(.N_RANKS(N_RANKS), .REFS_PER_WINDOW(REFS_PER_WINDOW)) u_rc (
    .clk, .rst_n, .start(rc_go), .busy(rc_busy),
    .ref_valid, .ref_rank, .ref_ready
  );

  reset_period_timer #(.PERIOD_CYCLES(RESET_PERIOD)) u_period (
    .clk, .rst_n, .pulse(period_pulse)
  );

  assign all_block        = rc_busy;
  assign bank_block       = prq_block | {N_BANKS{rc_busy}};
  assign ev_prev_ref      = prev_ref_req;
  assign ev_refresh_cycle = rc_go;
  assign ev_prq_overflow  = prq_overflow;
  assign ev_period_reset  = period_pulse;

  // The memory controller issues no ACT while ABACuS cannot take one.
  a_act_when_ready: assert property (@(posedge clk) disable iff (!rst_n) act_valid |-> act_ready)
    else $error("ACT issued while act_ready is low");

endmodule
