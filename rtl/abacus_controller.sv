// abacus_controller: the ABACuS controller's per-ACT decision logic.
//
// For every ACT command (act_valid) it looks at the counter table's two search
// results and the spillover counter and does exactly one of:
//   * update  - the row ID is tracked. If the SAV bit of the activated bank is 0
//               it is set; if it is 1 the RAC count is incremented and the SAV
//               becomes one-hot at that bank. When the increment makes the count
//               reach PRT, the overflow bit is set, the count restarts at 0 and a
//               preventive refresh of the row's victims in all banks is requested.
//   * replace - the row ID is not tracked but a counter's RAC equals the
//               spillover value: that counter takes the row ID, RAC = spillover+1,
//               SAV one-hot at the activated bank.
//   * spill   - neither: the spillover counter is incremented; if that makes it
//               reach RCT a refresh cycle is requested (which also resets all
//               counters, done by the top level).
// All of this follows the paper's Sections 4.2-4.3. Keeping the count in S_RAC-1
// bits plus an overflow bit, and requesting the refresh when the count reaches PRT
// (every multiple of PRT of the un-wrapped value), follows the paper's overflow bit
// description.
//
// Timing: purely combinational. The table write, spillover increment and the
// request strobes are valid in the cycle of act_valid and take effect at the next
// clock edge of the blocks they drive, so one ACT is handled per cycle.
// wr_row and prev_ref_row are act_row passed on unchanged: they are outputs so
// that the table and the refresh engine take their row ID from the decision
// block rather than from the command bus directly.
module abacus_controller
  import abacus_pkg::*;
#(
  parameter int unsigned N_ENTRIES = abacus_pkg::N_ENTRIES_DEF,
  parameter int unsigned S_RID     = abacus_pkg::S_RID_DEF,
  parameter int unsigned S_RAC     = abacus_pkg::S_RAC_DEF,
  parameter int unsigned S_SAV     = abacus_pkg::S_SAV_DEF,
  parameter int unsigned PRT       = abacus_pkg::PRT_DEF,
  localparam int unsigned IDXW     = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1,
  localparam int unsigned BW       = (S_SAV > 1) ? $clog2(S_SAV) : 1
) (
  // ACT command observed on the memory controller's command bus
  input  logic             act_valid,
  input  logic [BW-1:0]    act_bank,
  input  logic [S_RID-1:0] act_row,
  // counter table search results (searched with act_row and spill_value)
  input  logic             hit,
  input  logic [IDXW-1:0]  hit_idx,
  input  logic [S_RAC-1:0] hit_rac,
  input  logic [S_SAV-1:0] hit_sav,
  input  logic             cand,
  input  logic [IDXW-1:0]  cand_idx,
  // spillover counter
  input  logic [S_RAC-1:0] spill_value,
  input  logic             spill_at_rct,
  output logic             spill_inc,
  // counter table write port
  output logic             wr_en,
  output logic [IDXW-1:0]  wr_idx,
  output logic [S_RID-1:0] wr_row,
  output logic [S_RAC-1:0] wr_rac,
  output logic [S_SAV-1:0] wr_sav,
  // requests
  output logic             prev_ref_req,   // refresh the victims of act_row in all banks
  output logic [S_RID-1:0] prev_ref_row,
  output logic             rc_start,       // start a refresh cycle and reset all counters
  output act_outcome_e     outcome
);

  localparam int unsigned CW = S_RAC - 1;    // count bits below the overflow bit

  logic [S_SAV-1:0] bank_onehot;
  logic             ovf;
  logic [CW-1:0]    count;
  logic [CW:0]      count_inc;

  assign bank_onehot = S_SAV'(1) << act_bank;
  assign ovf         = hit_rac[S_RAC-1];
  assign count       = hit_rac[CW-1:0];
  assign count_inc   = {1'b0, count} + 1'b1;
  assign prev_ref_row = act_row;

  always_comb begin
    spill_inc    = 1'b0;
    wr_en        = 1'b0;
    wr_idx       = hit_idx;
    wr_row       = act_row;
    wr_rac       = hit_rac;
    wr_sav       = hit_sav;
    prev_ref_req = 1'b0;
    rc_start     = 1'b0;
    outcome      = ACT_NONE;
    if (act_valid) begin
      if (hit) begin
        outcome = ACT_UPDATE;
        wr_en   = 1'b1;
        if ((hit_sav & bank_onehot) == '0) begin
          // first activation of this sibling since the RAC was last incremented
          wr_sav = hit_sav | bank_onehot;
        end else begin
          wr_sav = bank_onehot;
          if (count_inc == (CW+1)'(PRT)) begin
            wr_rac       = {1'b1, CW'(0)};
            prev_ref_req = 1'b1;
          end else begin
            wr_rac = {ovf, count_inc[CW-1:0]};
          end
        end
      end else if (cand) begin
        outcome = ACT_REPLACE;
        wr_en   = 1'b1;
        wr_idx  = cand_idx;
        wr_rac  = spill_value + 1'b1;
        wr_sav  = bank_onehot;
      end else begin
        outcome   = ACT_SPILL;
        spill_inc = 1'b1;
        rc_start  = spill_at_rct;
      end
    end
  end

  initial assert (PRT >= 2 && PRT <= (1 << CW))
    else $fatal(1, "PRT must be representable in the S_RAC-1 count bits");

endmodule
