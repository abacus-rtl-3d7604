// abacus_pkg: constants and types shared by the ABACuS RowHammer tracker.
//
// ABACuS keeps one row activation counter (RAC) per row ID that is shared by the
// rows with that ID in every bank ("sibling rows"), plus a sibling activation
// vector (SAV) with one bit per bank. The defaults below are the configuration for
// a RowHammer threshold NRH = 1000 on a dual-rank DDR4 channel (32 banks,
// 128K rows per bank), which is the main configuration of the design. Smaller
// thresholds use PRT/RCT/N_ENTRIES/S_RAC = 250/248/5440/9, 125/123/10880/8 and
// 62/60/21760/7.
//
// The RAC field is S_RAC bits wide: the top bit is the overflow bit, the lower
// S_RAC-1 bits count 0 .. PRT-1. This split of S_RAC into count + overflow is
// this design's reading of the S_RAC column (it equals ceil(log2(PRT)) + 1 for all
// four thresholds).
package abacus_pkg;

  // Default configuration (NRH = 1000).
  localparam int unsigned NRH_DEF          = 1000;      // RowHammer threshold
  localparam int unsigned PRT_DEF          = 500;       // preventive refresh threshold = NRH/2
  localparam int unsigned RCT_DEF          = 498;       // refresh cycle threshold
  localparam int unsigned N_ENTRIES_DEF    = 2720;      // counters in the counter table
  localparam int unsigned S_RID_DEF        = 17;        // row ID bits (128K rows per bank)
  localparam int unsigned S_RAC_DEF        = 10;        // RAC bits, overflow bit included
  localparam int unsigned S_SAV_DEF        = 32;        // one SAV bit per bank (2 ranks x 16 banks)
  localparam int unsigned N_RANKS_DEF      = 2;
  localparam int unsigned BLAST_RADIUS_DEF = 1;
  // REF commands that refresh every row of a rank once (64 ms / 7.8 us, JEDEC DDR4).
  localparam int unsigned REFS_PER_WINDOW_DEF = 8192;
  // Reset period tREFW = 64 ms in cycles of a 1.6 GHz controller clock (DDR4-3200).
  localparam int unsigned RESET_PERIOD_DEF = 102_400_000;

  // What the controller did with one ACT command.
  typedef enum logic [1:0] {
    ACT_NONE     = 2'd0,   // no ACT this cycle
    ACT_UPDATE   = 2'd1,   // row ID already tracked: SAV bit set or RAC incremented
    ACT_REPLACE  = 2'd2,   // row ID mapped to a counter whose RAC equals the spillover value
    ACT_SPILL    = 2'd3    // row ID not tracked and no counter to map: spillover incremented
  } act_outcome_e;

endpackage
