// abacus_counter_table: the ABACuS counter table (Row ID Table, RAC Table and SAV
// Table, N_ENTRIES entries each).
//
// Every entry holds a valid bit, a row ID, a RAC field {overflow, count} and a
// sibling activation vector with one bit per bank. The Row ID Table and the RAC
// Table are content-addressable: in the same cycle the table compares the
// activated row ID against every valid row ID (a hit) and the spillover counter
// value against every RAC field (a replacement candidate). The SAV Table is a
// plain memory read at the hit index and written, whole, at the write index; it is
// never searched and never cleared, because a counter's SAV is always written
// when a row ID is mapped to it.
//
// An entry that is not valid behaves as a counter with RAC = 0: it is a
// replacement candidate while the spillover counter is 0, which is what the
// paper's all-zero state after reset gives. Because the overflow bit is the top
// bit of the RAC field and the spillover value never reaches 2^(S_RAC-1), a
// counter with its overflow bit set never equals the spillover value and is never
// replaced, as the paper requires. When several counters qualify, the one with the
// lowest index is chosen (the paper does not say which).
//
// Timing: search outputs are combinational from srch_row/srch_spill and the
// stored state; a write (wr_en) or a clear (clr) takes effect at the next rising
// clock edge. clr wins over a write in the same cycle. Reset (rst_n low)
// invalidates every entry, as clr does.
module abacus_counter_table #(
  parameter int unsigned N_ENTRIES = abacus_pkg::N_ENTRIES_DEF,
  parameter int unsigned S_RID     = abacus_pkg::S_RID_DEF,
  parameter int unsigned S_RAC     = abacus_pkg::S_RAC_DEF,
  parameter int unsigned S_SAV     = abacus_pkg::S_SAV_DEF,
  localparam int unsigned IDXW     = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // search
  input  logic [S_RID-1:0] srch_row,
  input  logic [S_RAC-1:0] srch_spill,
  output logic             hit,
  output logic [IDXW-1:0]  hit_idx,
  output logic [S_RAC-1:0] hit_rac,
  output logic [S_SAV-1:0] hit_sav,
  output logic             cand,
  output logic [IDXW-1:0]  cand_idx,
  // write one entry
  input  logic             wr_en,
  input  logic [IDXW-1:0]  wr_idx,
  input  logic [S_RID-1:0] wr_row,
  input  logic [S_RAC-1:0] wr_rac,
  input  logic [S_SAV-1:0] wr_sav,
  // invalidate all entries
  input  logic             clr
);

  logic             valid [N_ENTRIES];
  logic [S_RID-1:0] rit   [N_ENTRIES];   // Row ID Table (CAM)
  logic [S_RAC-1:0] ract  [N_ENTRIES];   // RAC Table (CAM)
  logic [S_SAV-1:0] savt  [N_ENTRIES];   // SAV Table (SRAM)

  // Row ID search and RAC == spillover search, with a lowest-index priority encoder.
  always_comb begin
    hit      = 1'b0;
    hit_idx  = '0;
    cand     = 1'b0;
    cand_idx = '0;
    for (int unsigned i = 0; i < N_ENTRIES; i++) begin
      if (!hit && valid[i] && rit[i] == srch_row) begin
        hit     = 1'b1;
        hit_idx = IDXW'(i);
      end
      if (!cand && (valid[i] ? (ract[i] == srch_spill) : (srch_spill == '0))) begin
        cand     = 1'b1;
        cand_idx = IDXW'(i);
      end
    end
  end

  assign hit_rac = ract[hit_idx];
  assign hit_sav = savt[hit_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_ENTRIES; i++) valid[i] <= 1'b0;
    end else if (clr) begin
      for (int unsigned i = 0; i < N_ENTRIES; i++) valid[i] <= 1'b0;
    end else if (wr_en) begin
      valid[wr_idx] <= 1'b1;
    end
  end

  // Payload arrays have no reset: an entry is read only after it has been written.
  always_ff @(posedge clk) begin
    if (wr_en && !clr) begin
      rit[wr_idx]  <= wr_row;
      ract[wr_idx] <= wr_rac;
      savt[wr_idx] <= wr_sav;
    end
  end

  // A row ID is mapped to at most one counter.
  always_comb begin
    automatic int unsigned n = 0;
    for (int unsigned i = 0; i < N_ENTRIES; i++) if (valid[i] && rit[i] == srch_row) n++;
    if (rst_n) assert (n <= 1) else $error("row ID %0d tracked by %0d counters", srch_row, n);
  end

endmodule
