// refresh_cycle_engine: performs an ABACuS refresh cycle.
//
// When the spillover counter reaches the refresh cycle threshold, every row of
// the memory is refreshed so that all counters can restart from zero. The paper
// does this with tREFW/tREFI ordinary REF commands per rank; this engine issues
// REFS_PER_WINDOW REF requests to each of the N_RANKS ranks, alternating ranks,
// and holds busy high for the whole cycle so that the memory controller serves no
// demand request meanwhile. REFS_PER_WINDOW = 8192 is the JEDEC DDR4 count for a
// 64 ms window (the paper's 7.9 us tREFI would give 8101); the rank order is this
// design's choice.
//
// Interface: start (one-cycle pulse, ignored while busy) begins a cycle; REF
// requests leave on the ref_valid/ref_rank, ref_ready handshake (one REF is issued
// per cycle with both high); busy drops in the cycle after the last REF is taken.
module refresh_cycle_engine #(
  parameter int unsigned N_RANKS         = abacus_pkg::N_RANKS_DEF,
  parameter int unsigned REFS_PER_WINDOW = abacus_pkg::REFS_PER_WINDOW_DEF,
  localparam int unsigned TOTAL          = N_RANKS * REFS_PER_WINDOW,
  localparam int unsigned CW             = $clog2(TOTAL + 1),
  localparam int unsigned RW             = (N_RANKS > 1) ? $clog2(N_RANKS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          ref_valid,
  output logic [RW-1:0] ref_rank,
  input  logic          ref_ready
);

  logic [CW-1:0] left;      // REF commands still to issue

  assign busy      = (left != '0);
  assign ref_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left     <= '0;
      ref_rank <= '0;
    end else if (!busy) begin
      if (start) begin
        left     <= CW'(TOTAL);
        ref_rank <= '0;
      end
    end else if (ref_ready) begin
      left     <= left - 1'b1;
      ref_rank <= (ref_rank == RW'(N_RANKS - 1)) ? '0 : ref_rank + 1'b1;
    end
  end

endmodule
