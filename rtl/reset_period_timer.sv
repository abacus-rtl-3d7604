// reset_period_timer: marks the end of each ABACuS reset period.
//
// ABACuS only needs to count activations within one refresh window tREFW, after
// which every row has been refreshed by the normal refresh mechanism, so all
// counters and the spillover counter are reset once per window (64 ms). This is a
// free-running counter of PERIOD_CYCLES clock cycles whose pulse output is high
// for one cycle at the end of every period. The default assumes a 1.6 GHz
// controller clock (DDR4-3200): 64 ms = 102,400,000 cycles.
//
// Timing: pulse is high in cycles PERIOD_CYCLES-1, 2*PERIOD_CYCLES-1, ... counted
// from the release of reset.
module reset_period_timer #(
  parameter int unsigned PERIOD_CYCLES = abacus_pkg::RESET_PERIOD_DEF,
  localparam int unsigned CW           = (PERIOD_CYCLES > 1) ? $clog2(PERIOD_CYCLES) : 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic pulse
);

  logic [CW-1:0] cnt;

  assign pulse = (cnt == CW'(PERIOD_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cnt <= '0;
    else if (pulse) cnt <= '0;
    else            cnt <= cnt + 1'b1;
  end

endmodule
