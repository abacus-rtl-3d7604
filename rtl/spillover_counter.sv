// spillover_counter: the ABACuS spillover counter.
//
// One S_RAC-bit register that holds an upper bound on the activation count of
// every row ID that has no ABACuS counter. The controller increments it when an
// activated row ID is neither tracked nor mappable to a counter. When an increment
// brings it to the refresh cycle threshold RCT, at_rct is high in that same cycle
// so that the controller can start a refresh cycle; the refresh cycle clears it
// (clr). The register lies in the paper's design; the at_rct compare output is
// this design's way of presenting the RCT check.
//
// Timing: value is the registered count; inc and clr act at the next rising
// edge, clr winning. at_rct is combinational from inc and value.
module spillover_counter #(
  parameter int unsigned S_RAC = abacus_pkg::S_RAC_DEF,
  parameter int unsigned RCT   = abacus_pkg::RCT_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc,
  input  logic             clr,
  output logic [S_RAC-1:0] value,
  output logic             at_rct
);

  assign at_rct = inc && (value == S_RAC'(RCT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      value <= '0;
    else if (clr)    value <= '0;
    else if (inc)    value <= value + 1'b1;
  end

  initial assert (RCT >= 1 && RCT < (1 << (S_RAC - 1)))
    else $fatal(1, "RCT must fit below the overflow bit of an S_RAC-bit field");

endmodule
