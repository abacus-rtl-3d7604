// tb_spillover_counter: checks the spillover counter at its default size
// (S_RAC = 10, RCT = 498). It increments up to RCT, checking the value after
// every increment and that at_rct is high exactly on the increment that reaches
// RCT, checks that idle cycles hold the value and that clear returns it to 0.
module tb_spillover_counter;
  import abacus_pkg::*;
  localparam int unsigned S_RAC = S_RAC_DEF;
  localparam int unsigned RCT   = RCT_DEF;

  logic clk = 0, rst_n = 0, inc = 0, clr = 0;
  logic [S_RAC-1:0] value;
  logic at_rct;
  int checks = 0, failures = 0;

  spillover_counter #(.S_RAC(S_RAC), .RCT(RCT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int expect_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(value == 0, "value is 0 after reset");
    for (int i = 1; i <= int'(RCT); i++) begin
      inc = 1;
      #1 check(at_rct == (i == int'(RCT)), $sformatf("at_rct on increment %0d", i));
      @(negedge clk);
      expect_v++;
      check(value == S_RAC'(expect_v), $sformatf("value %0d expected %0d", value, expect_v));
      // idle cycle every 50 increments
      if (i % 50 == 0) begin
        inc = 0;
        @(negedge clk);
        check(value == S_RAC'(expect_v), "value held when idle");
        check(!at_rct, "at_rct low when idle");
      end
    end
    inc = 0;
    clr = 1;
    @(negedge clk);
    clr = 0;
    check(value == 0, "clear resets the value");
    inc = 1; clr = 1;
    @(negedge clk);
    inc = 0; clr = 0;
    check(value == 0, "clear wins over increment");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
