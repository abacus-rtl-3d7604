// tb_reset_period_timer: runs the timer with a 100-cycle period and checks that
// pulse is high exactly in cycles 99, 199, ... after reset release and low in all
// others.
module tb_reset_period_timer;
  localparam int unsigned P = 100;
  logic clk = 0, rst_n = 0, pulse;
  int checks = 0, failures = 0, pulses = 0;

  reset_period_timer #(.PERIOD_CYCLES(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5 * int'(P); c++) begin
      checks++;
      if (pulse != ((c % int'(P)) == int'(P) - 1)) begin
        failures++;
        $display("FAIL: cycle %0d pulse=%0b", c, pulse);
      end
      if (pulse) pulses++;
      @(negedge clk);
    end
    checks++;
    if (pulses != 5) begin failures++; $display("FAIL: %0d pulses", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
