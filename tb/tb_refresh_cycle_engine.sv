// tb_refresh_cycle_engine: starts refresh cycles with 2 ranks and 16 REF commands
// per rank, accepts REF requests with a random ready, and checks the number of
// REF commands per rank, that ranks alternate, that busy lasts until the last REF
// is accepted, that a start while busy is ignored, and that with ref_ready always
// high a cycle takes exactly 2*16 cycles.
module tb_refresh_cycle_engine;
  localparam int unsigned NR = 2, NREF = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, ref_valid, ref_ready = 0;
  logic [0:0] ref_rank;
  int checks = 0, failures = 0;

  refresh_cycle_engine #(.N_RANKS(NR), .REFS_PER_WINDOW(NREF)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_cycle(bit random_ready);
    int per_rank[NR];
    int cycles = 0, total = 0, last_rank = -1;
    foreach (per_rank[r]) per_rank[r] = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    while (busy && cycles < 10000) begin
      ref_ready = random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (cycles == 3) start = 1;      // ignored while busy
      check(ref_valid, "ref_valid while busy");
      if (ref_valid && ref_ready) begin
        per_rank[ref_rank]++;
        total++;
        if (last_rank >= 0) check(int'(ref_rank) != last_rank, "ranks alternate");
        last_rank = ref_rank;
      end
      @(negedge clk);
      start = 0;
      cycles++;
    end
    ref_ready = 0;
    foreach (per_rank[r]) check(per_rank[r] == NREF, $sformatf("rank %0d got %0d REF", r, per_rank[r]));
    check(total == NR * NREF, "total REF count");
    if (!random_ready) check(cycles == NR * NREF, $sformatf("refresh cycle took %0d cycles", cycles));
    check(!ref_valid, "no REF after the cycle");
  endtask

  initial begin
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !ref_valid, "idle after reset");
    run_cycle(0);
    repeat (3) @(negedge clk);
    run_cycle(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
