// tb_preventive_refresh_engine: 4 banks, 32 rows, blast radius 2, queue depth 3.
// Pushes aggressor rows (including the edge rows 0, 1 and 31) and checks that the
// victim refresh requests are exactly rows agg-2..agg+2 (without agg and without
// rows outside 0..31) in every bank, in bank-then-distance-then-side order; that
// a bank is blocked whenever one of its victims is still outstanding; that all
// banks are released at the end; that can_accept follows the queue occupancy and
// that flush empties the queue.
module tb_preventive_refresh_engine;
  localparam int unsigned NB = 4, SR = 5, NROWS = 32, BR = 2, QD = 3;
  logic clk = 0, rst_n = 0, flush = 0, req = 0, can_accept, vr_valid, vr_ready = 0;
  logic [SR-1:0] req_row, vr_row;
  logic [1:0]    vr_bank;
  logic [NB-1:0] bank_block;
  int checks = 0, failures = 0;

  typedef struct { int bank; int row; } victim_t;
  victim_t expected[$];

  preventive_refresh_engine #(.N_BANKS(NB), .S_RID(SR), .N_ROWS(NROWS), .BLAST_RADIUS(BR), .QDEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void add_expected(int agg);
    for (int b = 0; b < NB; b++)
      for (int d = 1; d <= BR; d++)
        for (int k = 0; k < 2; k++) begin
          automatic int r = agg + (k == 0 ? -d : d);
          if (r >= 0 && r < NROWS) expected.push_back('{b, r});
        end
  endfunction

  // drain everything, with random ready, checking order and blocking
  task automatic drain();
    int guard = 0;
    while (expected.size() > 0 && guard < 5000) begin
      vr_ready = ($urandom_range(0, 3) != 0);
      #1;
      for (int b = 0; b < NB; b++) begin
        automatic bit pending = 0;
        foreach (expected[i]) if (expected[i].bank == b) pending = 1;
        if (pending) check(bank_block[b], $sformatf("bank %0d blocked while victims pending", b));
      end
      if (vr_valid && vr_ready) begin
        automatic victim_t e = expected.pop_front();
        check(int'(vr_bank) == e.bank && int'(vr_row) == e.row,
              $sformatf("victim bank %0d row %0d, expected bank %0d row %0d", vr_bank, vr_row, e.bank, e.row));
      end
      @(negedge clk);
      guard++;
    end
    vr_ready = 0;
    repeat (4) @(negedge clk);   // out-of-range steps at the end take cycles
    check(expected.size() == 0, "all victims issued");
    check(bank_block == '0, "all banks released");
    check(!vr_valid, "no request left");
  endtask

  task automatic push(int row);
    req = 1; req_row = SR'(row);
    add_expected(row);
    @(negedge clk);
    req = 0;
  endtask

  initial begin
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(bank_block == '0 && !vr_valid && can_accept, "idle after reset");
    push(10);
    drain();
    push(0); push(31); push(1);
    check(!can_accept, "queue full after 3 pushes");
    drain();
    check(can_accept, "room after draining");
    // flush
    push(20); push(5);
    flush = 1;
    @(negedge clk);
    flush = 0;
    expected.delete();
    check(bank_block == '0 && !vr_valid && can_accept, "flush empties the queue");
    push(7);
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
