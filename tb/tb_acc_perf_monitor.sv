// tb_acc_perf_monitor: random activity patterns against reference counts.
// Drives acc_busy, dma_pending and inv_open at random for several windows,
// each opened by a start pulse, and compares the three counters with counts
// kept in the testbench after every cycle. Also checks that start clears.
module tb_acc_perf_monitor;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy = 0, pend = 0, open_ = 0;
  logic [31:0] act, comm, tot;
  int checks = 0, failures = 0;
  int unsigned e_act, e_comm, e_tot;

  acc_perf_monitor #(.CNT_W(32)) dut (.clk, .rst_n, .start, .acc_busy(busy), .dma_pending(pend),
    .inv_open(open_), .active_cycles(act), .comm_cycles(comm), .total_cycles(tot));

  always #5 clk = ~clk;

  task automatic check(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 6; w++) begin
      @(negedge clk); start = 1; busy = 1; pend = 1; open_ = 1;
      @(negedge clk); start = 0;
      check("cleared active", act, 0); check("cleared comm", comm, 0); check("cleared total", tot, 0);
      e_act = 0; e_comm = 0; e_tot = 0;
      for (int c = 0; c < 200; c++) begin
        busy = $urandom_range(0, 1); pend = $urandom_range(0, 1); open_ = ($urandom_range(0, 7) != 0);
        if (busy) e_act++;
        if (pend) e_comm++;
        if (open_) e_tot++;
        @(negedge clk);
        check("active", act, e_act); check("comm", comm, e_comm); check("total", tot, e_tot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
