// tb_q_table: clear sweep (length and result), then random writes and
// synchronous reads against a reference array.
module tb_q_table;
  localparam int N = 972;
  logic clk = 0, rst_n = 0;
  logic clear = 0, busy, rd = 0, wr = 0;
  logic [9:0] ra = 0, wa = 0;
  logic [15:0] rdata, wdata = 0;
  logic [15:0] ref_m [N];
  int checks = 0, failures = 0, cyc;

  q_table #(.N_ENTRIES(N), .QWID(16)) dut (.clk, .rst_n, .clear, .busy, .rd_en(rd), .rd_addr(ra),
    .rd_data(rdata), .wr_en(wr), .wr_addr(wa), .wr_data(wdata));

  always #5 clk = ~clk;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    // fill with non-zero values first so the clear is visible
    for (int a = 0; a < N; a++) begin wr = 1; wa = 10'(a); wdata = 16'(a + 1); @(negedge clk); end
    wr = 0;
    clear = 1; @(negedge clk); clear = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    check("clear sweep length", cyc, N);
    for (int a = 0; a < N; a++) begin
      rd = 1; ra = 10'(a); @(negedge clk); rd = 0;
      check("cleared", rdata, 0);
      ref_m[a] = 0;
    end
    for (int i = 0; i < 4000; i++) begin
      wr = $urandom_range(0, 1); wa = 10'($urandom_range(0, N - 1)); wdata = 16'($urandom);
      rd = 1; ra = 10'($urandom_range(0, N - 1));
      begin
        logic [15:0] expv;
        expv = ref_m[ra];        // read-before-write on a collision
        if (wr) ref_m[wa] = wdata;
        @(negedge clk);
        check("read", rdata, expv);
      end
    end
    rd = 0; wr = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
