// tb_mem_access_monitor: counts accesses from two sources and checks the
// wrap-around difference that software takes across an invocation.
module tb_mem_access_monitor;
  logic clk = 0, rst_n = 0;
  logic [1:0] acc = 0;
  logic [31:0] cnt;
  logic [7:0] cnt8;
  int checks = 0, failures = 0;
  int unsigned exp_n = 0, exp8 = 0, before8;

  mem_access_monitor #(.CNT_W(32), .N_SRC(2)) dut (.clk, .rst_n, .access(acc), .count(cnt));
  mem_access_monitor #(.CNT_W(8), .N_SRC(2)) dut8 (.clk, .rst_n, .access(acc), .count(cnt8));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    checks++; if (cnt !== 0) begin failures++; $display("FAIL reset"); end
    before8 = cnt8;
    for (int c = 0; c < 500; c++) begin
      acc = 2'($urandom);
      exp_n += acc[0] + acc[1];
      @(negedge clk);
      checks++;
      if (cnt !== exp_n) begin failures++; $display("FAIL count %0d exp %0d", cnt, exp_n); end
    end
    acc = 0;
    // the 8-bit counter wrapped at least once; the modulo difference still gives the total mod 256
    checks++;
    if (8'(cnt8 - 8'(before8)) !== 8'(exp_n)) begin failures++; $display("FAIL wrap difference"); end
    checks++;
    if (exp_n < 256) begin failures++; $display("FAIL test did not wrap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
