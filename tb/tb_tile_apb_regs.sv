// tb_tile_apb_regs: APB reads and writes of the coherence register and the
// counters, hardware writes, error response on unmapped offsets, and a tile
// without a coherence register.
module tb_tile_apb_regs;
  import cohm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0;
  logic [31:0] prdata, prdata2;
  logic pready, pslverr, pready2, pslverr2;
  logic hw_we = 0;
  coh_mode_e hw_mode = NON_COH_DMA;
  coh_mode_e mode, mode2;
  logic [95:0] cnt;
  int checks = 0, failures = 0;
  logic [31:0] rd;
  logic err;

  tile_apb_regs #(.N_CNT(3), .CNT_W(32)) dut (.clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata,
    .prdata, .pready, .pslverr, .hw_we, .hw_mode, .coh_mode(mode), .cnt);
  tile_apb_regs #(.N_CNT(3), .CNT_W(32), .HAS_CFG(1'b0)) dut2 (.clk, .rst_n, .psel, .penable, .pwrite,
    .paddr, .pwdata, .prdata(prdata2), .pready(pready2), .pslverr(pslverr2), .hw_we(1'b0),
    .hw_mode(NON_COH_DMA), .coh_mode(mode2), .cnt);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic apb(input logic wr, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1 rd = prdata; err = pslverr;
    @(posedge clk); #1;
    psel = 0; penable = 0;
  endtask

  initial begin
    cnt = {32'hCAFE0003, 32'h00BEEF02, 32'h12345601};
    repeat (2) @(posedge clk); rst_n = 1;
    apb(0, 8'h00, 0); check("reset mode", rd, 0);
    for (int m = 0; m < 4; m++) begin
      apb(1, 8'h00, 32'hFFFF_FFF0 | m); check("mode port", mode, m);
      apb(0, 8'h00, 0); check("mode read", rd, m);
    end
    apb(0, 8'h04, 0); check("cnt0", rd, 32'h12345601); check("no err", err, 0);
    apb(0, 8'h08, 0); check("cnt1", rd, 32'h00BEEF02);
    apb(0, 8'h0C, 0); check("cnt2", rd, 32'hCAFE0003);
    apb(1, 8'h08, 32'h1); apb(0, 8'h08, 0); check("cnt read only", rd, 32'h00BEEF02);
    apb(0, 8'h10, 0); check("unmapped err", err, 1); check("unmapped data", rd, 0);
    for (int m = 0; m < 4; m++) begin
      @(negedge clk); hw_we = 1; hw_mode = coh_mode_e'(m); @(negedge clk); hw_we = 0;
      check("hw write", mode, m);
      apb(0, 8'h00, 0); check("hw write read", rd, m);
    end
    check("no-cfg tile mode", mode2, NON_COH_DMA);
    check("pready", pready, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
