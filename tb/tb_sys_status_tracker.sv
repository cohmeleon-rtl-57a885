// tb_sys_status_tracker: random invocations enter and leave; after every
// cycle the aggregates are compared with values recomputed in the testbench
// from its own copy of the active set.
module tb_sys_status_tracker;
  import cohm_pkg::*;
  localparam int NA = 12, NM = 4;
  logic clk = 0, rst_n = 0;
  logic set_v = 0, clr_v = 0;
  logic [3:0] set_acc = 0, clr_acc = 0;
  coh_mode_e set_mode = NON_COH_DMA;
  logic [NM-1:0][31:0] set_fp = '0;
  logic [NA-1:0] active;
  coh_mode_e [NA-1:0] mode;
  logic [NA-1:0][NM-1:0][31:0] acc_fp;
  logic [7:0] fc;
  logic [NM-1:0][7:0] nc, llc;
  logic [NM-1:0][31:0] fps;
  int checks = 0, failures = 0;
  bit m_act [NA];
  coh_mode_e m_mode [NA];
  int unsigned m_fp [NA][NM];

  sys_status_tracker #(.N_ACC(NA), .N_MEM(NM)) dut (.clk, .rst_n, .set_valid(set_v), .set_acc, .set_mode,
    .set_fp, .clr_valid(clr_v), .clr_acc, .active, .mode, .acc_fp, .fc_count(fc), .nc_cnt(nc),
    .llc_cnt(llc), .fp_sum(fps));

  always #5 clk = ~clk;

  task automatic check(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic compare();
    int unsigned e_fc, e_nc, e_llc, e_sum;
    e_fc = 0;
    for (int k = 0; k < NA; k++) if (m_act[k] && m_mode[k] == FULLY_COH) e_fc++;
    check("fc", fc, e_fc);
    for (int m = 0; m < NM; m++) begin
      e_nc = 0; e_llc = 0; e_sum = 0;
      for (int k = 0; k < NA; k++) if (m_act[k]) begin
        e_sum += m_fp[k][m];
        if (m_fp[k][m] != 0) begin
          if (m_mode[k] == NON_COH_DMA) e_nc++; else e_llc++;
        end
      end
      check("nc", nc[m], e_nc); check("llc", llc[m], e_llc); check("fp_sum", fps[m], e_sum);
    end
    for (int k = 0; k < NA; k++) check("active", active[k], m_act[k]);
  endtask

  initial begin
    for (int k = 0; k < NA; k++) begin m_act[k] = 0; m_mode[k] = NON_COH_DMA; for (int m = 0; m < NM; m++) m_fp[k][m] = 0; end
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    compare();
    for (int i = 0; i < 600; i++) begin
      int k;
      k = $urandom_range(0, NA - 1);
      set_v = 0; clr_v = 0;
      if (!m_act[k]) begin
        set_v = 1; set_acc = 4'(k); set_mode = coh_mode_e'($urandom_range(0, 3));
        for (int m = 0; m < NM; m++) set_fp[m] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 1 << 20);
        m_act[k] = 1; m_mode[k] = set_mode;
        for (int m = 0; m < NM; m++) m_fp[k][m] = set_fp[m];
      end else begin
        clr_v = 1; clr_acc = 4'(k);
        m_act[k] = 0;
        for (int m = 0; m < NM; m++) m_fp[k][m] = 0;
      end
      @(negedge clk);
      set_v = 0; clr_v = 0;
      compare();
    end
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
