// tb_rl_agent: the learning agent with the status inputs driven directly.
//  1. Training with epsilon = 1: every decision is a random exploration, all
//     four modes must occur, and after each completion the Q entry of the
//     recorded (state, action) must equal (1 - alpha) Q + alpha R, computed
//     here from the old entry (read from the table) and the reported reward.
//  0. Exploration with random sets of supported modes: the mode drawn must
//     always be a supported one.
//  2. Exploitation (train_en low): the chosen mode must be the argmax of the
//     Q-values of the supported modes of the state (lowest encoding on ties;
//     every third decision with a random supported set), the table must not
//     change, and the decision must take at most 12 cycles.
//  3. Linear decay: with non-zero steps epsilon and alpha drop by one step per
//     update and stop at zero.
module tb_rl_agent;
  import cohm_pkg::*;
  localparam int NA = 4, NM = 2;
  logic clk = 0, rst_n = 0;
  logic train_reset = 0, train_en = 0;
  logic [15:0] eps_step = 0, alpha_step = 0;
  logic [7:0] fc = 0;
  logic [NM-1:0][7:0] nc = '0, llc = '0;
  logic [NM-1:0][31:0] fps = '0;
  logic [NA-1:0][NM-1:0][31:0] afp = '0;
  logic inv_valid = 0, inv_ready;
  logic [1:0] inv_acc = 0;
  logic [NM-1:0][31:0] inv_fp = '0;
  logic [3:0] avail = 4'hF;
  coh_mode_e inv_mode;
  logic explored;
  logic done_valid = 0, done_ready;
  logic [1:0] done_acc = 0;
  logic [31:0] d_tot = 0, d_comm = 0;
  logic [NM-1:0][31:0] d_ddr = '0;
  logic busy;
  logic [15:0] eps, alpha, last_r;
  logic [7:0] cur_state;
  int checks = 0, failures = 0;
  int hist [4];
  logic [7:0] rec_s [NA];
  coh_mode_e rec_a [NA];

  rl_agent #(.N_ACC(NA), .N_MEM(NM), .EPS0(16'd32768), .ALPHA0(16'd8192)) dut (
    .clk, .rst_n, .train_reset, .train_en, .eps_step, .alpha_step, .fc_count(fc), .nc_cnt(nc),
    .llc_cnt(llc), .fp_sum(fps), .acc_fp(afp), .inv_valid, .inv_ready, .inv_acc, .inv_fp, .inv_avail(avail), .inv_mode,
    .inv_explored(explored), .done_valid, .done_ready, .done_acc, .done_total(d_tot), .done_comm(d_comm),
    .done_ddr(d_ddr), .busy, .eps, .alpha, .cur_state, .last_reward(last_r));

  always #5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic logic [15:0] qv(input logic [7:0] s, input int a);
    return dut.u_q.mem[int'(s) * 4 + a];
  endfunction

  task automatic invoke(input int k, output int cycles);
    @(negedge clk);
    fc = 8'($urandom_range(0, 3));
    for (int m = 0; m < NM; m++) begin
      nc[m] = 8'($urandom_range(0, 3)); llc[m] = 8'($urandom_range(0, 3));
      fps[m] = $urandom_range(0, 1 << 20);
      inv_fp[m] = ($urandom_range(0, 1) == 0) ? 32'd4096 : $urandom_range(1, 1 << 20);
    end
    inv_acc = 2'(k); inv_valid = 1;
    cycles = 0;
    while (!inv_ready) begin @(negedge clk); cycles++; if (cycles > 100) break; end
    #1;
    rec_s[k] = cur_state; rec_a[k] = inv_mode;
    @(negedge clk); inv_valid = 0;
    afp[k] = inv_fp;
    for (int m = 0; m < NM; m++) fps[m] = fps[m] + inv_fp[m];
  endtask

  task automatic complete(input int k, input bit expect_update);
    logic [15:0] old_q, a;
    longint expq;
    int cyc;
    old_q = qv(rec_s[k], rec_a[k]);
    a = alpha;
    @(negedge clk);
    d_tot = $urandom_range(1000, 100000); d_comm = $urandom_range(0, d_tot);
    for (int m = 0; m < NM; m++) d_ddr[m] = $urandom_range(0, 5000);
    done_acc = 2'(k); done_valid = 1;
    cyc = 0;
    while (!done_ready && cyc < 3000) begin @(negedge clk); cyc++; end
    @(negedge clk); done_valid = 0;
    expq = expect_update ? ((longint'(32768 - a) * old_q + longint'(a) * last_r) >> 15) : old_q;
    check("Q update", qv(rec_s[k], rec_a[k]), expq);
    afp[k] = '0;
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 4; i++) hist[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    train_reset = 1; @(negedge clk); train_reset = 0;
    cyc = 0; while (busy) begin @(negedge clk); cyc++; end
    check("reset clears table", qv(8'd0, 0) + qv(8'd242, 3) + qv(8'd100, 2), 0);
    check("eps init", eps, 32768); check("alpha init", alpha, 8192);
    // 0. exploration restricted to the supported modes
    train_en = 1;
    for (int i = 0; i < 60; i++) begin
      avail = 4'($urandom_range(1, 15));
      invoke(i % NA, cyc);
      check("explored mode supported", avail[rec_a[i % NA]], 1);
      complete(i % NA, 1);
    end
    avail = 4'hF;
    // 1. exploration
    train_en = 1;
    for (int i = 0; i < 120; i++) begin
      int k;
      k = i % NA;
      invoke(k, cyc);
      check("explored", explored, 1);
      hist[int'(rec_a[k])]++;
      complete(k, 1);
    end
    for (int a = 0; a < 4; a++) check("every mode explored", hist[a] > 5, 1);
    // 2. exploitation
    train_en = 0;
    for (int i = 0; i < 120; i++) begin
      int k, best;
      k = i % NA;
      avail = (i % 3 == 0) ? 4'($urandom_range(1, 15)) : 4'hF;
      invoke(k, cyc);
      best = -1;
      for (int a = 0; a < 4; a++)
        if (avail[a] && (best < 0 || qv(rec_s[k], a) > qv(rec_s[k], best))) best = a;
      check("greedy among supported", int'(rec_a[k]), best);
      check("not explored", explored, 0);
      check("decision latency", cyc <= 12, 1);
      complete(k, 0);
    end
    // 3. decay
    avail = 4'hF;
    train_en = 1; eps_step = 16'd10000; alpha_step = 16'd3000;
    begin
      logic [15:0] e0, a0;
      for (int i = 0; i < 5; i++) begin
        e0 = eps; a0 = alpha;
        invoke(0, cyc);
        complete(0, 1);
        check("eps decay", eps, (e0 > 10000) ? e0 - 10000 : 0);
        check("alpha decay", alpha, (a0 > 3000) ? a0 - 3000 : 0);
      end
      check("eps reached zero", eps, 0);
      check("alpha reached zero", alpha, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
