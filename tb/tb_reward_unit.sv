// tb_reward_unit: random invocations of several accelerators. A reference in
// the testbench keeps its own per-accelerator min/max history and computes the
// footprint-proportional access attribution and the reward formula; both
// rewards and the three components must match bit for bit. Also checks the
// first-invocation reward (x + y + z) and the latency bound.
module tb_reward_unit;
  import cohm_pkg::*;
  localparam int NA = 4, NM = 4;
  localparam longint unsigned ONE = 32768;
  localparam longint unsigned WX = 22118, WY = 2458, WZ = 8192;
  logic clk = 0, rst_n = 0;
  logic hist_clear = 0, start = 0, done;
  logic [1:0] acc = 0;
  logic [31:0] tot = 0, comm = 0;
  logic [NM-1:0][31:0] ddr = '0, afp = '0, fps = '0;
  logic [15:0] rew, rex, rco, rme;
  logic [63:0] memacc;
  int checks = 0, failures = 0, maxcyc = 0;
  bit seen [NA];
  longint unsigned mn_e [NA], mn_c [NA], mn_m [NA], mx_m [NA];

  reward_unit #(.N_ACC(NA), .N_MEM(NM)) dut (.clk, .rst_n, .hist_clear, .start, .acc, .total_cycles(tot),
    .comm_cycles(comm), .ddr_delta(ddr), .acc_fp(afp), .fp_sum(fps), .done, .reward(rew),
    .r_exec(rex), .r_comm(rco), .r_mem(rme), .mem_acc(memacc));

  always #5 clk = ~clk;

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic longint unsigned cl(longint unsigned v);
    return v > ONE ? ONE : v;
  endfunction

  task automatic one(input int k);
    longint unsigned ftot, macc, e, c, mm, re, rc, rm, r;
    int cyc;
    ftot = 0; macc = 0;
    for (int m = 0; m < NM; m++) begin
      afp[m] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(16, 1 << 22);
      fps[m] = afp[m] + (($urandom_range(0, 1) == 0) ? 0 : $urandom_range(0, 1 << 22));
      ddr[m] = $urandom_range(0, 200000);
      ftot += afp[m];
      if (afp[m] != 0) macc += (longint'(ddr[m]) * afp[m]) / fps[m];
    end
    if (ftot == 0) begin afp[0] = 64; fps[0] = fps[0] + 64; ftot = 64; macc = (longint'(ddr[0]) * 64) / fps[0]; end
    tot = $urandom_range(1000, 5000000);
    comm = ($urandom_range(0, 5) == 0) ? 0 : $urandom_range(0, tot);
    e = (longint'(tot) << 16) / ftot;
    c = (longint'(comm) << 15) / tot;
    mm = (macc << 16) / ftot;
    if (!seen[k]) begin mn_e[k] = e; mn_c[k] = c; mn_m[k] = mm; mx_m[k] = mm; seen[k] = 1; end
    else begin
      if (e < mn_e[k]) mn_e[k] = e;
      if (c < mn_c[k]) mn_c[k] = c;
      if (mm < mn_m[k]) mn_m[k] = mm;
      if (mm > mx_m[k]) mx_m[k] = mm;
    end
    re = (e == 0) ? ONE : cl((mn_e[k] << 15) / e);
    rc = (c == 0) ? ONE : cl((mn_c[k] << 15) / c);
    rm = (mx_m[k] == mn_m[k]) ? ONE : ONE - cl(((mm - mn_m[k]) << 15) / (mx_m[k] - mn_m[k]));
    r = cl((WX * re + WY * rc + WZ * rm) >> 15);
    @(negedge clk);
    acc = 2'(k); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
    check("done in time", cyc <= 68 * (NM + 6) + 8, 1);
    if (cyc > maxcyc) maxcyc = cyc;
    check("mem attribution", memacc, macc);
    check("r_exec", rex, re);
    check("r_comm", rco, rc);
    check("r_mem", rme, rm);
    check("reward", rew, r);
  endtask

  initial begin
    for (int k = 0; k < NA; k++) seen[k] = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    one(0);
    check("first reward is x+y+z", rew, (WX * ONE + WY * ONE + WZ * ONE) >> 15);
    for (int i = 0; i < 150; i++) one($urandom_range(0, NA - 1));
    // history clear: the next invocation of any accelerator is a first one again
    @(negedge clk); hist_clear = 1; @(negedge clk); hist_clear = 0;
    for (int k = 0; k < NA; k++) seen[k] = 0;
    one(2);
    check("first after clear", rew, (WX * ONE + WY * ONE + WZ * ONE) >> 15);
    $display("max reward latency %0d cycles", maxcyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
