// tb_cohmeleon_app: the design at its default size running a multithreaded
// application of the kind used to train and evaluate the coherence agent.
//
// The application is a list of phases. A phase runs several threads at once;
// a thread owns a data set and a chain of accelerators that work on it one
// after the other, the output buffer of one stage being the input of the
// next, looping over the chain a few times. Threads share the 12
// accelerators: a stage waits until its accelerator is free. The test run
// uses the thread counts and sizes of the published phase analysis (10
// threads small, 4 medium, 6 large, 3 of variable size) plus 2 threads
// extra-large. Each phase uses one workload
// size class:
//   S   smaller than the 64 kB L2           streaming chains of 3 stages
//   M   smaller than one 512 kB LLC part.   streaming chains of 2 stages
//   L   smaller than the 2 MB LLC           one irregular stage, 1/32 touched
//   XL  larger than the LLC                 one irregular stage, 1/128 touched
// The sizes are the class limits; the exact word counts are this testbench's.
// A training run (epsilon and alpha decaying to zero) is followed by a test
// run with learning off; the test run prints per phase its cycles and DRAM
// accesses, and the modes the agent chose per size class.
//
// The memory system around the top is a behavioural model with state, so the
// coherence modes differ in cost and the recalls are real:
//  * one shared word array holds all data (every path sees the same values);
//  * per accelerator a private cache of 64 kB (16-byte lines, FIFO
//    replacement, dirty bits), write-invalidate between private caches;
//  * per memory tile an LLC partition of 512 kB; misses and dirty evictions
//    pulse llc_ddr_access; latencies: private hit 1, LLC hit 4, DRAM 20;
//  * the directory answers a lookup with the private caches that hold the
//    line; a recall removes the line from them (dirty data goes to the LLC);
//  * the cache flushes the driver performs before a non-coherent (private
//    caches and LLC) or LLC-coherent (private caches) run are applied to the
//    invocation's buffers at the grant.
// Checks: the output buffer of every streaming stage against a reference of
// the generator (XOR of the words read since the last write, writes after
// each burst), the acc_footprint level sensed for each size class, one
// interrupt per invocation, no exploration with learning off, memory-tile
// access counters against the model, and that every mode, the recall of a
// line really held by a private cache, and every size class happened.
module tb_cohmeleon_app;
  import cohm_pkg::*;
  localparam int NA = 12, NM = 4, NC = 16;
  localparam int LINE_W = 4;                      // words per 16-byte line
  localparam int PC_LINES = 65536 / 16;
  localparam int LLC_LINES = 524288 / 16;
  localparam int N_TRAIN_PH = 10, N_TEST_PH = 4;

  logic clk = 0, rst_n = 0;
  logic train_reset = 0, train_en = 0;
  logic [15:0] eps_step = 0, alpha_step = 0;
  logic agent_busy;
  logic [15:0] agent_eps, agent_alpha, agent_last_reward;
  logic inv_valid = 0, inv_ready;
  logic [3:0] inv_acc = 0;
  logic [NM-1:0][31:0] inv_fp = '0;
  tg_cfg_t inv_cfg = '0;
  coh_mode_e inv_mode;
  logic inv_explored;
  logic [NA-1:0] acc_irq;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [15:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic pready, pslverr;
  logic [NA-1:0] pc_req_valid, pc_req_ready, pc_rsp_valid;
  dma_req_t [NA-1:0] pc_req;
  logic [NA-1:0][31:0] pc_rsp_data;
  logic [NM-1:0] llc_req_valid, llc_req_ready, llc_rsp_valid;
  dma_req_t [NM-1:0] llc_req;
  logic [NM-1:0][31:0] llc_rsp_data;
  logic [NM-1:0] dir_lookup;
  logic [NM-1:0][31:0] dir_addr;
  logic [NM-1:0][NC-1:0] dir_sharers;
  logic [NM-1:0] recall_valid;
  logic [NM-1:0][31:0] recall_addr;
  logic [NM-1:0][NC-1:0] recall_mask;
  logic [NM-1:0] recall_done, llc_ddr_access;
  logic [NM-1:0] mc_req_valid, mc_req_ready, mc_rsp_valid;
  dma_req_t [NM-1:0] mc_req;
  logic [NM-1:0][31:0] mc_rsp_data;

  cohmeleon_soc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  // ------------------------------------------------------------ memory model
  logic [31:0] mem [int unsigned];                 // word address -> data
  bit pc_line [NA][int unsigned];                  // line -> dirty
  int unsigned pc_fifo [NA][$];
  bit llc_line [NM][int unsigned];                 // line -> dirty
  int unsigned llc_fifo [NM][$];
  int ddr_pend [NM];
  int n_ddr [NM];

  function automatic logic [31:0] rd_word(input logic [31:0] a);
    int unsigned w;
    w = a >> 2;
    if (mem.exists(w)) return mem[w];
    return (a * 32'h9E3779B1) ^ 32'h0F1E2D3C;
  endfunction
  function automatic int part_of(input int unsigned ln);
    return (ln >> 24) & 3;                          // line = addr >> 4, partition = addr[29:28]
  endfunction

  // LLC access of one line; returns the latency
  function automatic int llc_access(input int m, input int unsigned ln, input bit wr);
    if (llc_line[m].exists(ln)) begin
      if (wr) llc_line[m][ln] = 1;
      return 4;
    end
    ddr_pend[m]++;                                  // refill
    llc_line[m][ln] = wr;
    llc_fifo[m].push_back(ln);
    while (llc_line[m].num() > LLC_LINES && llc_fifo[m].size() > 0) begin
      int unsigned v;
      v = llc_fifo[m].pop_front();
      if (llc_line[m].exists(v) && v != ln) begin
        if (llc_line[m][v]) ddr_pend[m]++;          // dirty write-back
        llc_line[m].delete(v);
      end
    end
    return 20;
  endfunction

  function automatic void pc_drop(input int k, input int unsigned ln);
    if (pc_line[k].exists(ln)) begin
      if (pc_line[k][ln]) void'(llc_access(part_of(ln), ln, 1));
      pc_line[k].delete(ln);
    end
  endfunction

  function automatic int pc_access(input int k, input int unsigned ln, input bit wr);
    int lat;
    if (wr) for (int j = 0; j < NA; j++) if (j != k && pc_line[j].exists(ln)) begin
      pc_line[j].delete(ln);                        // write invalidates other copies
    end
    if (pc_line[k].exists(ln)) begin
      if (wr) pc_line[k][ln] = 1;
      return 1;
    end
    lat = 2 + llc_access(part_of(ln), ln, 0);
    pc_line[k][ln] = wr;
    pc_fifo[k].push_back(ln);
    while (pc_line[k].num() > PC_LINES && pc_fifo[k].size() > 0) begin
      int unsigned v;
      v = pc_fifo[k].pop_front();
      if (v != ln) pc_drop(k, v);
    end
    return lat;
  endfunction

  // driver-side flushes before a non-coherent / LLC-coherent run
  int n_flush_lines;
  function automatic void flush_range(input int unsigned lo, input int unsigned hi, input bit llc_too);
    int unsigned ks [$];
    for (int k = 0; k < NA; k++) begin
      ks.delete();
      foreach (pc_line[k][l]) if (l >= lo && l < hi) ks.push_back(l);
      foreach (ks[i]) begin pc_drop(k, ks[i]); n_flush_lines++; end
    end
    if (llc_too) for (int m = 0; m < NM; m++) begin
      ks.delete();
      foreach (llc_line[m][l]) if (l >= lo && l < hi) ks.push_back(l);
      foreach (ks[i]) begin
        if (llc_line[m][ks[i]]) ddr_pend[m]++;
        llc_line[m].delete(ks[i]);
        n_flush_lines++;
      end
    end
  endfunction

  // private caches
  int n_pc;
  for (genvar k = 0; k < NA; k++) begin : g_pc
    int wait_c;
    logic busy_q;
    dma_req_t r_q;
    assign pc_req_ready[k] = !busy_q;
    always @(posedge clk) begin
      if (!rst_n) begin busy_q <= 0; pc_rsp_valid[k] <= 0; pc_rsp_data[k] <= 0; wait_c <= 0; end
      else begin
        pc_rsp_valid[k] <= 0;
        if (pc_req_valid[k] && pc_req_ready[k]) begin
          busy_q <= 1; r_q <= pc_req[k]; n_pc++;
          wait_c <= pc_access(k, pc_req[k].addr >> 4, pc_req[k].write);
          if (pc_req[k].write) mem[pc_req[k].addr >> 2] = pc_req[k].wdata;
        end else if (busy_q) begin
          if (wait_c <= 1) begin
            busy_q <= 0; pc_rsp_valid[k] <= 1;
            pc_rsp_data[k] <= r_q.write ? 32'd0 : rd_word(r_q.addr);
          end
          wait_c <= wait_c - 1;
        end
      end
    end
  end

  // memory tiles: LLC behind the recall unit, directory, memory controller
  int n_recall, n_recall_lines, n_mc, n_llc;
  for (genvar m = 0; m < NM; m++) begin : g_mt
    int lw, mw, rw;
    logic lb, mb;
    dma_req_t la, ma;
    assign llc_req_ready[m] = !lb;
    assign mc_req_ready[m]  = !mb;
    // the directory answers in the lookup cycle
    always @(negedge clk) begin
      logic [NC-1:0] sh;
      sh = '0;
      if (dir_lookup[m])
        for (int k = 0; k < NA; k++) if (pc_line[k].exists(dir_addr[m] >> 4)) sh[k] = 1'b1;
      dir_sharers[m] <= sh;
    end
    always @(posedge clk) begin
      if (!rst_n) begin
        lb <= 0; mb <= 0; llc_rsp_valid[m] <= 0; mc_rsp_valid[m] <= 0; recall_done[m] <= 0;
        llc_ddr_access[m] <= 0; rw <= 0; llc_rsp_data[m] <= 0; mc_rsp_data[m] <= 0;
      end else begin
        llc_rsp_valid[m] <= 0; mc_rsp_valid[m] <= 0; recall_done[m] <= 0;
        llc_ddr_access[m] <= (ddr_pend[m] > 0);
        if (ddr_pend[m] > 0) begin ddr_pend[m]--; n_ddr[m]++; end
        if (recall_valid[m] && !recall_done[m]) begin
          if (rw == 2) begin
            for (int k = 0; k < NA; k++) if (recall_mask[m][k]) begin
              check("recalled line is held", pc_line[k].exists(recall_addr[m] >> 4), 1);
              pc_drop(k, recall_addr[m] >> 4);
              n_recall_lines++;
            end
            recall_done[m] <= 1; rw <= 0; n_recall++;
          end else rw <= rw + 1;
        end
        if (llc_req_valid[m] && llc_req_ready[m]) begin
          lb <= 1; la <= llc_req[m]; n_llc++;
          lw <= llc_access(m, llc_req[m].addr >> 4, llc_req[m].write);
          if (llc_req[m].write) mem[llc_req[m].addr >> 2] = llc_req[m].wdata;
        end else if (lb) begin
          if (lw <= 1) begin lb <= 0; llc_rsp_valid[m] <= 1; llc_rsp_data[m] <= la.write ? 32'd0 : rd_word(la.addr); end
          lw <= lw - 1;
        end
        if (mc_req_valid[m] && mc_req_ready[m]) begin
          mb <= 1; mw <= 20; ma <= mc_req[m]; n_mc++; n_ddr[m]++;
          if (mc_req[m].write) mem[mc_req[m].addr >> 2] = mc_req[m].wdata;
        end else if (mb) begin
          if (mw <= 1) begin mb <= 0; mc_rsp_valid[m] <= 1; mc_rsp_data[m] <= ma.write ? 32'd0 : rd_word(ma.addr); end
          mw <= mw - 1;
        end
      end
    end
  end

  // ------------------------------------------------------------ application
  typedef enum int {SZ_S = 0, SZ_M = 1, SZ_L = 2, SZ_XL = 3} size_e;
  bit inv_lock = 0;
  bit acc_taken [NA];
  bit apb_lock = 0;
  logic [31:0] rd;
  int n_inv, n_irq, n_explore;
  int mode_cnt [4];
  int test_mode [4][4];                             // [size class][mode] in the test run
  int size_seen [4];

  task automatic apb_read(input logic [15:0] a, output logic [31:0] d);
    while (apb_lock) @(negedge clk);
    apb_lock = 1;
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1;
    #1 d = prdata;
    @(posedge clk); #1 psel = 0; penable = 0;
    apb_lock = 0;
  endtask

  function automatic logic [31:0] buf_base(input int part, input int b);
    return {2'b00, 2'(part), 6'(b), 22'h0};          // 4 MB buffers
  endfunction

  // one accelerator invocation, waits for its interrupt
  task automatic run_stage(input int k, input tg_cfg_t c, input int part, input size_e sz);
    logic [31:0] fp;
    int lvl;
    coh_mode_e md;
    fp = c.words * 4 * (c.in_place ? 1 : 2);
    while (acc_taken[k]) @(negedge clk);           // accelerator shared by threads
    acc_taken[k] = 1;
    while (inv_lock) @(negedge clk);
    inv_lock = 1;
    @(negedge clk);
    inv_acc = 4'(k); inv_cfg = c; inv_fp = '0; inv_fp[part] = fp; inv_valid = 1;
    do @(negedge clk); while (!inv_ready);
    md = inv_mode;
    lvl = (fp <= 65536) ? 0 : (fp <= 524288) ? 1 : 2;
    check("acc footprint level sensed", int'(dut.u_agent.u_enc.attr.acc_footprint), lvl);
    if (inv_explored) n_explore++;
    if (!train_en) begin
      check("no exploration with learning off", inv_explored, 0);
      test_mode[sz][int'(md)]++;
    end
    mode_cnt[int'(md)]++;
    size_seen[sz]++;
    // the driver's flushes for the chosen mode
    if (md == NON_COH_DMA || md == LLC_COH_DMA) begin
      flush_range(c.base >> 4, (c.base + c.words * 4) >> 4, md == NON_COH_DMA);
      if (!c.in_place) flush_range(c.out_base >> 4, (c.out_base + c.words * 4) >> 4, md == NON_COH_DMA);
    end
    @(negedge clk); inv_valid = 0;
    n_inv++;
    inv_lock = 0;
    do @(negedge clk); while (!acc_irq[k]);
    n_irq++;
    acc_taken[k] = 0;
  endtask

  // reference of a streaming stage: XOR since the last write, writes after each burst
  task automatic check_stream(input tg_cfg_t c, output int n_out);
    logic [31:0] acc;
    int grp, pend, o, bad;
    acc = 0; grp = 0; pend = 0; o = 0; bad = 0;
    for (int i = 0; i < int'(c.words); i++) begin
      acc ^= rd_word(c.base + 32'(i * 4));
      grp++;
      if (grp == int'(c.rd_per_wr)) begin grp = 0; pend++; end
      if ((i + 1) % int'(c.burst_len) == 0 || i == int'(c.words) - 1)
        while (pend > 0) begin
          if (rd_word(c.out_base + 32'(o * 4)) !== acc) bad++;
          o++; acc = 0; pend--;
        end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL stream stage output: %0d of %0d words wrong", bad, o);
    end
    n_out = o;
  endtask

  task automatic thread(input int t, input size_e sz, input int loops);
    int part, bb, a0;
    part = t % NM;
    bb = (t / NM) * 8;                               // buffers of this thread in its partition
    a0 = (t * 3) % NA;                               // first accelerator of its chain
    for (int l = 0; l < loops; l++) begin
      if (sz == SZ_S || sz == SZ_M) begin
        int n, nst;
        nst = (sz == SZ_S) ? 3 : 2;
        n = (sz == SZ_S) ? 2048 : 24576;            // 8 kB and 96 kB inputs
        for (int s = 0; s < nst; s++) begin
          tg_cfg_t c;
          int n_out;
          c = '0;
          c.pattern = PAT_STREAM;
          c.burst_len = 8'($urandom_range(8, 64));
          c.compute_cyc = 16'($urandom_range(0, 32));
          c.reuse = 1;
          c.rd_per_wr = 4'($urandom_range(1, 2));
          c.in_place = 0;
          c.base = buf_base(part, bb + s);
          c.out_base = buf_base(part, bb + s + 1);
          c.words = 24'(n);
          run_stage((a0 + s) % NA, c, part, sz);
          check_stream(c, n_out);
          n = n_out;
        end
      end else begin
        tg_cfg_t c;
        c = '0;
        c.pattern = PAT_IRREGULAR;
        c.burst_len = 8'($urandom_range(4, 16));
        c.compute_cyc = 16'($urandom_range(0, 16));
        c.reuse = 4'($urandom_range(1, 2));
        c.rd_per_wr = 4'($urandom_range(2, 4));
        c.in_place = 1'($urandom_range(0, 1));
        c.access_frac = (sz == SZ_L) ? 8'd8 : 8'd2;
        c.base = buf_base(part, bb + 4);
        c.out_base = buf_base(part, bb + 5);
        c.words = (sz == SZ_L) ? 24'd196608 : 24'd720896;   // 768 kB and 2.75 MB inputs
        run_stage(a0, c, part, sz);
      end
    end
  endtask

  int n_live;
  // variable: thread t runs size class t % 3 (S, M, L)
  task automatic phase(input int n_thr, input size_e sz, input bit variable, input int loops, input bit report);
    longint t0;
    int d0 [NM];
    t0 = $time;
    for (int m = 0; m < NM; m++) d0[m] = n_ddr[m];
    n_live = n_thr;
    for (int t = 0; t < n_thr; t++) begin
      automatic int tt = t;
      fork begin thread(tt, variable ? size_e'(tt % 3) : sz, loops); n_live--; end join_none
    end
    while (n_live > 0) @(negedge clk);
    if (report) begin
      int d;
      d = 0;
      for (int m = 0; m < NM; m++) d += n_ddr[m] - d0[m];
      $display("phase: %0d threads, size %s, %0d loops: %0d cycles, %0d DRAM accesses",
               n_thr, variable ? "variable" : sz.name(), loops, ($time - t0) / 10, d);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      mode_cnt[i] = 0; size_seen[i] = 0;
      for (int j = 0; j < 4; j++) test_mode[i][j] = 0;
    end
    for (int m = 0; m < NM; m++) begin ddr_pend[m] = 0; n_ddr[m] = 0; end
    n_pc = 0; n_recall = 0; n_recall_lines = 0; n_mc = 0; n_llc = 0; n_flush_lines = 0;
    n_inv = 0; n_irq = 0; n_explore = 0;
    for (int k = 0; k < NA; k++) acc_taken[k] = 0;
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;
    train_reset = 1; @(negedge clk); train_reset = 0;
    while (agent_busy) @(negedge clk);
    // training: about 76 invocations, epsilon and alpha reach zero after 64
    train_en = 1; eps_step = 16'd256; alpha_step = 16'd128;
    for (int p = 0; p < N_TRAIN_PH; p++) begin
      size_e sz;
      sz = size_e'(p % 4);
      phase($urandom_range(1, 4), sz, 0, (sz == SZ_S) ? 3 : 1, 0);
    end
    $display("after training: epsilon=%0d alpha=%0d (of 32768), %0d invocations, %0d explored",
             agent_eps, agent_alpha, n_inv, n_explore);
    // test run: learned policy only
    train_en = 0;
    // the four phases of the published phase analysis, plus one extra-large
    phase(10, SZ_S, 0, 1, 1);
    phase(4, SZ_M, 0, 1, 1);
    phase(6, SZ_L, 0, 1, 1);
    phase(3, SZ_S, 1, 1, 1);
    phase(2, SZ_XL, 0, 1, 1);
    repeat (50) @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      logic [31:0] v;
      apb_read(16'(((NA + m) << 8) | 8'h04), v);
      check("DRAM access monitor", v, n_ddr[m]);
    end
    for (int s = 0; s < 4; s++)
      $display("test run, size class %0d (S, M, L, XL): non-coh %0d, llc-coh %0d, coh-dma %0d, fully-coh %0d",
               s, test_mode[s][0], test_mode[s][1], test_mode[s][2], test_mode[s][3]);
    $display("traffic: private-cache %0d, LLC %0d, memory controller %0d, recalls %0d (%0d copies), flushed lines %0d",
             n_pc, n_llc, n_mc, n_recall, n_recall_lines, n_flush_lines);
    check("one interrupt per invocation", n_irq, n_inv);
    for (int i = 0; i < 4; i++) check("each mode granted", mode_cnt[i] > 0, 1);
    for (int i = 0; i < 4; i++) check("each size class run", size_seen[i] > 0, 1);
    check("recall of held lines happened", n_recall_lines > 0, 1);
    check("epsilon reached zero", agent_eps, 0);
    $display("simulated %0d cycles", $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
