// tb_cohmeleon_soc3: end-to-end run of the whole design sized like the
// evaluation SoC with 16 accelerators: 16 accelerator tiles, 4 processors,
// 4 memory tiles with 256 kB LLC partitions, 64 kB private caches. Five of its
// accelerators have no private cache (ACC_HAS_CACHE), so the fully-coherent
// mode must never be granted to them.
//
// Which five accelerators lack the cache is not published; here it is the
// last five (11 to 15), an own choice. Everything else is the same as in the
// default-size end-to-end test: models of the private caches, LLC, directory,
// recall and memory controllers around the top; a driver that trains the
// agent with epsilon and alpha decaying to zero and then runs the learned
// policy. Checks:
//  * fully-coherent is never granted to an accelerator without a cache, and
//    such accelerators are invoked during both training and test;
//  * every request reaches the path of the mode the agent granted to its
//    accelerator; addresses carry the accelerator number in bits [27:24];
//  * the coherence register read over APB equals the granted mode;
//  * monitors: communication <= active < total cycles for every invocation;
//  * memory-tile access counters equal the DRAM accesses seen by the models;
//  * one interrupt per invocation, no exploration with learning off;
//  * each mechanism happened at least once (counted and printed).
module tb_cohmeleon_soc3;
  import cohm_pkg::*;
  localparam int NA = 16, NM = 4, NC = 20;
  localparam logic [NA-1:0] HAS_CACHE = 16'h07FF;
  localparam int N_TRAIN = 96, N_TEST = 24;

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

  cohmeleon_soc #(
    .N_ACC(NA), .N_MEM(NM), .N_CPU(4), .L2_BYTES(65536), .LLC_SLICE_BYTES(262144),
    .ACC_HAS_CACHE(HAS_CACHE)
  ) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic logic [31:0] hash(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A0F0F;
  endfunction

  // ------------------------------------------------------------ models
  coh_mode_e mode_of [NA];
  int n_pc, n_llc_coh, n_llc_plain, n_mc, n_recall, n_lookup, n_ddr [NM];
  int n_contention, n_explore, n_exploit, n_update, n_irq, n_inv, max_conc;
  int mode_cnt [4];
  int n_nocache_train, n_nocache_test;
  int lvl_cnt [3];
  logic [NM-1:0] looked;

  // private caches: random ready, response 1-4 cycles after acceptance
  for (genvar k = 0; k < NA; k++) begin : g_pc
    int wait_c;
    logic busy_q;
    logic [31:0] a_q;
    logic r_q;
    assign pc_req_ready[k] = !busy_q && r_q;
    always @(posedge clk) r_q <= ($urandom_range(0, 3) != 0);
    always @(posedge clk) begin
      if (!rst_n) begin busy_q <= 0; pc_rsp_valid[k] <= 0; pc_rsp_data[k] <= 0; end
      else begin
        pc_rsp_valid[k] <= 0;
        if (pc_req_valid[k] && pc_req_ready[k]) begin
          busy_q <= 1; wait_c <= $urandom_range(1, 4); a_q <= pc_req[k].addr;
          n_pc++;
          check("fully-coherent path", int'(mode_of[k]), int'(FULLY_COH));
          check("own region", int'(pc_req[k].addr[27:24]), k);
        end else if (busy_q) begin
          if (wait_c == 1) begin busy_q <= 0; pc_rsp_valid[k] <= 1; pc_rsp_data[k] <= hash(a_q); end
          wait_c <= wait_c - 1;
        end
      end
    end
  end

  // memory tiles
  for (genvar m = 0; m < NM; m++) begin : g_mt
    int lw, mw, rw;
    logic lb, mb;
    logic [31:0] la, ma;
    logic lr_q, mr_q;
    logic [NC-1:0] sh_q;
    assign llc_req_ready[m] = !lb && lr_q;
    assign mc_req_ready[m]  = !mb && mr_q;
    assign dir_sharers[m]   = sh_q;
    always @(posedge clk) begin
      lr_q <= ($urandom_range(0, 2) != 0);
      mr_q <= ($urandom_range(0, 2) != 0);
      sh_q <= ($urandom_range(0, 1) == 0) ? '0 : NC'($urandom);
    end
    always @(posedge clk) begin
      if (!rst_n) begin
        lb <= 0; mb <= 0; llc_rsp_valid[m] <= 0; mc_rsp_valid[m] <= 0; recall_done[m] <= 0;
        llc_ddr_access[m] <= 0; rw <= 0; llc_rsp_data[m] <= 0; mc_rsp_data[m] <= 0;
      end else begin
        llc_rsp_valid[m] <= 0; mc_rsp_valid[m] <= 0; recall_done[m] <= 0; llc_ddr_access[m] <= 0;
        if (dir_lookup[m]) begin
          looked[m] <= 1; n_lookup++;
          check("lookup only for coherent DMA", int'(mode_of[dir_addr[m][27:24]]), int'(COH_DMA));
        end
        if (recall_valid[m] && !recall_done[m]) begin
          if (rw == 2) begin recall_done[m] <= 1; rw <= 0; n_recall++; end
          else rw <= rw + 1;
        end
        if (llc_req_valid[m] && llc_req_ready[m]) begin
          int k;
          k = llc_req[m].addr[27:24];
          lb <= 1; lw <= $urandom_range(1, 6); la <= llc_req[m].addr;
          check("partition", int'(llc_req[m].addr[29:28]), m);
          if (looked[m]) begin
            n_llc_coh++;
            check("coherent DMA path", int'(mode_of[k]), int'(COH_DMA));
          end else begin
            n_llc_plain++;
            check("LLC-coherent DMA path", int'(mode_of[k]), int'(LLC_COH_DMA));
          end
          looked[m] <= 0;
          if ($urandom_range(0, 2) == 0) begin llc_ddr_access[m] <= 1; n_ddr[m]++; end
        end else if (lb) begin
          if (lw == 1) begin lb <= 0; llc_rsp_valid[m] <= 1; llc_rsp_data[m] <= hash(la); end
          lw <= lw - 1;
        end
        if (mc_req_valid[m] && mc_req_ready[m]) begin
          mb <= 1; mw <= $urandom_range(2, 8); ma <= mc_req[m].addr;
          n_mc++; n_ddr[m]++;
          check("partition", int'(mc_req[m].addr[29:28]), m);
          check("non-coherent DMA path", int'(mode_of[mc_req[m].addr[27:24]]), int'(NON_COH_DMA));
        end else if (mb) begin
          if (mw == 1) begin mb <= 0; mc_rsp_valid[m] <= 1; mc_rsp_data[m] <= hash(ma); end
          mw <= mw - 1;
        end
      end
    end
  end

  // contention on the interconnect: two tiles asking for the same memory tile
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      int c;
      c = 0;
      for (int k = 0; k < NA; k++)
        if (dut.noc_valid[k] && int'(dut.noc_req[k].addr[29:28]) == m) c++;
      if (c >= 2) n_contention++;
    end
  end

  // ------------------------------------------------------------ driver
  logic [31:0] rd;
  task automatic apb(input logic wr, input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1 rd = prdata;
    @(posedge clk); #1 psel = 0; penable = 0;
  endtask

  bit running [NA];
  int n_running;

  task automatic handle_irqs();
    for (int k = 0; k < NA; k++) if (dut.acc_irq[k]) begin
      logic [31:0] act, com, tot;
      n_irq++;
      running[k] = 0; n_running--;
      apb(0, 16'((k << 8) | 8'h04), 0); act = rd;
      apb(0, 16'((k << 8) | 8'h08), 0); com = rd;
      apb(0, 16'((k << 8) | 8'h0C), 0); tot = rd;
      check("comm <= active", com <= act, 1);
      check("active < total", act < tot, 1);
    end
  endtask

  task automatic invoke(input int k, input int size_class);
    tg_cfg_t c;
    int part, words;
    part = $urandom_range(0, NM - 1);
    case (size_class)
      0: words = $urandom_range(64, 512);          // well below the 64 kB L2
      1: words = 20000;                             // 80 kB: above L2
      default: words = 135000;                      // 540 kB: above one LLC partition
    endcase
    c = '0;
    c.pattern     = pattern_e'($urandom_range(0, 2));
    c.burst_len   = 8'($urandom_range(4, 32));
    c.compute_cyc = 16'($urandom_range(0, 40));
    c.reuse       = 4'($urandom_range(1, 2));
    c.rd_per_wr   = 4'($urandom_range(0, 4));
    c.stride      = 16'($urandom_range(2, 16));
    c.access_frac = 8'($urandom_range(32, 255));
    c.in_place    = 1'($urandom_range(0, 1));
    c.base        = {2'b00, 2'(part), 4'(k), 24'h000000};
    c.out_base    = {2'b00, 2'(part), 4'(k), 24'h800000};
    c.words       = 24'(words);
    if (size_class == 2) begin c.access_frac = 8'd4; c.pattern = PAT_IRREGULAR; c.reuse = 1; end
    @(negedge clk);
    inv_acc = 4'(k); inv_cfg = c; inv_fp = '0;
    inv_fp[part] = 32'(words * 4);
    inv_valid = 1;
    while (!inv_ready) begin
      @(negedge clk);
      // completions are served first; drain their interrupts meanwhile
    end
    #1;
    mode_of[k] = inv_mode;
    mode_cnt[int'(inv_mode)]++;
    lvl_cnt[int'(dut.u_agent.u_enc.attr.acc_footprint)]++;
    if (inv_explored) n_explore++; else n_exploit++;
    if (!train_en) check("no exploration with learning off", inv_explored, 0);
    if (!HAS_CACHE[k]) begin
      check("no fully-coherent mode without a private cache", inv_mode != FULLY_COH, 1);
      if (train_en) n_nocache_train++; else n_nocache_test++;
    end
    @(negedge clk); inv_valid = 0;
    running[k] = 1; n_running++; n_inv++;
    if (n_running > max_conc) max_conc = n_running;
    apb(0, 16'(k << 8), 0);
    check("coherence register", rd, int'(mode_of[k]));
  endtask

  task automatic phase(input int n, input int max_par);
    int issued;
    issued = 0;
    while (issued < n || n_running > 0) begin
      handle_irqs();
      if (issued < n && n_running < max_par && !dut.u_agent.busy) begin
        int k, tries;
        k = $urandom_range(0, NA - 1); tries = 0;
        while (running[k] && tries < NA) begin k = (k + 1) % NA; tries++; end
        if (!running[k]) begin
          int sc;
          sc = (issued == 5) ? 2 : ($urandom_range(0, 9) == 0) ? 1 : 0;
          invoke(k, sc);
          issued++;
        end
      end
      @(negedge clk);
    end
  endtask

  always @(posedge clk) if (rst_n && dut.u_agent.done_valid && dut.u_agent.done_ready && train_en) n_update++;

  initial begin
    for (int k = 0; k < NA; k++) begin running[k] = 0; mode_of[k] = NON_COH_DMA; end
    for (int i = 0; i < 4; i++) mode_cnt[i] = 0;
    for (int i = 0; i < 3; i++) lvl_cnt[i] = 0;
    for (int m = 0; m < NM; m++) n_ddr[m] = 0;
    n_pc = 0; n_llc_coh = 0; n_llc_plain = 0; n_mc = 0; n_recall = 0; n_lookup = 0; n_contention = 0;
    n_nocache_train = 0; n_nocache_test = 0;
    n_explore = 0; n_exploit = 0; n_update = 0; n_irq = 0; n_inv = 0; max_conc = 0; n_running = 0;
    looked = '0;
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;
    // phase 1: training, epsilon and alpha decay to zero over the run
    train_reset = 1; @(negedge clk); train_reset = 0;
    while (agent_busy) @(negedge clk);
    train_en = 1; eps_step = 16'(16384 / (N_TRAIN - 16)) + 1; alpha_step = 16'(8192 / (N_TRAIN - 16)) + 1;
    phase(N_TRAIN, 5);
    check("epsilon decayed to zero", agent_eps, 0);
    check("alpha decayed to zero", agent_alpha, 0);
    // phase 2: learned policy, no updates
    train_en = 0;
    phase(N_TEST, 6);
    repeat (20) @(negedge clk);
    // memory-tile access monitors against the models
    for (int m = 0; m < NM; m++) begin
      apb(0, 16'(((NA + m) << 8) | 8'h04), 0);
      check("DRAM access monitor", rd, n_ddr[m]);
    end
    check("one interrupt per invocation", n_irq, n_inv);
    $display("mechanisms: explore=%0d exploit=%0d updates=%0d modes nc=%0d llc=%0d coh=%0d full=%0d",
             n_explore, n_exploit, n_update, mode_cnt[0], mode_cnt[1], mode_cnt[2], mode_cnt[3]);
    $display("mechanisms: cache-path=%0d llc-plain=%0d llc-coh=%0d bypass=%0d lookups=%0d recalls=%0d contention=%0d max-concurrent=%0d",
             n_pc, n_llc_plain, n_llc_coh, n_mc, n_lookup, n_recall, n_contention, max_conc);
    $display("mechanisms: acc-footprint levels <=L2=%0d <=LLC=%0d >LLC=%0d", lvl_cnt[0], lvl_cnt[1], lvl_cnt[2]);
    $display("mechanisms: invocations without a private cache: training=%0d test=%0d",
             n_nocache_train, n_nocache_test);
    check("cacheless accelerators invoked in training", n_nocache_train > 0, 1);
    check("cacheless accelerators invoked in test", n_nocache_test > 0, 1);
    check("explore happened", n_explore > 0, 1);
    check("exploit happened", n_exploit > 0, 1);
    check("Q updates happened", n_update > 0, 1);
    for (int i = 0; i < 4; i++) check("each mode granted", mode_cnt[i] > 0, 1);
    check("private-cache path used", n_pc > 0, 1);
    check("LLC-coherent path used", n_llc_plain > 0, 1);
    check("coherent-DMA path used", n_llc_coh > 0, 1);
    check("memory-controller bypass used", n_mc > 0, 1);
    check("recall happened", n_recall > 0, 1);
    check("interconnect contention happened", n_contention > 0, 1);
    check("concurrent accelerators", max_conc >= 3, 1);
    for (int i = 0; i < 3; i++) check("each footprint level sensed", lvl_cnt[i] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
