// cohmeleon_soc: accelerator coherence orchestration of a many-accelerator SoC.
//
// The SoC of the paper lets every accelerator invocation run in one of four
// coherence modes and picks that mode at run time with a Q-learning agent.
// This top holds the parts of that SoC that implement the mechanism:
//  * N_ACC accelerator tiles: a traffic-generator accelerator, the socket
//    router that sends its requests by the tile's coherence mode, the cycle
//    monitors, and the APB registers with the coherence configuration register.
//  * N_MEM memory tiles: the coherent-DMA recall unit in front of the LLC
//    partition, and the off-chip access monitor.
//  * The status tracker and the learning agent (sense, decide, actuate,
//    evaluate).
//  * A simple crossbar in place of the network-on-chip.
// The LLC partitions with their directories, the memory controllers and
// DRAM, the private caches and the processors are outside; their signals are
// ports. Invocation flow: the driver side presents inv_valid with the
// accelerator, its footprint on each memory partition and the traffic
// configuration. The agent senses the state and returns the mode (inv_ready).
// In that cycle the mode is written into the tile's coherence register, the
// status tracker enters the invocation, the cycle monitors restart and the
// off-chip counters are sampled; the accelerator starts one cycle later. When
// the accelerator finishes, its completion (cycle counts, off-chip access
// deltas since the start) is handed to the agent, which computes the reward
// and updates the Q-table; then the tracker drops the invocation and
// acc_irq pulses. The APB port reaches every tile's registers in one
// contiguous region: paddr[15:8] selects the tile (accelerator tiles first,
// then memory tiles), paddr[7:0] the register.
// Defaults are the evaluation SoC "SoC0": 12 accelerators, 4 memory tiles,
// 4 processors (16 private caches), 64 kB L2, 512 kB LLC partitions, and
// every accelerator with a private cache. ACC_HAS_CACHE clears that per
// accelerator (some evaluated SoCs have accelerators without one); the agent
// then never picks the fully-coherent mode for them.
module cohmeleon_soc
  import cohm_pkg::*;
#(
  parameter int unsigned N_ACC           = 12,
  parameter int unsigned N_MEM           = 4,
  parameter int unsigned N_CPU           = 4,
  parameter int unsigned L2_BYTES        = 65536,
  parameter int unsigned LLC_SLICE_BYTES = 524288,
  parameter int unsigned PART_LSB        = 28,
  // accelerator k has a private cache (can run fully coherent) if bit k is set
  parameter logic [N_ACC-1:0] ACC_HAS_CACHE = '1,
  localparam int unsigned N_CACHES       = N_ACC + N_CPU,
  localparam int unsigned AIW            = (N_ACC > 1) ? $clog2(N_ACC) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // training control
  input  logic                        train_reset,
  input  logic                        train_en,
  input  logic [QW-1:0]               eps_step,
  input  logic [QW-1:0]               alpha_step,
  output logic                        agent_busy,
  output logic [QW-1:0]               agent_eps,
  output logic [QW-1:0]               agent_alpha,
  output logic [QW-1:0]               agent_last_reward,
  // invocation requests (device-driver side)
  input  logic                        inv_valid,
  output logic                        inv_ready,
  input  logic [AIW-1:0]              inv_acc,
  input  logic [N_MEM-1:0][FPW-1:0]   inv_fp,
  input  tg_cfg_t                     inv_cfg,
  output coh_mode_e                   inv_mode,
  output logic                        inv_explored,
  output logic [N_ACC-1:0]            acc_irq,
  // APB (processor side)
  input  logic                        psel,
  input  logic                        penable,
  input  logic                        pwrite,
  input  logic [15:0]                 paddr,
  input  logic [31:0]                 pwdata,
  output logic [31:0]                 prdata,
  output logic                        pready,
  output logic                        pslverr,
  // private caches of the accelerator tiles (fully-coherent mode)
  output logic     [N_ACC-1:0]        pc_req_valid,
  input  logic     [N_ACC-1:0]        pc_req_ready,
  output dma_req_t [N_ACC-1:0]        pc_req,
  input  logic     [N_ACC-1:0]        pc_rsp_valid,
  input  logic     [N_ACC-1:0][DW-1:0] pc_rsp_data,
  // memory tiles: LLC partition
  output logic     [N_MEM-1:0]        llc_req_valid,
  input  logic     [N_MEM-1:0]        llc_req_ready,
  output dma_req_t [N_MEM-1:0]        llc_req,
  input  logic     [N_MEM-1:0]        llc_rsp_valid,
  input  logic     [N_MEM-1:0][DW-1:0] llc_rsp_data,
  output logic     [N_MEM-1:0]        dir_lookup,
  output logic     [N_MEM-1:0][AW-1:0] dir_addr,
  input  logic     [N_MEM-1:0][N_CACHES-1:0] dir_sharers,
  output logic     [N_MEM-1:0]        recall_valid,
  output logic     [N_MEM-1:0][AW-1:0] recall_addr,
  output logic     [N_MEM-1:0][N_CACHES-1:0] recall_mask,
  input  logic     [N_MEM-1:0]        recall_done,
  input  logic     [N_MEM-1:0]        llc_ddr_access,
  // memory tiles: memory controller (non-coherent DMA)
  output logic     [N_MEM-1:0]        mc_req_valid,
  input  logic     [N_MEM-1:0]        mc_req_ready,
  output dma_req_t [N_MEM-1:0]        mc_req,
  input  logic     [N_MEM-1:0]        mc_rsp_valid,
  input  logic     [N_MEM-1:0][DW-1:0] mc_rsp_data
);

  localparam int unsigned N_TILES = N_ACC + N_MEM;

  // ------------------------------------------------------------------ status
  logic                                 trk_set, trk_clr;
  logic [AIW-1:0]                       trk_clr_acc;
  logic [N_ACC-1:0]                     trk_active;
  coh_mode_e [N_ACC-1:0]                trk_mode;
  logic [N_ACC-1:0][N_MEM-1:0][FPW-1:0] trk_acc_fp;
  logic [7:0]                           fc_count;
  logic [N_MEM-1:0][7:0]                nc_cnt, llc_cnt;
  logic [N_MEM-1:0][FPW-1:0]            fp_sum;

  sys_status_tracker #(.N_ACC(N_ACC), .N_MEM(N_MEM)) u_status (
    .clk, .rst_n,
    .set_valid(trk_set), .set_acc(inv_acc), .set_mode(inv_mode), .set_fp(inv_fp),
    .clr_valid(trk_clr), .clr_acc(trk_clr_acc),
    .active(trk_active), .mode(trk_mode), .acc_fp(trk_acc_fp),
    .fc_count, .nc_cnt, .llc_cnt, .fp_sum
  );

  // ------------------------------------------------------------------- agent
  logic                      done_valid, done_ready;
  logic [AIW-1:0]            done_acc;
  logic [CW-1:0]             done_total, done_comm;
  logic [N_MEM-1:0][CW-1:0]  done_ddr;
  logic [SW-1:0]             agent_state;
  logic [N_ACTIONS-1:0]      inv_avail;

  // every accelerator supports the three DMA modes; fully coherent needs a
  // private cache in the tile
  always_comb begin
    inv_avail = 4'b0111;
    for (int k = 0; k < int'(N_ACC); k++)
      if (int'(inv_acc) == k) inv_avail[FULLY_COH] = ACC_HAS_CACHE[k];
  end

  rl_agent #(.N_ACC(N_ACC), .N_MEM(N_MEM), .L2_BYTES(L2_BYTES),
             .LLC_SLICE_BYTES(LLC_SLICE_BYTES)) u_agent (
    .clk, .rst_n, .train_reset, .train_en, .eps_step, .alpha_step,
    .fc_count, .nc_cnt, .llc_cnt, .fp_sum, .acc_fp(trk_acc_fp),
    .inv_valid, .inv_ready, .inv_acc, .inv_fp, .inv_avail, .inv_mode, .inv_explored,
    .done_valid, .done_ready, .done_acc, .done_total, .done_comm, .done_ddr,
    .busy(agent_busy), .eps(agent_eps), .alpha(agent_alpha), .cur_state(agent_state),
    .last_reward(agent_last_reward)
  );

  assign trk_set = inv_valid && inv_ready;

  // ------------------------------------------------------------- APB decode
  logic [N_TILES-1:0]           t_psel;
  logic [N_TILES-1:0]           t_penable;
  logic [N_TILES-1:0][31:0]     t_prdata;
  logic [N_TILES-1:0]           t_pslverr;
  logic [N_TILES-1:0]           t_pready;

  always_comb begin
    t_psel  = '0;
    t_penable = '0;
    prdata  = '0;
    pslverr = psel && penable && (int'(paddr[15:8]) >= int'(N_TILES));
    pready  = 1'b1;
    for (int t = 0; t < int'(N_TILES); t++) begin
      if (int'(paddr[15:8]) == t) begin
        t_psel[t]    = psel;
        t_penable[t] = psel && penable;
        prdata    = t_prdata[t];
        pslverr   = t_pslverr[t];
        pready    = t_pready[t];
      end
    end
  end

  // -------------------------------------------------------- accelerator tiles
  logic     [N_ACC-1:0]          noc_valid, noc_ready, noc_rsp_valid;
  noc_req_t [N_ACC-1:0]          noc_req;
  logic     [N_ACC-1:0][DW-1:0]  noc_rsp_data;
  logic     [N_ACC-1:0]          acc_done, done_pend, inv_open, tg_go;
  logic     [N_ACC-1:0][CW-1:0]  mon_active, mon_comm, mon_total;
  logic     [N_MEM-1:0][CW-1:0]  ddr_count;
  logic     [N_ACC-1:0][N_MEM-1:0][CW-1:0] ddr_snap;

  for (genvar k = 0; k < int'(N_ACC); k++) begin : g_acc
    coh_mode_e mode_reg;
    tg_cfg_t   cfg_q;
    logic      tg_busy, pend;
    logic      a_req_valid, a_req_ready, a_rsp_valid;
    dma_req_t  a_req;
    logic [DW-1:0] a_rsp_data;
    logic      granted;

    assign granted = trk_set && (int'(inv_acc) == k);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cfg_q <= '0; tg_go[k] <= 1'b0; inv_open[k] <= 1'b0; done_pend[k] <= 1'b0;
        ddr_snap[k] <= '0;
      end else begin
        tg_go[k] <= granted;
        if (granted) begin
          cfg_q       <= inv_cfg;
          inv_open[k] <= 1'b1;
          ddr_snap[k] <= ddr_count;
        end
        if (acc_done[k]) done_pend[k] <= 1'b1;
        if (trk_clr && int'(trk_clr_acc) == k) begin
          done_pend[k] <= 1'b0;
          inv_open[k]  <= 1'b0;
        end
      end
    end

    traffic_gen #(.SEED(16'(16'hACE1 + 16'(k) * 16'h3B5)))u_tg (
      .clk, .rst_n, .start(tg_go[k]), .cfg(cfg_q), .busy(tg_busy), .done(acc_done[k]),
      .req_valid(a_req_valid), .req_ready(a_req_ready), .req(a_req),
      .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data)
    );

    coh_dma_router u_router (
      .clk, .rst_n, .mode(mode_reg),
      .acc_req_valid(a_req_valid), .acc_req_ready(a_req_ready), .acc_req(a_req),
      .acc_rsp_valid(a_rsp_valid), .acc_rsp_data(a_rsp_data),
      .cache_req_valid(pc_req_valid[k]), .cache_req_ready(pc_req_ready[k]), .cache_req(pc_req[k]),
      .cache_rsp_valid(pc_rsp_valid[k]), .cache_rsp_data(pc_rsp_data[k]),
      .noc_req_valid(noc_valid[k]), .noc_req_ready(noc_ready[k]), .noc_req(noc_req[k]),
      .noc_rsp_valid(noc_rsp_valid[k]), .noc_rsp_data(noc_rsp_data[k]),
      .pending(pend)
    );

    acc_perf_monitor #(.CNT_W(CW)) u_mon (
      .clk, .rst_n, .start(granted), .acc_busy(tg_busy), .dma_pending(pend),
      .inv_open(inv_open[k]),
      .active_cycles(mon_active[k]), .comm_cycles(mon_comm[k]), .total_cycles(mon_total[k])
    );

    tile_apb_regs #(.N_CNT(3), .CNT_W(CW), .HAS_CFG(1'b1)) u_regs (
      .clk, .rst_n, .psel(t_psel[k]), .penable(t_penable[k]), .pwrite, .paddr(paddr[7:0]), .pwdata,
      .prdata(t_prdata[k]), .pready(t_pready[k]), .pslverr(t_pslverr[k]),
      .hw_we(granted), .hw_mode(inv_mode), .coh_mode(mode_reg),
      .cnt({mon_total[k], mon_comm[k], mon_active[k]})
    );
  end

  // completion: lowest-numbered finished accelerator first
  always_comb begin
    done_valid = 1'b0;
    done_acc   = '0;
    for (int k = int'(N_ACC) - 1; k >= 0; k--) begin
      if (done_pend[k]) begin
        done_valid = 1'b1;
        done_acc   = AIW'(k);
      end
    end
    done_total = mon_total[done_acc];
    done_comm  = mon_comm[done_acc];
    for (int m = 0; m < int'(N_MEM); m++) done_ddr[m] = ddr_count[m] - ddr_snap[done_acc][m];
  end

  assign trk_clr     = done_valid && done_ready;
  assign trk_clr_acc = done_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_irq <= '0;
    else for (int k = 0; k < int'(N_ACC); k++) acc_irq[k] <= trk_clr && int'(done_acc) == k;
  end

  // ----------------------------------------------------------- interconnect
  logic     [N_MEM-1:0]          t_valid, t_ready, t_rsp_valid;
  noc_req_t [N_MEM-1:0]          t_req;
  logic     [N_MEM-1:0][DW-1:0]  t_rsp_data;

  noc_xbar #(.N_SRC(N_ACC), .N_MEM(N_MEM), .PART_LSB(PART_LSB)) u_xbar (
    .clk, .rst_n,
    .src_valid(noc_valid), .src_ready(noc_ready), .src_req(noc_req),
    .src_rsp_valid(noc_rsp_valid), .src_rsp_data(noc_rsp_data),
    .tgt_valid(t_valid), .tgt_ready(t_ready), .tgt_req(t_req),
    .tgt_rsp_valid(t_rsp_valid), .tgt_rsp_data(t_rsp_data)
  );

  // ------------------------------------------------------------ memory tiles
  for (genvar m = 0; m < int'(N_MEM); m++) begin : g_mem
    logic          to_mc;
    logic          rc_ready, rc_rsp_valid;
    logic [DW-1:0] rc_rsp_data;

    assign to_mc = (t_req[m].kind == K_MEM);

    // non-coherent DMA: straight to the memory controller
    assign mc_req_valid[m] = t_valid[m] && to_mc;
    assign mc_req[m]       = '{write: t_req[m].write, addr: t_req[m].addr, wdata: t_req[m].wdata};

    llc_dma_recall #(.N_CACHES(N_CACHES)) u_recall (
      .clk, .rst_n,
      .req_valid(t_valid[m] && !to_mc), .req_ready(rc_ready), .req(t_req[m]),
      .rsp_valid(rc_rsp_valid), .rsp_data(rc_rsp_data),
      .dir_lookup(dir_lookup[m]), .dir_addr(dir_addr[m]), .dir_sharers(dir_sharers[m]),
      .recall_valid(recall_valid[m]), .recall_addr(recall_addr[m]), .recall_mask(recall_mask[m]),
      .recall_done(recall_done[m]),
      .llc_req_valid(llc_req_valid[m]), .llc_req_ready(llc_req_ready[m]), .llc_req(llc_req[m]),
      .llc_rsp_valid(llc_rsp_valid[m]), .llc_rsp_data(llc_rsp_data[m])
    );

    assign t_ready[m]     = to_mc ? mc_req_ready[m] : rc_ready;
    assign t_rsp_valid[m] = to_mc ? mc_rsp_valid[m] : rc_rsp_valid;
    assign t_rsp_data[m]  = to_mc ? mc_rsp_data[m]  : rc_rsp_data;

    mem_access_monitor #(.CNT_W(CW), .N_SRC(2)) u_ddr_mon (
      .clk, .rst_n,
      .access({llc_ddr_access[m], mc_req_valid[m] && mc_req_ready[m]}),
      .count(ddr_count[m])
    );

    coh_mode_e unused_mode;
    tile_apb_regs #(.N_CNT(1), .CNT_W(CW), .HAS_CFG(1'b0)) u_regs (
      .clk, .rst_n, .psel(t_psel[N_ACC + m]), .penable(t_penable[N_ACC + m]), .pwrite, .paddr(paddr[7:0]), .pwdata,
      .prdata(t_prdata[N_ACC + m]), .pready(t_pready[N_ACC + m]), .pslverr(t_pslverr[N_ACC + m]),
      .hw_we(1'b0), .hw_mode(NON_COH_DMA), .coh_mode(unused_mode), .cnt(ddr_count[m])
    );
  end

endmodule
