// sys_status_tracker: the "sense" bookkeeping of the coherence agent.
//
// The paper keeps a compact snapshot of the SoC in software: which
// accelerators are active, the coherence mode of each, and their memory
// footprints. This block holds the same snapshot in registers. An invocation
// is entered with set_valid (accelerator, mode, footprint on each of the N_MEM
// memory partitions, in bytes) and removed with clr_valid when it completes;
// set wins if both name the same accelerator in one cycle. From the snapshot
// it derives, combinationally, the aggregates the state encoder needs:
//   fc_count      active fully-coherent accelerators
//   nc_cnt[m]     active non-coherent accelerators with data on partition m
//   llc_cnt[m]    active accelerators that use LLC partition m (every mode
//                 except non-coherent DMA goes through the LLC)
//   fp_sum[m]     total active footprint on partition m
// and it gives each accelerator's per-partition footprint for the memory
// access attribution of the reward. Footprint per partition as the unit of
// bookkeeping is this design's reading of the paper's per-partition state
// attributes.
module sys_status_tracker
  import cohm_pkg::*;
#(
  parameter int unsigned N_ACC = 12,
  parameter int unsigned N_MEM = 4,
  localparam int unsigned AIW  = (N_ACC > 1) ? $clog2(N_ACC) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       set_valid,
  input  logic [AIW-1:0]             set_acc,
  input  coh_mode_e                  set_mode,
  input  logic [N_MEM-1:0][FPW-1:0]  set_fp,
  input  logic                       clr_valid,
  input  logic [AIW-1:0]             clr_acc,
  output logic [N_ACC-1:0]           active,
  output coh_mode_e [N_ACC-1:0]      mode,
  output logic [N_ACC-1:0][N_MEM-1:0][FPW-1:0] acc_fp,
  output logic [7:0]                 fc_count,
  output logic [N_MEM-1:0][7:0]      nc_cnt,
  output logic [N_MEM-1:0][7:0]      llc_cnt,
  output logic [N_MEM-1:0][FPW-1:0]  fp_sum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0;
      mode   <= '{default: NON_COH_DMA};
      acc_fp <= '0;
    end else begin
      if (clr_valid) begin
        active[clr_acc] <= 1'b0;
        acc_fp[clr_acc] <= '0;
      end
      if (set_valid) begin
        active[set_acc] <= 1'b1;
        mode[set_acc]   <= set_mode;
        acc_fp[set_acc] <= set_fp;
      end
    end
  end

  always_comb begin
    fc_count = '0;
    nc_cnt   = '0;
    llc_cnt  = '0;
    fp_sum   = '0;
    for (int k = 0; k < int'(N_ACC); k++) begin
      if (active[k]) begin
        if (mode[k] == FULLY_COH) fc_count = fc_count + 8'd1;
        for (int m = 0; m < int'(N_MEM); m++) begin
          if (acc_fp[k][m] != '0) begin
            if (mode[k] == NON_COH_DMA) nc_cnt[m]  = nc_cnt[m] + 8'd1;
            else                        llc_cnt[m] = llc_cnt[m] + 8'd1;
          end
          fp_sum[m] = fp_sum[m] + acc_fp[k][m];
        end
      end
    end
  end

  a_set_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               set_valid |-> !active[set_acc] || (clr_valid && clr_acc == set_acc));

endmodule
