// state_encoder: builds the learning state of one accelerator invocation.
//
// The state is the paper's 5-tuple, each attribute quantised to 0, 1 or 2+:
//   fully_coh_acc     number of active fully-coherent accelerators
//   non_coh_per_tile  average number of non-coherent accelerators on the memory
//                     partitions the target invocation needs
//   to_llc_per_tile   average number of accelerators using those LLC partitions
//   tile_footprint    average footprint per needed partition:
//                     <= L2, <= LLC slice, > LLC slice
//   acc_footprint     footprint of the target invocation, same three levels
// A partition is "needed" when the target has data on it (tgt_fp[m] != 0).
// Averages are compared against integer levels without a divider: with n
// needed partitions and a sum S, level = 0 if S < n, 1 if S < 2n, else 2 (the
// floor of the average, this design's reading of "0, 1, 2+"). The partition
// utilisation counts the target's own footprint together with that of the
// active accelerators (this design's choice, after the footprint +
// active_footprint test of the paper's hand-tuned policy). The index into the
// Q-table is the base-3 number fc*81 + nc*27 + llc*9 + tile*3 + acc.
// Purely combinational.
module state_encoder
  import cohm_pkg::*;
#(
  parameter int unsigned N_MEM           = 4,
  parameter int unsigned L2_BYTES        = 65536,
  parameter int unsigned LLC_SLICE_BYTES = 524288
) (
  input  logic [7:0]                fc_count,
  input  logic [N_MEM-1:0][7:0]     nc_cnt,
  input  logic [N_MEM-1:0][7:0]     llc_cnt,
  input  logic [N_MEM-1:0][FPW-1:0] fp_sum,
  input  logic [N_MEM-1:0][FPW-1:0] tgt_fp,
  output state_attr_t               attr,
  output logic [SW-1:0]             state
);

  function automatic level_t avg_level(input logic [15:0] sum, input logic [7:0] n);
    if (n == 8'd0 || sum < 16'(n))  return 2'd0;
    else if (sum < 16'(n) * 16'd2)  return 2'd1;
    else                            return 2'd2;
  endfunction

  function automatic level_t fp_level(input logic [47:0] sum, input logic [7:0] n);
    if (sum <= 48'(n) * 48'(L2_BYTES))             return 2'd0;
    else if (sum <= 48'(n) * 48'(LLC_SLICE_BYTES)) return 2'd1;
    else                                           return 2'd2;
  endfunction

  always_comb begin
    logic [7:0]  n;
    logic [15:0] nc_sum, llc_sum;
    logic [47:0] tile_sum, acc_sum;
    n = '0; nc_sum = '0; llc_sum = '0; tile_sum = '0; acc_sum = '0;
    for (int m = 0; m < int'(N_MEM); m++) begin
      acc_sum = acc_sum + 48'(tgt_fp[m]);
      if (tgt_fp[m] != '0) begin
        n        = n + 8'd1;
        nc_sum   = nc_sum + 16'(nc_cnt[m]);
        llc_sum  = llc_sum + 16'(llc_cnt[m]);
        tile_sum = tile_sum + 48'(fp_sum[m]) + 48'(tgt_fp[m]);
      end
    end
    attr.fully_coh_acc    = (fc_count >= 8'd2) ? 2'd2 : level_t'(fc_count);
    attr.non_coh_per_tile = avg_level(nc_sum, n);
    attr.to_llc_per_tile  = avg_level(llc_sum, n);
    attr.tile_footprint   = fp_level(tile_sum, n);
    attr.acc_footprint    = fp_level(acc_sum, 8'd1);
    state                 = state_index(attr);
  end

endmodule
