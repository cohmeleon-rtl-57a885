// reward_unit: reward of one finished accelerator invocation.
//
// Follows the paper's reward definition. For invocation i of accelerator k:
//   exec = total cycles / footprint            (scaled execution time)
//   comm = communication cycles / total cycles (communication ratio)
//   mem  = off-chip accesses / footprint       (scaled off-chip accesses)
//   Rexec = min_j exec / exec
//   Rcomm = min_j comm / comm
//   Rmem  = 1 - (mem - min_j mem) / (max_j mem - min_j mem)
//   R     = x*Rexec + y*Rcomm + z*Rmem
// where min_j / max_j run over all invocations j <= i of accelerator k, so the
// history registers are updated with the current values before the ratios are
// formed. The off-chip accesses of accelerator k are the paper's approximation:
// at every memory partition m the observed access delta is shared among the
// active accelerators in proportion to their footprint there,
//   ddr(k,m) = ddr_delta(m) * fp(k,m) / sum_acc fp(acc,m).
// Fixed point (this design's choice): exec and mem are scaled by 2^16, comm by
// 2^15, and Rexec, Rcomm, Rmem, R and the weights are UQ1.15. Corner cases not
// covered by the formulas (the paper is silent): comm = 0 gives Rcomm = 1, and
// max = min gives Rmem = 1, so a first invocation earns R = x + y + z.
// Weights default to the paper's 67.5 % / 7.5 % / 25 %.
// Timing: one shared 64-bit serial divider, about 67 cycles per division; a
// reward takes at most 68 * (N_MEM + 6) cycles from 'start' to 'done'. Inputs
// must be held from 'start' until 'done'.
module reward_unit
  import cohm_pkg::*;
#(
  parameter int unsigned N_ACC  = 12,
  parameter int unsigned N_MEM  = 4,
  parameter logic [QW-1:0] W_EXEC = 16'd22118,  // 0.675
  parameter logic [QW-1:0] W_COMM = 16'd2458,   // 0.075
  parameter logic [QW-1:0] W_MEM  = 16'd8192,   // 0.25
  localparam int unsigned AIW   = (N_ACC > 1) ? $clog2(N_ACC) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      hist_clear,
  input  logic                      start,
  input  logic [AIW-1:0]            acc,
  input  logic [CW-1:0]             total_cycles,
  input  logic [CW-1:0]             comm_cycles,
  input  logic [N_MEM-1:0][CW-1:0]  ddr_delta,
  input  logic [N_MEM-1:0][FPW-1:0] acc_fp,
  input  logic [N_MEM-1:0][FPW-1:0] fp_sum,
  output logic                      done,
  output logic [QW-1:0]             reward,
  output logic [QW-1:0]             r_exec,
  output logic [QW-1:0]             r_comm,
  output logic [QW-1:0]             r_mem,
  output logic [63:0]               mem_acc
);

  typedef enum logic [2:0] {S_IDLE, S_ATTR, S_ATTR_W, S_OP, S_OP_W, S_HIST, S_SUM} st_e;
  st_e st;
  logic [$clog2(N_MEM+1)-1:0] m;
  logic [2:0] op;

  logic [63:0] min_exec [N_ACC];
  logic [63:0] min_comm [N_ACC];
  logic [63:0] min_mem  [N_ACC];
  logic [63:0] max_mem  [N_ACC];
  logic [N_ACC-1:0] seen;

  logic [63:0] fp_tot, exec_v, comm_v, mem_v;
  logic [63:0] mn_exec, mn_comm, mn_mem, mx_mem;

  logic        dv_start, dv_done;
  logic [63:0] dv_n, dv_d, dv_q;
  logic        dv_busy;

  seq_div #(.W(64)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(dv_n), .divisor(dv_d),
    .busy(dv_busy), .done(dv_done), .quotient(dv_q)
  );

  always_comb begin
    fp_tot = '0;
    for (int i = 0; i < int'(N_MEM); i++) fp_tot = fp_tot + 64'(acc_fp[i]);
    if (fp_tot == '0) fp_tot = 64'd1;
  end

  // Operands of the divisions of step 'op' (after the attribution loop).
  always_comb begin
    dv_n = '0;
    dv_d = 64'd1;
    if (st == S_ATTR || st == S_ATTR_W) begin
      dv_n = 64'(ddr_delta[m]) * 64'(acc_fp[m]);
      dv_d = 64'(fp_sum[m]);
    end else begin
      unique case (op)
        3'd0: begin dv_n = 64'(total_cycles) << 16; dv_d = fp_tot; end
        3'd1: begin dv_n = 64'(comm_cycles) << 15;
                    dv_d = (total_cycles == '0) ? 64'd1 : 64'(total_cycles); end
        3'd2: begin dv_n = mem_acc << 16; dv_d = fp_tot; end
        3'd3: begin dv_n = mn_exec << 15; dv_d = exec_v; end
        3'd4: begin dv_n = mn_comm << 15; dv_d = comm_v; end
        default: begin dv_n = (mem_v - mn_mem) << 15; dv_d = mx_mem - mn_mem; end
      endcase
    end
  end

  function automatic logic [QW-1:0] clamp_one(input logic [63:0] v);
    return (v > 64'(Q_ONE)) ? Q_ONE : v[QW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m <= '0; op <= '0; done <= 1'b0; dv_start <= 1'b0;
      reward <= '0; r_exec <= '0; r_comm <= '0; r_mem <= '0; mem_acc <= '0;
      exec_v <= '0; comm_v <= '0; mem_v <= '0;
      mn_exec <= '0; mn_comm <= '0; mn_mem <= '0; mx_mem <= '0;
      seen <= '0;
      for (int k = 0; k < int'(N_ACC); k++) begin
        min_exec[k] <= '0; min_comm[k] <= '0; min_mem[k] <= '0; max_mem[k] <= '0;
      end
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      if (hist_clear) seen <= '0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_ATTR; m <= '0; op <= '0; mem_acc <= '0;
        end
        S_ATTR: begin
          if (int'(m) == int'(N_MEM)) st <= S_OP;
          else if (acc_fp[m] != '0 && fp_sum[m] != '0) begin
            dv_start <= 1'b1;
            st       <= S_ATTR_W;
          end else m <= m + 1'b1;
        end
        S_ATTR_W: if (dv_done) begin
          mem_acc <= mem_acc + dv_q;
          m       <= m + 1'b1;
          st      <= S_ATTR;
        end
        S_OP: begin
          // shortcuts for the degenerate ratios
          if (op == 3'd4 && comm_v == '0) begin
            r_comm <= Q_ONE; op <= op + 1'b1;
          end else if (op == 3'd5 && mx_mem == mn_mem) begin
            r_mem <= Q_ONE; st <= S_SUM;
          end else begin
            dv_start <= 1'b1;
            st       <= S_OP_W;
          end
        end
        S_OP_W: if (dv_done) begin
          unique case (op)
            3'd0: exec_v <= dv_q;
            3'd1: comm_v <= dv_q;
            3'd2: mem_v  <= dv_q;
            3'd3: r_exec <= clamp_one(dv_q);
            3'd4: r_comm <= clamp_one(dv_q);
            default: r_mem <= Q_ONE - clamp_one(dv_q);
          endcase
          if (op == 3'd2)      st <= S_HIST;
          else if (op == 3'd5) st <= S_SUM;
          else                 st <= S_OP;
          op <= op + 1'b1;
        end
        S_HIST: begin
          // min/max over j <= i, including this invocation
          if (!seen[acc]) begin
            mn_exec <= exec_v; mn_comm <= comm_v; mn_mem <= mem_v; mx_mem <= mem_v;
            min_exec[acc] <= exec_v; min_comm[acc] <= comm_v;
            min_mem[acc]  <= mem_v;  max_mem[acc]  <= mem_v;
            seen[acc] <= 1'b1;
          end else begin
            mn_exec <= (exec_v < min_exec[acc]) ? exec_v : min_exec[acc];
            mn_comm <= (comm_v < min_comm[acc]) ? comm_v : min_comm[acc];
            mn_mem  <= (mem_v  < min_mem[acc])  ? mem_v  : min_mem[acc];
            mx_mem  <= (mem_v  > max_mem[acc])  ? mem_v  : max_mem[acc];
            if (exec_v < min_exec[acc]) min_exec[acc] <= exec_v;
            if (comm_v < min_comm[acc]) min_comm[acc] <= comm_v;
            if (mem_v  < min_mem[acc])  min_mem[acc]  <= mem_v;
            if (mem_v  > max_mem[acc])  max_mem[acc]  <= mem_v;
          end
          st <= S_OP;
        end
        S_SUM: begin
          reward <= clamp_one(((64'(W_EXEC) * 64'(r_exec)) + (64'(W_COMM) * 64'(r_comm)) +
                               (64'(W_MEM) * 64'(r_mem))) >> 15);
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
