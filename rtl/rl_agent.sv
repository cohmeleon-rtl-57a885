// rl_agent: Q-learning agent that picks the coherence mode of each invocation.
//
// Sense, decide, actuate, evaluate, as in the paper:
//  * Sense: when an invocation is requested (inv_valid with the accelerator
//    and its per-partition footprint), the state encoder turns the live status
//    snapshot into one of 243 states s.
//  * Decide: epsilon-greedy. With probability epsilon (a 32-bit LFSR draw
//    compared with epsilon) a random mode is taken; otherwise the four
//    Q-values of s are read and the mode with the largest value wins (ties go
//    to the lower encoding, an assumption). Only the modes the accelerator
//    supports (inv_avail) take part in either choice: an accelerator without
//    a private cache, for example, cannot run fully coherent; a random draw
//    of an unsupported mode moves on to the next supported one. Exploration and updates happen
//    only while train_en is high; with train_en low the agent only exploits,
//    like the paper's frozen model after convergence.
//  * Actuate: inv_ready pulses with inv_mode; the surrounding logic writes the
//    tile's coherence register and starts the accelerator. (s, a) is recorded
//    per accelerator.
//  * Evaluate: when the accelerator's completion is presented (done_valid with
//    its cycle counts and memory access deltas) the reward unit computes R and
//    the entry is updated, Q(s,a) <- (1 - alpha) Q(s,a) + alpha R; done_ready
//    then pulses.
// Epsilon and alpha start at the paper's 0.5 and 0.25 (UQ1.15) on train_reset
// and decay linearly to zero: each Q update subtracts eps_step and alpha_step
// (saturating), so software sets the step to initial value / number of
// updates in the training run. Counting decay per update is this design's
// choice; the paper decays over a selected number of application iterations.
// train_reset also clears the Q-table (972 cycles) and the reward history.
// The paper runs this agent as software on a processor; a hardware agent is
// this design's choice. One request is handled at a time; a completion is
// served before a new invocation request.
module rl_agent
  import cohm_pkg::*;
#(
  parameter int unsigned N_ACC           = 12,
  parameter int unsigned N_MEM           = 4,
  parameter int unsigned L2_BYTES        = 65536,
  parameter int unsigned LLC_SLICE_BYTES = 524288,
  parameter logic [QW-1:0] EPS0          = 16'd16384,  // 0.5
  parameter logic [QW-1:0] ALPHA0        = 16'd8192,   // 0.25
  parameter logic [QW-1:0] W_EXEC        = 16'd22118,  // 0.675
  parameter logic [QW-1:0] W_COMM        = 16'd2458,   // 0.075
  parameter logic [QW-1:0] W_MEM         = 16'd8192,   // 0.25
  parameter logic [31:0]   SEED          = 32'h1D872B41,
  localparam int unsigned AIW            = (N_ACC > 1) ? $clog2(N_ACC) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // training control
  input  logic                      train_reset,
  input  logic                      train_en,
  input  logic [QW-1:0]             eps_step,
  input  logic [QW-1:0]             alpha_step,
  // status snapshot (from the status tracker)
  input  logic [7:0]                fc_count,
  input  logic [N_MEM-1:0][7:0]     nc_cnt,
  input  logic [N_MEM-1:0][7:0]     llc_cnt,
  input  logic [N_MEM-1:0][FPW-1:0] fp_sum,
  input  logic [N_ACC-1:0][N_MEM-1:0][FPW-1:0] acc_fp,
  // invocation request / decision
  input  logic                      inv_valid,
  output logic                      inv_ready,
  input  logic [AIW-1:0]            inv_acc,
  input  logic [N_MEM-1:0][FPW-1:0] inv_fp,
  input  logic [N_ACTIONS-1:0]      inv_avail,   // modes the accelerator supports
  output coh_mode_e                 inv_mode,
  output logic                      inv_explored,
  // completion / evaluation
  input  logic                      done_valid,
  output logic                      done_ready,
  input  logic [AIW-1:0]            done_acc,
  input  logic [CW-1:0]             done_total,
  input  logic [CW-1:0]             done_comm,
  input  logic [N_MEM-1:0][CW-1:0]  done_ddr,
  // observability
  output logic                      busy,
  output logic [QW-1:0]             eps,
  output logic [QW-1:0]             alpha,
  output logic [SW-1:0]             cur_state,
  output logic [QW-1:0]             last_reward
);

  typedef enum logic [3:0] {
    S_CLEAR, S_IDLE, S_SENSE, S_RD, S_RD_W, S_GRANT,
    S_REW, S_REW_W, S_UPD_R, S_UPD_W, S_DONE
  } st_e;
  st_e st;

  // state encoder
  state_attr_t attr;
  logic [SW-1:0] enc_state;
  state_encoder #(.N_MEM(N_MEM), .L2_BYTES(L2_BYTES), .LLC_SLICE_BYTES(LLC_SLICE_BYTES)) u_enc (
    .fc_count, .nc_cnt, .llc_cnt, .fp_sum, .tgt_fp(inv_fp), .attr, .state(enc_state)
  );

  // Q-table
  logic            q_clear, q_busy, q_rd, q_wr;
  logic [QAW-1:0]  q_raddr, q_waddr;
  logic [QW-1:0]   q_rdata, q_wdata;
  q_table #(.N_ENTRIES(N_QENT), .QWID(QW)) u_q (
    .clk, .rst_n, .clear(q_clear), .busy(q_busy), .rd_en(q_rd), .rd_addr(q_raddr),
    .rd_data(q_rdata), .wr_en(q_wr), .wr_addr(q_waddr), .wr_data(q_wdata)
  );

  // reward unit
  logic          rw_start, rw_done;
  logic [QW-1:0] rw_reward, rw_exec, rw_comm, rw_mem;
  logic [63:0]   rw_memacc;
  logic [AIW-1:0] d_acc;
  reward_unit #(.N_ACC(N_ACC), .N_MEM(N_MEM), .W_EXEC(W_EXEC), .W_COMM(W_COMM), .W_MEM(W_MEM)) u_rew (
    .clk, .rst_n, .hist_clear(q_clear), .start(rw_start), .acc(d_acc),
    .total_cycles(done_total), .comm_cycles(done_comm), .ddr_delta(done_ddr),
    .acc_fp(acc_fp[d_acc]), .fp_sum, .done(rw_done), .reward(rw_reward),
    .r_exec(rw_exec), .r_comm(rw_comm), .r_mem(rw_mem), .mem_acc(rw_memacc)
  );

  // exploration among the supported modes: the drawn mode if supported,
  // otherwise the next supported one in encoding order (wrapping)
  function automatic coh_mode_e first_avail(input logic [N_ACTIONS-1:0] av, input logic [1:0] r);
    coh_mode_e m;
    m = coh_mode_e'(r);
    for (int i = N_ACTIONS - 1; i >= 0; i--)
      if (av[2'(int'(r) + i)]) m = coh_mode_e'(2'(int'(r) + i));
    return m;
  endfunction

  // random source: 32-bit Galois LFSR, taps 32,22,2,1
  logic [31:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h80200003 : 32'h0);
  end

  logic [SW-1:0]  rec_state [N_ACC];
  coh_mode_e      rec_act   [N_ACC];
  logic [1:0]     idx;
  coh_mode_e      best_a;
  logic [QW-1:0]  best_q;
  logic           found;
  logic [AIW-1:0] i_acc;

  assign busy      = (st != S_IDLE);
  assign inv_ready = (st == S_GRANT);
  assign inv_mode  = best_a;
  assign done_ready = (st == S_DONE);
  assign q_clear   = (st == S_IDLE) && train_reset;
  assign q_rd      = (st == S_RD) || (st == S_UPD_R);
  assign q_raddr   = (st == S_RD) ? q_addr(cur_state, idx) : q_addr(rec_state[d_acc], rec_act[d_acc]);
  assign q_wr      = (st == S_UPD_W);
  assign q_waddr   = q_addr(rec_state[d_acc], rec_act[d_acc]);
  assign q_wdata   = 16'((32'(Q_ONE - alpha) * 32'(q_rdata) + 32'(alpha) * 32'(last_reward)) >> 15);
  assign rw_start  = (st == S_REW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; eps <= EPS0; alpha <= ALPHA0; cur_state <= '0; last_reward <= '0;
      idx <= '0; best_a <= NON_COH_DMA; best_q <= '0; found <= 1'b0; i_acc <= '0; d_acc <= '0;
      inv_explored <= 1'b0;
      for (int k = 0; k < int'(N_ACC); k++) begin
        rec_state[k] <= '0;
        rec_act[k]   <= NON_COH_DMA;
      end
    end else begin
      unique case (st)
        S_CLEAR: if (!q_busy) st <= S_IDLE;
        S_IDLE: begin
          if (train_reset) begin
            st <= S_CLEAR; eps <= EPS0; alpha <= ALPHA0;
          end else if (done_valid) begin
            d_acc <= done_acc;
            st    <= S_REW;
          end else if (inv_valid) begin
            i_acc <= inv_acc;
            st    <= S_SENSE;
          end
        end
        S_SENSE: begin
          cur_state <= enc_state;
          if (train_en && ({1'b0, lfsr[14:0]} < eps)) begin
            best_a       <= first_avail(inv_avail, lfsr[17:16]);
            inv_explored <= 1'b1;
            st           <= S_GRANT;
          end else begin
            inv_explored <= 1'b0;
            found        <= 1'b0;
            best_a       <= NON_COH_DMA;
            idx          <= 2'd0;
            st           <= S_RD;
          end
        end
        S_RD: st <= S_RD_W;
        S_RD_W: begin
          if (inv_avail[idx] && (!found || q_rdata > best_q)) begin
            found  <= 1'b1;
            best_q <= q_rdata;
            best_a <= coh_mode_e'(idx);
          end
          if (idx == 2'd3) st <= S_GRANT;
          else begin
            idx <= idx + 1'b1;
            st  <= S_RD;
          end
        end
        S_GRANT: begin
          rec_state[i_acc] <= cur_state;
          rec_act[i_acc]   <= best_a;
          st <= S_IDLE;
        end
        S_REW: st <= S_REW_W;
        S_REW_W: if (rw_done) begin
          last_reward <= rw_reward;
          st <= train_en ? S_UPD_R : S_DONE;
        end
        S_UPD_R: st <= S_UPD_W;
        S_UPD_W: begin
          eps   <= (eps > eps_step) ? eps - eps_step : '0;
          alpha <= (alpha > alpha_step) ? alpha - alpha_step : '0;
          st    <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  a_avail: assert property (@(posedge clk) disable iff (!rst_n)
                            (st == S_IDLE && inv_valid && !done_valid && !train_reset) |-> (inv_avail != '0));
  a_mode_supported: assert property (@(posedge clk) disable iff (!rst_n)
                                     inv_ready |-> inv_avail[best_a]);

  a_inv_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               (inv_valid && !inv_ready && st != S_IDLE && st != S_CLEAR
                                && st < S_REW) |=> inv_valid);

endmodule
