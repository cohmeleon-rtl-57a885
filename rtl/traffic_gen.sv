// traffic_gen: configurable accelerator that reproduces memory traffic.
//
// To study many communication behaviours, the evaluation SoCs use a traffic
// generator configurable in: access pattern (streaming, strided, irregular),
// DMA burst length, compute duration, data reuse factor, read-to-write ratio,
// stride length, access fraction and in-place storage. Those are the fields
// of cohm_pkg::tg_cfg_t; how they combine is this design's own reading:
//  * One pass reads the input. Streaming reads words 0,1,2,...; strided walks
//    the input with the given stride and moves to the next column when it
//    runs past the end (a column walk of a row-major matrix); irregular reads
//    words*access_frac/256 words at pseudo-random positions.
//  * Reads are grouped in bursts of burst_len words. After each burst the
//    generator computes for compute_cyc cycles.
//  * The pass is repeated 'reuse' times (0 counts as 1). In the last pass, one
//    word is written for every rd_per_wr words read (0: no writes), after the
//    compute phase of the burst. In-place writes go to the address of the read
//    that completed the group; otherwise writes go to consecutive words from
//    out_base. The written word is the XOR of the words read since the last
//    write, so results depend on the data served.
// Memory port: one-word valid/ready requests with one response each (write
// acknowledges included), one outstanding request; bursts are sequences of
// single-word requests. A 'start' pulse samples nothing: cfg must be held
// stable until 'done' pulses. 'busy' is the accelerator-executing signal.
module traffic_gen
  import cohm_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  tg_cfg_t       cfg,
  output logic          busy,
  output logic          done,
  output logic          req_valid,
  input  logic          req_ready,
  output dma_req_t      req,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_data
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_RD_W, S_COMP, S_WR, S_WR_W} st_e;
  st_e st;

  logic [23:0] n_reads, rd_done, sptr, last_idx, out_ptr;
  logic [7:0]  in_burst;
  logic [3:0]  pass, passes, grp;
  logic [23:0] wr_pend;
  logic [15:0] comp_cnt;
  logic [15:0] lfsr;
  logic [DW-1:0] acc_x;
  logic [23:0] cur_idx, rnd_idx;
  logic        last_pass;

  assign passes    = (cfg.reuse == '0) ? 4'd1 : cfg.reuse;
  assign last_pass = (pass == passes - 4'd1);
  assign busy      = (st != S_IDLE);
  assign rnd_idx   = 24'((40'(lfsr) * 40'(cfg.words)) >> 16);

  always_comb begin
    unique case (cfg.pattern)
      PAT_IRREGULAR: cur_idx = rnd_idx;
      default:       cur_idx = sptr;
    endcase
  end

  always_comb begin
    req       = '0;
    req_valid = 1'b0;
    if (st == S_RD) begin
      req_valid = 1'b1;
      req.write = 1'b0;
      req.addr  = cfg.base + AW'({cur_idx, 2'b00});
    end else if (st == S_WR) begin
      req_valid = 1'b1;
      req.write = 1'b1;
      req.addr  = cfg.in_place ? cfg.base + AW'({last_idx, 2'b00}) : cfg.out_base + AW'({out_ptr, 2'b00});
      req.wdata = acc_x;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n_reads <= '0; rd_done <= '0; sptr <= '0; last_idx <= '0; out_ptr <= '0;
      in_burst <= '0; pass <= '0; grp <= '0; wr_pend <= '0; comp_cnt <= '0; lfsr <= SEED;
      acc_x <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          n_reads  <= (cfg.pattern == PAT_IRREGULAR) ?
                      ((24'((32'(cfg.words) * 32'(cfg.access_frac)) >> 8) == '0) ? 24'd1 :
                       24'((32'(cfg.words) * 32'(cfg.access_frac)) >> 8)) : cfg.words;
          rd_done  <= '0; sptr <= '0; out_ptr <= '0; in_burst <= '0; pass <= '0;
          grp <= '0; wr_pend <= '0; acc_x <= '0;
          st <= S_RD;
        end
        S_RD: if (req_ready) begin
          last_idx <= cur_idx;
          st       <= S_RD_W;
        end
        S_RD_W: if (rsp_valid) begin
          acc_x    <= acc_x ^ rsp_data;
          rd_done  <= rd_done + 1'b1;
          in_burst <= in_burst + 1'b1;
          lfsr     <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
          // next position of the streaming / strided walk
          if (cfg.pattern == PAT_STRIDED) begin
            if (sptr + 24'(cfg.stride) >= cfg.words)
              sptr <= sptr + 24'(cfg.stride) - cfg.words + 24'd1;
            else
              sptr <= sptr + 24'(cfg.stride);
          end else begin
            sptr <= sptr + 1'b1;
          end
          // read-to-write ratio: one write owed per rd_per_wr reads
          if (last_pass && cfg.rd_per_wr != '0) begin
            if (grp == cfg.rd_per_wr - 4'd1) begin
              grp     <= '0;
              wr_pend <= wr_pend + 1'b1;
            end else grp <= grp + 1'b1;
          end
          if (in_burst + 8'd1 >= cfg.burst_len || rd_done + 24'd1 == n_reads) begin
            comp_cnt <= cfg.compute_cyc;
            st       <= S_COMP;
          end else st <= S_RD;
        end
        S_COMP: begin
          if (comp_cnt != '0) comp_cnt <= comp_cnt - 1'b1;
          else begin
            in_burst <= '0;
            if (wr_pend != '0)               st <= S_WR;
            else if (rd_done != n_reads)     st <= S_RD;
            else if (!last_pass) begin
              pass <= pass + 1'b1; rd_done <= '0; sptr <= '0; st <= S_RD;
            end else begin
              done <= 1'b1; st <= S_IDLE;
            end
          end
        end
        S_WR: if (req_ready) st <= S_WR_W;
        S_WR_W: if (rsp_valid) begin
          wr_pend <= wr_pend - 1'b1;
          out_ptr <= out_ptr + 1'b1;
          acc_x   <= '0;
          st      <= S_COMP;  // comp_cnt is zero: re-evaluates what is next
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
