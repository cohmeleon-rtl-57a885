// noc_xbar: request/response crossbar from accelerator tiles to memory tiles.
//
// Stands in for the SoC's network-on-chip, which is not modelled: it only
// carries each accelerator request to the memory tile that owns its address
// and carries the response back. Memory partitions are contiguous address
// ranges: partition = addr[PART_LSB +: log2(N_MEM)] (the paper states that
// each LLC partition owns a contiguous part of the address space; the bit
// position is this design's choice). Each memory-tile port serves one request
// at a time and picks among waiting sources round-robin. The granted request
// stays on tgt_req from the grant until its response, so the memory tile may
// decode it at any time. No latency model: a request is granted the cycle it
// appears if the target is idle, and presented to the target one cycle later.
module noc_xbar
  import cohm_pkg::*;
#(
  parameter int unsigned N_SRC    = 12,
  parameter int unsigned N_MEM    = 4,
  parameter int unsigned PART_LSB = 28,
  localparam int unsigned SIW = (N_SRC > 1) ? $clog2(N_SRC) : 1,
  localparam int unsigned MIW = (N_MEM > 1) ? $clog2(N_MEM) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic     [N_SRC-1:0]        src_valid,
  output logic     [N_SRC-1:0]        src_ready,
  input  noc_req_t [N_SRC-1:0]        src_req,
  output logic     [N_SRC-1:0]        src_rsp_valid,
  output logic     [N_SRC-1:0][DW-1:0] src_rsp_data,
  output logic     [N_MEM-1:0]        tgt_valid,
  input  logic     [N_MEM-1:0]        tgt_ready,
  output noc_req_t [N_MEM-1:0]        tgt_req,
  input  logic     [N_MEM-1:0]        tgt_rsp_valid,
  input  logic     [N_MEM-1:0][DW-1:0] tgt_rsp_data
);

  typedef enum logic [1:0] {T_IDLE, T_ISSUE, T_WAIT} tst_e;
  tst_e             tst   [N_MEM];
  logic [SIW-1:0]   owner [N_MEM];
  logic [SIW-1:0]   rr    [N_MEM];
  logic [N_MEM-1:0]            gnt_any;
  logic [N_MEM-1:0][SIW-1:0]   gnt_idx;

  function automatic logic [MIW-1:0] part_of(input logic [AW-1:0] a);
    return (N_MEM > 1) ? a[PART_LSB +: MIW] : '0;
  endfunction

  // round-robin pick per target
  always_comb begin
    int s;
    s         = 0;
    gnt_any   = '0;
    gnt_idx   = '0;
    src_ready = '0;
    for (int t = 0; t < int'(N_MEM); t++) begin
      if (tst[t] == T_IDLE) begin
        for (int j = 0; j < int'(N_SRC); j++) begin
          s = (int'(rr[t]) + j) % int'(N_SRC);
          if (!gnt_any[t] && src_valid[s] && int'(part_of(src_req[s].addr)) == t) begin
            gnt_any[t] = 1'b1;
            gnt_idx[t] = SIW'(s);
          end
        end
        if (gnt_any[t]) src_ready[gnt_idx[t]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(N_MEM); t++) begin
        tst[t] <= T_IDLE; owner[t] <= '0; rr[t] <= '0; tgt_req[t] <= '0;
      end
    end else begin
      for (int t = 0; t < int'(N_MEM); t++) begin
        unique case (tst[t])
          T_IDLE: if (gnt_any[t]) begin
            owner[t]   <= gnt_idx[t];
            tgt_req[t] <= src_req[gnt_idx[t]];
            rr[t]      <= (int'(gnt_idx[t]) == int'(N_SRC) - 1) ? '0 : gnt_idx[t] + 1'b1;
            tst[t]     <= T_ISSUE;
          end
          T_ISSUE: if (tgt_ready[t]) tst[t] <= T_WAIT;
          T_WAIT:  if (tgt_rsp_valid[t]) tst[t] <= T_IDLE;
          default: tst[t] <= T_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    src_rsp_valid = '0;
    src_rsp_data  = '0;
    for (int t = 0; t < int'(N_MEM); t++) begin
      tgt_valid[t] = (tst[t] == T_ISSUE);
      if (tst[t] == T_WAIT && tgt_rsp_valid[t]) begin
        src_rsp_valid[owner[t]] = 1'b1;
        src_rsp_data[owner[t]]  = tgt_rsp_data[t];
      end
    end
  end

endmodule
