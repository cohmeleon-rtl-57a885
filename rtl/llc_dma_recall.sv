// llc_dma_recall: coherent-DMA front end of one LLC partition.
//
// DMA requests reach an LLC partition in two flavours. An LLC-coherent DMA
// request (kind K_LLC) is served by the LLC as it is: software has flushed the
// private caches beforehand. A coherent DMA request (kind K_LLC_COH) may target
// a line that a private cache holds, possibly dirty; the paper extends the
// MESI directory protocol so that the LLC first recalls the line from those
// private caches and only then serves the request. This block does that
// ordering:
//   IDLE   accept a request
//   LOOKUP (coherent DMA only) ask the directory which private caches hold the
//          line; dir_sharers is sampled in the cycle dir_lookup is high
//   RECALL hold recall_valid with the line address and the holder mask until
//          recall_done reports that every holder has written back / invalidated
//   FWD    hand the request to the LLC (valid/ready)
//   RESP   wait for the LLC response and pass it back
// The directory itself, the recall messages and the LLC are those of the
// existing cache hierarchy and are outside this block; the state sequence,
// the same-cycle directory answer and the handshakes are this design's choices.
// One request is handled at a time.
module llc_dma_recall
  import cohm_pkg::*;
#(
  parameter int unsigned N_CACHES = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // requests from the interconnect (kinds K_LLC and K_LLC_COH)
  input  logic                req_valid,
  output logic                req_ready,
  input  noc_req_t            req,
  output logic                rsp_valid,
  output logic [DW-1:0]       rsp_data,
  // directory lookup
  output logic                dir_lookup,
  output logic [AW-1:0]       dir_addr,
  input  logic [N_CACHES-1:0] dir_sharers,
  // recall to private caches
  output logic                recall_valid,
  output logic [AW-1:0]       recall_addr,
  output logic [N_CACHES-1:0] recall_mask,
  input  logic                recall_done,
  // LLC
  output logic                llc_req_valid,
  input  logic                llc_req_ready,
  output dma_req_t            llc_req,
  input  logic                llc_rsp_valid,
  input  logic [DW-1:0]       llc_rsp_data
);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_RECALL, S_FWD, S_RESP} state_e;
  state_e state;
  noc_req_t cur;
  logic [N_CACHES-1:0] mask;

  assign req_ready     = (state == S_IDLE);
  assign dir_lookup    = (state == S_LOOKUP);
  assign dir_addr      = cur.addr;
  assign recall_valid  = (state == S_RECALL);
  assign recall_addr   = cur.addr;
  assign recall_mask   = mask;
  assign llc_req_valid = (state == S_FWD);
  assign llc_req       = '{write: cur.write, addr: cur.addr, wdata: cur.wdata};
  assign rsp_valid     = (state == S_RESP) && llc_rsp_valid;
  assign rsp_data      = llc_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      mask  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          cur   <= req;
          state <= (req.kind == K_LLC_COH) ? S_LOOKUP : S_FWD;
        end
        S_LOOKUP: begin
          mask  <= dir_sharers;
          state <= (dir_sharers != '0) ? S_RECALL : S_FWD;
        end
        S_RECALL: if (recall_done) state <= S_FWD;
        S_FWD:    if (llc_req_ready) state <= S_RESP;
        S_RESP:   if (llc_rsp_valid) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // Only LLC-bound kinds arrive here.
  a_kind: assert property (@(posedge clk) disable iff (!rst_n)
                           (req_valid && req_ready) |-> (req.kind != K_MEM));

endmodule
