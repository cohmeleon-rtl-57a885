// coh_dma_router: the coherence part of an accelerator tile's socket.
//
// Accelerators are built with no notion of coherence: they only issue memory
// requests. The socket around them turns each request into one of the four
// coherence modes selected by the tile's coherence configuration register:
//   FULLY_COH   -> the tile's private cache (cache port)
//   COH_DMA     -> the interconnect, kind K_LLC_COH: the LLC recalls the line
//                  from private caches that hold it, then serves the request
//   LLC_COH_DMA -> the interconnect, kind K_LLC: the LLC serves it directly
//   NON_COH_DMA -> the interconnect, kind K_MEM: the memory controller serves
//                  it, bypassing the cache hierarchy
// This mapping follows the paper. The handshake is this design's choice:
// valid/ready requests of one word, one outstanding request at a time, and one
// response per request (a write gets an acknowledge with zero data). The
// router remembers where its outstanding request went and takes the response
// from that port only. 'pending' is high while a request waits to be accepted
// or waits for its response: the "communicating" condition of the tile's
// performance monitor.
// Timing: request and response paths are combinational; a new request can be
// accepted in the cycle after the previous response.
module coh_dma_router
  import cohm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  coh_mode_e     mode,
  // accelerator side
  input  logic          acc_req_valid,
  output logic          acc_req_ready,
  input  dma_req_t      acc_req,
  output logic          acc_rsp_valid,
  output logic [DW-1:0] acc_rsp_data,
  // private cache side (fully-coherent mode)
  output logic          cache_req_valid,
  input  logic          cache_req_ready,
  output dma_req_t      cache_req,
  input  logic          cache_rsp_valid,
  input  logic [DW-1:0] cache_rsp_data,
  // interconnect side (the three DMA modes)
  output logic          noc_req_valid,
  input  logic          noc_req_ready,
  output noc_req_t      noc_req,
  input  logic          noc_rsp_valid,
  input  logic [DW-1:0] noc_rsp_data,
  // monitor
  output logic          pending
);

  logic outst;      // a request has been accepted, response not yet seen
  logic dst_cache;  // the outstanding request went to the cache port
  logic to_cache;

  assign to_cache = (mode == FULLY_COH);

  always_comb begin
    noc_kind_e kind;
    unique case (mode)
      NON_COH_DMA: kind = K_MEM;
      LLC_COH_DMA: kind = K_LLC;
      default:     kind = K_LLC_COH;
    endcase
    cache_req       = acc_req;
    noc_req         = '{kind: kind, write: acc_req.write, addr: acc_req.addr, wdata: acc_req.wdata};
    cache_req_valid = acc_req_valid && !outst && to_cache;
    noc_req_valid   = acc_req_valid && !outst && !to_cache;
    acc_req_ready   = !outst && (to_cache ? cache_req_ready : noc_req_ready);
    acc_rsp_valid   = outst && (dst_cache ? cache_rsp_valid : noc_rsp_valid);
    acc_rsp_data    = dst_cache ? cache_rsp_data : noc_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outst     <= 1'b0;
      dst_cache <= 1'b0;
    end else if (acc_req_valid && acc_req_ready) begin
      outst     <= 1'b1;
      dst_cache <= to_cache;
    end else if (acc_rsp_valid) begin
      outst     <= 1'b0;
    end
  end

  assign pending = outst || acc_req_valid;

  // The mode is changed only between requests.
  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  (outst && !acc_rsp_valid) |=> $stable(mode));
  // No response without an outstanding request.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   (!outst) |-> !(cache_rsp_valid || noc_rsp_valid));

endmodule
