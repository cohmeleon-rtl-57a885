// tb_coh_dma_router: for each coherence mode, sends random requests and checks
// that each reaches the right port with the right kind, that nothing appears
// on the other port, that the response comes back from the port the request
// went to, and that 'pending' covers the request's lifetime.
module tb_coh_dma_router;
  import cohm_pkg::*;
  logic clk = 0, rst_n = 0;
  coh_mode_e mode = NON_COH_DMA;
  logic a_v = 0, a_r, r_v;
  dma_req_t a_req = '0;
  logic [31:0] r_d;
  logic c_v, c_r = 0, c_rv = 0;
  dma_req_t c_req;
  logic [31:0] c_rd = 0;
  logic n_v, n_r = 0, n_rv = 0;
  noc_req_t n_req;
  logic [31:0] n_rd = 0;
  logic pend;
  int checks = 0, failures = 0;

  coh_dma_router dut (.clk, .rst_n, .mode, .acc_req_valid(a_v), .acc_req_ready(a_r), .acc_req(a_req),
    .acc_rsp_valid(r_v), .acc_rsp_data(r_d), .cache_req_valid(c_v), .cache_req_ready(c_r),
    .cache_req(c_req), .cache_rsp_valid(c_rv), .cache_rsp_data(c_rd), .noc_req_valid(n_v),
    .noc_req_ready(n_r), .noc_req(n_req), .noc_rsp_valid(n_rv), .noc_rsp_data(n_rd), .pending(pend));

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  // one request in the given mode, random stalls on the target side
  task automatic one(input coh_mode_e md);
    logic to_cache;
    noc_kind_e k;
    int lat;
    logic [31:0] data;
    to_cache = (md == FULLY_COH);
    k = (md == NON_COH_DMA) ? K_MEM : (md == LLC_COH_DMA) ? K_LLC : K_LLC_COH;
    data = $urandom;
    @(negedge clk);
    mode = md;
    a_req = '{write: 1'($urandom), addr: $urandom, wdata: $urandom};
    a_v = 1;
    #1 check("pending on request", pend, 1);
    // target not ready for a few cycles
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      check("held valid cache", c_v, to_cache);
      check("held valid noc", n_v, !to_cache);
    end
    if (to_cache) c_r = 1; else n_r = 1;
    #1;
    check("accepted", a_r, 1);
    check("cache valid", c_v, to_cache);
    check("noc valid", n_v, !to_cache);
    if (to_cache) check("cache payload", c_req, a_req);
    else begin
      check("noc kind", n_req.kind, k);
      check("noc payload", {n_req.write, n_req.addr, n_req.wdata}, {a_req.write, a_req.addr, a_req.wdata});
    end
    @(negedge clk);
    a_v = 0; c_r = 0; n_r = 0;
    lat = $urandom_range(0, 4);
    repeat (lat) begin
      check("pending while waiting", pend, 1);
      check("no new accept", a_r, 0);
      // a response on the wrong port must be ignored: only drive the other port's data
      @(negedge clk);
    end
    if (to_cache) begin c_rv = 1; c_rd = data; n_rd = ~data; end
    else begin n_rv = 1; n_rd = data; c_rd = ~data; end
    #1;
    check("rsp valid", r_v, 1);
    check("rsp data", r_d, data);
    @(negedge clk);
    c_rv = 0; n_rv = 0;
    check("idle after rsp", pend, 0);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) one(coh_mode_e'(i % 4));
    for (int i = 0; i < 100; i++) one(coh_mode_e'($urandom_range(0, 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
