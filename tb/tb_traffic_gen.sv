// tb_traffic_gen: runs the generator in each access pattern against a memory
// model with random latency whose read data is a hash of the address. For
// streaming and strided runs the exact sequence of read addresses is
// predicted here; for all runs the number of reads and writes, the write
// addresses (in place or to the output buffer), the written data (XOR of the
// words read since the previous write), the address range of irregular reads,
// and the compute gap after every burst are checked.
module tb_traffic_gen;
  import cohm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  tg_cfg_t cfg;
  logic rq_v, rq_r = 0, rs_v = 0;
  dma_req_t rq;
  logic [31:0] rs_d = 0;
  int checks = 0, failures = 0;

  traffic_gen dut (.clk, .rst_n, .start, .cfg, .busy, .done, .req_valid(rq_v), .req_ready(rq_r), .req(rq),
    .rsp_valid(rs_v), .rsp_data(rs_d));

  always #5 clk = ~clk;

  function automatic logic [31:0] hash(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A0F0F;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // memory model: accept after a random delay, respond after another
  int n_rd, n_wr, last_rsp_cyc, gaps_bad, now;
  logic [31:0] xr;
  int exp_idx [$];
  logic last_was_read;
  always @(posedge clk) now <= now + 1;

  task automatic run(input tg_cfg_t c, input bit exact);
    int nreads_pass, passes, sp, wr_seen;
    cfg = c;
    passes = (c.reuse == 0) ? 1 : c.reuse;
    nreads_pass = (c.pattern == PAT_IRREGULAR) ? (((c.words * c.access_frac) >> 8) == 0 ? 1 : (c.words * c.access_frac) >> 8) : c.words;
    exp_idx.delete();
    for (int p = 0; p < passes; p++) begin
      sp = 0;
      for (int i = 0; i < nreads_pass; i++) begin
        exp_idx.push_back(sp);
        if (c.pattern == PAT_STRIDED) sp = (sp + c.stride >= c.words) ? sp + c.stride - c.words + 1 : sp + c.stride;
        else sp = sp + 1;
      end
    end
    n_rd = 0; n_wr = 0; xr = 0; gaps_bad = 0; wr_seen = 0; last_was_read = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check("busy after start", busy, 1);
    while (!done) begin
      if (rq_v) begin
        logic [31:0] a_q;
        logic w_q;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        rq_r = 1;
        a_q = rq.addr; w_q = rq.write;
        if (!rq.write) begin
          int idx;
          idx = int'((rq.addr - c.base) >> 2);
          check("read in range", idx < int'(c.words), 1);
          if (exact) check("read address", idx, exp_idx[n_rd]);
          // compute gap: a burst boundary precedes this read
          if (n_rd != 0 && (n_rd % c.burst_len) == 0 && last_was_read)
            if (now - last_rsp_cyc < c.compute_cyc) gaps_bad++;
          n_rd++;
        end else begin
          if (c.in_place) check("in-place write range", int'((rq.addr - c.base) >> 2) < int'(c.words), 1);
          else check("out write address", rq.addr, c.out_base + 32'(n_wr * 4));
          check("write data", rq.wdata, xr);
          xr = 0;
          n_wr++;
        end
        @(negedge clk); rq_r = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        rs_v = 1; rs_d = w_q ? 32'd0 : hash(a_q);
        if (!w_q) xr = xr ^ rs_d;
        last_was_read = !w_q;
        @(negedge clk); rs_v = 0;
        last_rsp_cyc = now;
      end else @(negedge clk);
    end
    check("reads", n_rd, passes * nreads_pass);
    check("writes", n_wr, (c.rd_per_wr == 0) ? 0 : nreads_pass / c.rd_per_wr);
    check("compute gaps", gaps_bad, 0);
    @(negedge clk);
    check("idle after done", busy, 0);
  endtask

  initial begin
    tg_cfg_t c;
    now = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    c = '0;
    c.pattern = PAT_STREAM; c.burst_len = 8; c.compute_cyc = 20; c.reuse = 1; c.rd_per_wr = 2;
    c.base = 32'h1000_0000; c.out_base = 32'h1001_0000; c.words = 64;
    run(c, 1);
    c.pattern = PAT_STRIDED; c.stride = 8; c.reuse = 2; c.rd_per_wr = 4; c.in_place = 1; c.words = 64;
    run(c, 1);
    c.pattern = PAT_IRREGULAR; c.access_frac = 8'd128; c.reuse = 1; c.rd_per_wr = 1; c.in_place = 0;
    c.words = 128; c.burst_len = 4; c.compute_cyc = 5;
    run(c, 0);
    c.pattern = PAT_STREAM; c.reuse = 3; c.rd_per_wr = 0; c.words = 40; c.burst_len = 16; c.compute_cyc = 0;
    run(c, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
