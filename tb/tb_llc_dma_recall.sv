// tb_llc_dma_recall: LLC-coherent requests go straight to the LLC; coherent
// requests look up the directory and, when private caches hold the line,
// recall it from exactly those caches before the LLC sees the request. An
// LLC model checks that it never receives a coherent request whose recall has
// not completed, and the response returns the LLC data.
module tb_llc_dma_recall;
  import cohm_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst_n = 0;
  logic rq_v = 0, rq_r, rs_v;
  noc_req_t rq = '0;
  logic [31:0] rs_d;
  logic dl;
  logic [31:0] da;
  logic [NC-1:0] sharers = 0;
  logic rc_v;
  logic [31:0] rc_a;
  logic [NC-1:0] rc_m;
  logic rc_done = 0;
  logic l_v, l_r = 0, l_rv = 0;
  dma_req_t l_req;
  logic [31:0] l_rd = 0;
  int checks = 0, failures = 0, recalls = 0;

  llc_dma_recall #(.N_CACHES(NC)) dut (.clk, .rst_n, .req_valid(rq_v), .req_ready(rq_r), .req(rq),
    .rsp_valid(rs_v), .rsp_data(rs_d), .dir_lookup(dl), .dir_addr(da), .dir_sharers(sharers),
    .recall_valid(rc_v), .recall_addr(rc_a), .recall_mask(rc_m), .recall_done(rc_done),
    .llc_req_valid(l_v), .llc_req_ready(l_r), .llc_req(l_req), .llc_rsp_valid(l_rv), .llc_rsp_data(l_rd));

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic one(input logic coh, input logic [NC-1:0] holders);
    logic [31:0] addr, data;
    int cyc;
    logic saw_lookup, recalled, done_given;
    addr = $urandom; data = $urandom;
    saw_lookup = 0; recalled = 0; done_given = 0;
    @(negedge clk);
    rq = '{kind: coh ? K_LLC_COH : K_LLC, write: 1'($urandom), addr: addr, wdata: $urandom};
    rq_v = 1;
    #1 check("ready in idle", rq_r, 1);
    @(negedge clk); rq_v = 0;
    cyc = 0;
    while (!l_v && cyc < 50) begin
      if (dl) begin
        saw_lookup = 1;
        check("lookup addr", da, addr);
        sharers = holders;
      end else sharers = $urandom;  // garbage outside the lookup cycle
      if (rc_v) begin
        check("recall addr", rc_a, addr);
        check("recall mask", rc_m, holders);
        if (!recalled) recalls++;
        recalled = 1;
        rc_done = ($urandom_range(0, 2) == 0);
        if (rc_done) begin done_given = 1; @(negedge clk); rc_done = 0; continue; end
      end
      @(negedge clk); cyc++;
    end
    check("lookup only for coherent", saw_lookup, coh);
    check("recall iff coherent and held", recalled, coh && (holders != 0));
    check("llc valid", l_v, 1);
    if (recalled) check("llc request only after recall done", done_given, 1);
    check("llc addr", l_req.addr, addr);
    check("llc write", l_req.write, rq.write);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    l_r = 1; @(negedge clk); l_r = 0;
    repeat ($urandom_range(0, 3)) begin check("no early rsp", rs_v, 0); @(negedge clk); end
    l_rv = 1; l_rd = data; #1;
    check("rsp valid", rs_v, 1);
    check("rsp data", rs_d, data);
    @(negedge clk); l_rv = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic [NC-1:0] h;
      h = ($urandom_range(0, 1) == 1) ? NC'($urandom) : '0;
      one(1'(i % 2), h);
    end
    check("some recalls happened", recalls > 20, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
