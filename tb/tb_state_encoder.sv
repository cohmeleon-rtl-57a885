// tb_state_encoder: random status snapshots against a reference that forms
// the averages by real division and quantises them, then checks the base-3
// index. A few hand-picked cases cover the level boundaries.
module tb_state_encoder;
  import cohm_pkg::*;
  localparam int NM = 4;
  localparam int L2 = 65536, LLC = 524288;
  logic [7:0] fc;
  logic [NM-1:0][7:0] nc, llc;
  logic [NM-1:0][31:0] fps, tfp;
  state_attr_t attr;
  logic [7:0] st;
  int checks = 0, failures = 0;

  state_encoder #(.N_MEM(NM), .L2_BYTES(L2), .LLC_SLICE_BYTES(LLC)) dut (.fc_count(fc), .nc_cnt(nc),
    .llc_cnt(llc), .fp_sum(fps), .tgt_fp(tfp), .attr, .state(st));

  function automatic int lvl_cnt(real avg);
    return (avg < 1.0) ? 0 : (avg < 2.0) ? 1 : 2;
  endfunction
  function automatic int lvl_fp(real v);
    return (v <= real'(L2)) ? 0 : (v <= real'(LLC)) ? 1 : 2;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic evaluate();
    int n, e_fc, e_nc, e_llc, e_tf, e_af, idx;
    real snc, sllc, stf, saf;
    #1;
    n = 0; snc = 0; sllc = 0; stf = 0; saf = 0;
    for (int m = 0; m < NM; m++) begin
      saf += real'(tfp[m]);
      if (tfp[m] != 0) begin
        n++; snc += real'(nc[m]); sllc += real'(llc[m]); stf += real'(fps[m]) + real'(tfp[m]);
      end
    end
    e_fc = (fc >= 2) ? 2 : int'(fc);
    e_nc = (n == 0) ? 0 : lvl_cnt(snc / n);
    e_llc = (n == 0) ? 0 : lvl_cnt(sllc / n);
    e_tf = (n == 0) ? 0 : lvl_fp(stf / n);
    e_af = lvl_fp(saf);
    idx = ((((e_fc * 3) + e_nc) * 3 + e_llc) * 3 + e_tf) * 3 + e_af;
    check("fc", attr.fully_coh_acc, e_fc);
    check("nc", attr.non_coh_per_tile, e_nc);
    check("llc", attr.to_llc_per_tile, e_llc);
    check("tile fp", attr.tile_footprint, e_tf);
    check("acc fp", attr.acc_footprint, e_af);
    check("index", st, idx);
    check("index range", st < 243, 1);
  endtask

  initial begin
    // boundaries: exactly L2 and one byte more on a single partition
    fc = 0; nc = '0; llc = '0; fps = '0; tfp = '0;
    tfp[0] = L2; evaluate(); check("L2 boundary", attr.acc_footprint, 0);
    tfp[0] = L2 + 1; evaluate(); check("above L2", attr.acc_footprint, 1);
    tfp[0] = LLC + 1; evaluate(); check("above LLC", attr.acc_footprint, 2);
    // averages: two partitions needed, 3 non-coherent accs -> avg 1.5 -> level 1
    tfp = '0; tfp[1] = 100; tfp[2] = 100; nc[1] = 2; nc[2] = 1; evaluate(); check("avg 1.5", attr.non_coh_per_tile, 1);
    nc[3] = 9; evaluate(); check("unneeded partition ignored", attr.non_coh_per_tile, 1);
    fc = 7; llc[1] = 2; llc[2] = 2; evaluate(); check("state 2,1,2,0,0", st, 2*81 + 1*27 + 2*9);
    for (int i = 0; i < 3000; i++) begin
      fc = 8'($urandom_range(0, 5));
      for (int m = 0; m < NM; m++) begin
        nc[m] = 8'($urandom_range(0, 4)); llc[m] = 8'($urandom_range(0, 4));
        fps[m] = $urandom_range(0, 3) == 0 ? 0 : $urandom_range(0, 2 * LLC);
        tfp[m] = $urandom_range(0, 1) == 0 ? 0 : $urandom_range(1, LLC);
      end
      evaluate();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
