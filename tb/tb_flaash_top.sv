// tb_flaash_top: end-to-end contractions on a reduced accelerator
// (3 SDPEs, small memories).
//
// Random sparse operands are generated in CSF form (A: FA fibers, B: FB
// fibers, all of length L along the contraction mode), loaded through the host
// ports, contracted, and the whole dense result C (FA x FB entries, A's free
// modes outermost) is read back and compared with a reference computed here.
// The suite covers an order-3 by order-2 contraction as in the paper's
// machine-learning workloads, a higher-order operand, very sparse operands
// with empty fibers, dense operands, and a result that does not fit (error).
// Every mechanism of the design is counted and must occur at least once:
// index match (MAC), index skip, early end of a job with elements left,
// empty-fiber job, zero result dropped, scheduler stall, full local job
// queue, read and write arbitration conflicts (a result waiting in its
// queue) and the allocation error. A full result queue is counted and
// reported, but cannot occur at this size: a port waits at most N-1 cycles
// for a write and no job is that short.
module tb_flaash_top;
  import flaash_pkg::*;
  localparam int N = 3, OD = 1024, RD = 256, PD = 64;

  logic    clk = 0, rst_n = 0;
  logic    ld_clear = 0, ld_valid = 0;
  op_sel_e ld_sel = SEL_A;
  elem_t   ld_elem = '0;
  ptr_t    a_fill, b_fill;
  logic    ld_overflow;
  logic    ptr_wr_en = 0;
  op_sel_e ptr_wr_sel = SEL_A;
  ptr_t    ptr_wr_addr = '0, ptr_wr_data = '0;
  logic    start = 0;
  ptr_t    a_cnt = '0, b_cnt = '0;
  logic    busy, done, error;
  ptr_t    res_base;
  logic [2*PTR_W-1:0] job_count, nnz_count;
  ptr_t    rd_addr = '0;
  acc_t    rd_data;

  int checks = 0, failures = 0;

  flaash_top #(.N_SDPE(N), .OP_DEPTH(OD), .RES_DEPTH(RD), .PTR_DEPTH(PD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_match, n_skip, n_early, n_empty, n_zero, n_stall, n_lq_full,
      n_rd_conf, n_wr_conf, n_res_full, n_err;
  always @(posedge clk) if (rst_n) begin
    n_match   <= n_match + $countones(dut.ev_match);
    n_zero    <= n_zero + $countones(dut.ev_zero);
    n_stall   <= n_stall + int'(dut.ev_stall);
    n_rd_conf <= n_rd_conf + int'(dut.ev_rd_conflict);
    n_wr_conf <= n_wr_conf + int'(dut.ev_wr_conflict);
    n_lq_full <= n_lq_full + int'(busy && dut.pe_ready != '1);
    if (dut.pe_valid != '0 && (dut.pe_job.a_start == dut.pe_job.a_end || dut.pe_job.b_start == dut.pe_job.b_end))
      n_empty <= n_empty + 1;
  end
  for (genvar g = 0; g < N; g++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_sdpe[g].u_sdpe.la_pop != dut.g_sdpe[g].u_sdpe.lb_pop) n_skip <= n_skip + 1;
      if (dut.g_sdpe[g].u_sdpe.res_valid && !dut.g_sdpe[g].u_sdpe.res_ready) n_res_full <= n_res_full + 1;
      if (dut.g_sdpe[g].u_sdpe.job_end && (dut.g_sdpe[g].u_sdpe.la_valid || dut.g_sdpe[g].u_sdpe.lb_valid
          || !dut.g_sdpe[g].u_sdpe.la_done || !dut.g_sdpe[g].u_sdpe.lb_done)) n_early <= n_early + 1;
    end
  end

  // ---------------- operands and reference ----------------
  elem_t a_ent[$], b_ent[$];
  int    a_ptr[$], b_ptr[$];

  function automatic void gen(ref elem_t ent[$], ref int ptr[$], input int fibers, input int len,
                              input int dens_permille, input int empty_every);
    int r;
    ent.delete(); ptr.delete();
    for (int f = 0; f < fibers; f++) begin
      ptr.push_back(ent.size());
      if (empty_every > 0 && f % empty_every == empty_every - 1) continue;
      for (int i = 0; i < len; i++) begin
        r = int'($urandom % 1000);
        if (r < dens_permille) ent.push_back('{idx: idx_t'(i), val: val_t'(int'($urandom % 15) - 7)});
      end
    end
    ptr.push_back(ent.size());
  endfunction

  function automatic acc_t ref_dot(int fa, int fb);
    acc_t s = 0;
    int   i = a_ptr[fa], j = b_ptr[fb];
    while (i < a_ptr[fa+1] && j < b_ptr[fb+1]) begin
      if (a_ent[i].idx == b_ent[j].idx) begin
        s += acc_t'(a_ent[i].val) * acc_t'(b_ent[j].val); i++; j++;
      end else if (a_ent[i].idx > b_ent[j].idx) j++;
      else i++;
    end
    return s;
  endfunction

  task automatic contract(input string name, input bit expect_err, output int cycles);
    int fa_n = a_ptr.size() - 1, fb_n = b_ptr.size() - 1, bad = 0, nz = 0;
    // load operands (the part a DMA engine would do)
    @(negedge clk);
    ld_clear = 1;
    @(negedge clk);
    ld_clear = 0;
    foreach (a_ent[k]) begin ld_valid = 1; ld_sel = SEL_A; ld_elem = a_ent[k]; @(negedge clk); end
    foreach (b_ent[k]) begin ld_valid = 1; ld_sel = SEL_B; ld_elem = b_ent[k]; @(negedge clk); end
    ld_valid = 0;
    check(int'(a_fill) == a_ent.size() && int'(b_fill) == b_ent.size() && !ld_overflow, "operands loaded");
    foreach (a_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_A; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(a_ptr[k]); @(negedge clk); end
    foreach (b_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_B; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(b_ptr[k]); @(negedge clk); end
    ptr_wr_en = 0;
    // run
    a_cnt = ptr_t'(a_ptr.size()); b_cnt = ptr_t'(b_ptr.size()); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    check(error == expect_err, $sformatf("%s: error flag", name));
    if (expect_err) begin
      n_err++;
      return;
    end
    check(int'(job_count) == fa_n * fb_n, $sformatf("%s: job count", name));
    // read back the dense result
    for (int a = 0; a < fa_n; a++)
      for (int b = 0; b < fb_n; b++) begin
        automatic acc_t e = ref_dot(a, b);
        rd_addr = res_base + ptr_t'(a * fb_n + b);
        @(negedge clk);
        if (e != 0) nz++;
        if (rd_data != e) begin
          bad++;
          if (bad < 5) $display("%s: C[%0d][%0d] = %0d, expected %0d", name, a, b, rd_data, e);
        end
      end
    check(bad == 0, $sformatf("%s: %0d result entries wrong", name, bad));
    check(int'(nnz_count) == nz, $sformatf("%s: nonzero entry count", name));
    $display("%s: %0d x %0d fibers, nnz A %0d B %0d, %0d cycles", name, fa_n, fb_n, a_ent.size(), b_ent.size(), cycles);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    {n_match, n_skip, n_early, n_empty, n_zero, n_stall, n_lq_full, n_rd_conf, n_wr_conf, n_res_full, n_err} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 3x3x64 tensor with a 3x64 matrix: a small tensor contraction layer
    gen(a_ent, a_ptr, 9, 64, 300, 0);  gen(b_ent, b_ptr, 3, 64, 500, 0);
    contract("order3_x_matrix", 0, cyc);
    // order-5 operand 2x2x2x2x32 against 4x32
    gen(a_ent, a_ptr, 16, 32, 200, 0); gen(b_ent, b_ptr, 4, 32, 500, 0);
    contract("order5_x_matrix", 0, cyc);
    // very sparse, with empty fibers
    gen(a_ent, a_ptr, 12, 100, 30, 4); gen(b_ent, b_ptr, 6, 100, 60, 3);
    contract("very_sparse", 0, cyc);
    // dense short fibers
    gen(a_ent, a_ptr, 10, 16, 1000, 0); gen(b_ent, b_ptr, 10, 16, 900, 0);
    contract("dense", 0, cyc);
    // order-3 by order-3 (free modes 3x4 and 2x4)
    gen(a_ent, a_ptr, 12, 40, 250, 0); gen(b_ent, b_ptr, 8, 40, 250, 0);
    contract("order3_x_order3", 0, cyc);
    // many short jobs, so that SDPEs finish together and their writes collide
    gen(a_ent, a_ptr, 60, 6, 500, 0);  gen(b_ent, b_ptr, 4, 6, 800, 0);
    contract("short_jobs", 0, cyc);
    // 20 x 20 = 400 result entries do not fit in 256
    gen(a_ent, a_ptr, 20, 8, 500, 0);  gen(b_ent, b_ptr, 20, 8, 500, 0);
    contract("result_too_large", 1, cyc);
    // the accelerator is usable again after the error
    gen(a_ent, a_ptr, 5, 30, 400, 0);  gen(b_ent, b_ptr, 5, 30, 400, 0);
    contract("after_error", 0, cyc);

    $display("mechanisms: match %0d skip %0d early_end %0d empty_fiber %0d zero_drop %0d sched_stall %0d local_q_full %0d rd_conflict %0d wr_conflict %0d res_q_full %0d alloc_error %0d",
             n_match, n_skip, n_early, n_empty, n_zero, n_stall, n_lq_full, n_rd_conf, n_wr_conf, n_res_full, n_err);
    check(n_match > 0, "index match happened");
    check(n_skip > 0, "index skip happened");
    check(n_early > 0, "early end of a job happened");
    check(n_empty > 0, "empty-fiber job happened");
    check(n_zero > 0, "zero result dropped");
    check(n_stall > 0, "scheduler stall happened");
    check(n_lq_full > 0, "local job queue filled");
    check(n_rd_conf > 0, "read conflict happened");
    check(n_wr_conf > 0, "write conflict happened");
    check(n_err > 0, "allocation error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
