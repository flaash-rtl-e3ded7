// tb_contraction_enum: job enumeration against Eqs. 4-6.
// First the paper's Table 1 example (A with 3 pointers, B with 4: six jobs,
// A fiber = j / 3, B fiber = j % 3), then random pointer arrays and counts
// with a job queue that stalls at random. Checks every job's bounds and
// destination, the job count, the allocation request, one job per cycle when
// never stalled, and the error on a result that does not fit.
module tb_contraction_enum;
  import flaash_pkg::*;
  localparam int PD = 32;
  logic    clk = 0, rst_n = 0;
  logic    ptr_wr_en = 0, start = 0;
  op_sel_e ptr_wr_sel = SEL_A;
  ptr_t    ptr_wr_addr = '0, ptr_wr_data = '0, a_cnt = '0, b_cnt = '0;
  logic    alloc_req, alloc_ok;
  logic [2*PTR_W-1:0] alloc_size, job_count;
  ptr_t    alloc_base, res_base;
  logic    job_valid, job_ready, busy, error;
  job_t    job;
  int      checks = 0, failures = 0;
  int      pa [PD], pb [PD];
  int      ready_pct = 100, base_model = 0, room = 1000;
  logic    jr = 1;

  contraction_enum #(.PTR_DEPTH(PD)) dut (.*);

  always #5 clk = ~clk;
  assign job_ready  = jr;
  assign alloc_base = ptr_t'(base_model);
  assign alloc_ok   = alloc_size <= (2*PTR_W)'(room);
  always @(posedge clk) jr <= ($urandom % 100) < ready_pct;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic load(input int na, input int nb);
    for (int k = 0; k < na + nb; k++) begin
      @(negedge clk);
      ptr_wr_en   = 1;
      ptr_wr_sel  = (k < na) ? SEL_A : SEL_B;
      ptr_wr_addr = ptr_t'((k < na) ? k : k - na);
      ptr_wr_data = ptr_t'((k < na) ? pa[k] : pb[k - na]);
    end
    @(negedge clk);
    ptr_wr_en = 0;
  endtask

  task automatic run(input int na, input int nb, input bit expect_err);
    int j = 0, cycles = 0, allocs = 0;
    int exp_jobs = (na - 1) * (nb - 1);
    @(negedge clk);
    a_cnt = ptr_t'(na); b_cnt = ptr_t'(nb); start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin
      cycles++;
      if (alloc_req) begin
        allocs++;
        check(alloc_size == (2*PTR_W)'(exp_jobs), "allocation size = Job Count");
      end
      if (job_valid && job_ready) begin
        automatic int fa = j / (nb - 1), fb = j % (nb - 1);
        check(job.a_start == ptr_t'(pa[fa]) && job.a_end == ptr_t'(pa[fa+1]), $sformatf("job %0d A bounds", j));
        check(job.b_start == ptr_t'(pb[fb]) && job.b_end == ptr_t'(pb[fb+1]), $sformatf("job %0d B bounds", j));
        check(job.dest == ptr_t'(base_model + j), "job destination");
        j++;
      end
      @(negedge clk);
    end
    check(error == expect_err, "error flag");
    if (!expect_err) begin
      check(job_count == (2*PTR_W)'(exp_jobs), "job count (Eq. 6)");
      check(j == exp_jobs, $sformatf("%0d jobs emitted, %0d expected", j, exp_jobs));
      check(allocs == 1, "one allocation");
      check(res_base == ptr_t'(base_model), "result base");
      if (ready_pct == 100) check(cycles == exp_jobs + 1, "one job per cycle");
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Table 1: A has 3 pointers (2 fibers), B has 4 pointers (3 fibers)
    pa[0] = 0; pa[1] = 5; pa[2] = 9;
    pb[0] = 0; pb[1] = 2; pb[2] = 2; pb[3] = 7;
    load(3, 4);
    base_model = 100;
    run(3, 4, 0);
    for (int t = 0; t < 40; t++) begin
      automatic int na = 2 + $urandom % (PD - 2), nb = 2 + $urandom % 6;
      pa[0] = 0; pb[0] = 0;
      for (int k = 1; k < PD; k++) begin
        pa[k] = pa[k-1] + $urandom % 20;
        pb[k] = pb[k-1] + $urandom % 20;
      end
      load(PD, PD);
      ready_pct  = (t % 2) ? 50 : 100;
      base_model = $urandom % 300;
      run(na, nb, 0);
    end
    room = 5;
    run(4, 4, 1);      // 9 jobs do not fit in 5 entries
    room = 1000;
    run(PD + 1, 2, 1); // more pointers than the pointer memory holds
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
