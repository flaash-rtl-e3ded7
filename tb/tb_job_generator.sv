// tb_job_generator: enumeration, job queue and scheduler together, with SDPE
// models that take a job, work on it for a random number of cycles and report
// it done. Checks that every job of a contraction is dispatched exactly once
// with the bounds of Eqs. 4-5, that jobs_done counts them, and that done
// rises only after all jobs are done and all SDPEs are idle, then stays high.
module tb_job_generator;
  import flaash_pkg::*;
  localparam int N = 3, PD = 16;
  logic    clk = 0, rst_n = 0;
  logic    ptr_wr_en = 0, start = 0;
  op_sel_e ptr_wr_sel = SEL_A;
  ptr_t    ptr_wr_addr = '0, ptr_wr_data = '0, a_cnt = '0, b_cnt = '0;
  logic    alloc_req, alloc_ok;
  logic [2*PTR_W-1:0] alloc_size, job_count, jobs_done;
  ptr_t    alloc_base, res_base;
  logic [N-1:0] pe_valid, pe_ready, pe_idle, pe_job_done;
  job_t    pe_job;
  logic    busy, done, error, ev_stall;
  int      checks = 0, failures = 0;
  int      pa [PD], pb [PD];
  int      seen [int];
  int      remaining [N];
  logic    holding [N];
  int      max_work = 4;

  job_generator #(.N_PE(N), .PTR_DEPTH(PD), .JQ_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  assign alloc_base = ptr_t'(40);
  assign alloc_ok   = 1'b1;

  // SDPE models: a one-entry local queue and a busy timer
  for (genvar g = 0; g < N; g++) begin : g_pe
    assign pe_ready[g]    = !holding[g];
    assign pe_idle[g]     = !holding[g];
    assign pe_job_done[g] = holding[g] && remaining[g] == 0;
    always @(posedge clk) begin
      if (!rst_n) holding[g] <= 1'b0;
      else if (pe_valid[g]) begin
        holding[g]   <= 1'b1;
        remaining[g] <= $urandom % max_work;
      end else if (holding[g]) begin
        if (remaining[g] == 0) holding[g] <= 1'b0;
        else remaining[g] <= remaining[g] - 1;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(negedge clk) if (rst_n && pe_valid != '0) begin
    automatic int j = int'(pe_job.dest) - 40;
    automatic int nb = int'(b_cnt) - 1;
    check(!seen.exists(j), "job dispatched once");
    seen[j] = 1;
    check(pe_job.a_start == ptr_t'(pa[j / nb]) && pe_job.a_end == ptr_t'(pa[j / nb + 1])
          && pe_job.b_start == ptr_t'(pb[j % nb]) && pe_job.b_end == ptr_t'(pb[j % nb + 1]),
          "job bounds");
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      automatic int na = 2 + $urandom % (PD - 2), nb = 2 + $urandom % (PD - 2);
      pa[0] = 0; pb[0] = 0;
      for (int k = 1; k < PD; k++) begin
        pa[k] = pa[k-1] + $urandom % 9;
        pb[k] = pb[k-1] + $urandom % 9;
      end
      for (int k = 0; k < 2 * PD; k++) begin
        @(negedge clk);
        ptr_wr_en = 1; ptr_wr_sel = (k < PD) ? SEL_A : SEL_B;
        ptr_wr_addr = ptr_t'(k % PD); ptr_wr_data = ptr_t'((k < PD) ? pa[k] : pb[k - PD]);
      end
      @(negedge clk);
      ptr_wr_en = 0;
      seen.delete();
      max_work = (t % 2) ? 30 : 2;
      a_cnt = ptr_t'(na); b_cnt = ptr_t'(nb); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        @(negedge clk);
        if (done) check(pe_idle == '1 && int'(jobs_done) == (na - 1) * (nb - 1), "done only after every job");
      end
      check(seen.size() == (na - 1) * (nb - 1), "all jobs dispatched");
      check(int'(job_count) == (na - 1) * (nb - 1), "job count");
      check(!busy && !error, "idle, no error");
      repeat (3) @(negedge clk);
      check(done, "done stays high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
