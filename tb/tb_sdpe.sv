// tb_sdpe: one SDPE against operand and result memory models.
// Two random CSF operands (random fiber lengths and densities, some fibers
// empty) are placed in the models; random (A fiber, B fiber) jobs are pushed
// through the job port while the memories grant reads and accept writes at
// random. Checks every written result against a reference dot product, that
// zero results are not written, that every job reports done once, that jobs
// queue locally (job_ready drops), and that the SDPE ends idle.
module tb_sdpe;
  import flaash_pkg::*;
  localparam int NF = 12, FL = 64, MEMSZ = 1024;

  logic  clk = 0, rst_n = 0;
  logic  job_valid = 0, job_ready;
  job_t  job = '0;
  logic  a_req_valid, a_req_ready, a_rsp_valid = 0;
  logic  b_req_valid, b_req_ready, b_rsp_valid = 0;
  ptr_t  a_req_ptr, b_req_ptr, c_wr_addr;
  elem_t a_rsp_data = '0, b_rsp_data = '0;
  logic  c_wr_valid, c_wr_ready;
  acc_t  c_wr_data;
  logic  idle, job_done, ev_match, ev_zero;
  int    checks = 0, failures = 0;

  elem_t mem_a [MEMSZ], mem_b [MEMSZ];
  int    ptr_a [NF+1], ptr_b [NF+1];
  acc_t  expected [int];
  int    n_done = 0, n_writes = 0, n_full = 0;
  logic  ga = 1, gb = 1, gc = 1;
  int    grant_pct = 100;

  sdpe dut (.*);

  always #5 clk = ~clk;

  assign a_req_ready = a_req_valid && ga;
  assign b_req_ready = b_req_valid && gb;
  assign c_wr_ready  = c_wr_valid && gc;

  always @(posedge clk) begin
    a_rsp_valid <= rst_n && a_req_valid && a_req_ready;
    b_rsp_valid <= rst_n && b_req_valid && b_req_ready;
    a_rsp_data  <= mem_a[a_req_ptr[9:0]];
    b_rsp_data  <= mem_b[b_req_ptr[9:0]];
    ga <= ($urandom % 100) < grant_pct;
    gb <= ($urandom % 100) < grant_pct;
    gc <= ($urandom % 100) < grant_pct;
    if (rst_n && job_done) n_done <= n_done + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(negedge clk) if (rst_n && c_wr_valid && c_wr_ready) begin
    n_writes++;
    if (!expected.exists(int'(c_wr_addr))) check(0, "write to an unexpected destination");
    else begin
      check(c_wr_data == expected[int'(c_wr_addr)], $sformatf("result at %0d", c_wr_addr));
      check(c_wr_data != 0, "zero results are not written");
      expected.delete(int'(c_wr_addr));
    end
  end

  function automatic void build(ref elem_t m [MEMSZ], ref int p [NF+1]);
    int n = 0;
    int dens;
    int r;
    for (int f = 0; f < NF; f++) begin
      dens = (f == 3) ? 0 : 10 + int'($urandom % 80);
      p[f] = n;
      for (int i = 0; i < FL; i++) begin
        r = int'($urandom % 100);
        if (r < dens) begin
          m[n].idx = idx_t'(i); m[n].val = val_t'(int'($urandom % 15) - 7); n++;
        end
      end
    end
    p[NF] = n;
  endfunction

  function automatic acc_t dot(int fa, int fb);
    acc_t s = 0;
    for (int i = ptr_a[fa]; i < ptr_a[fa+1]; i++)
      for (int j = ptr_b[fb]; j < ptr_b[fb+1]; j++)
        if (mem_a[i].idx == mem_b[j].idx) s += acc_t'(mem_a[i].val) * acc_t'(mem_b[j].val);
    return s;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int njobs = 0;
    build(mem_a, ptr_a);
    build(mem_b, ptr_b);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int fa = $urandom % NF, fb = $urandom % NF;
      automatic acc_t e = dot(fa, fb);
      grant_pct = (t < 60) ? 100 : 50;
      @(negedge clk);
      job_valid   = 1;
      job.a_start = ptr_t'(ptr_a[fa]); job.a_end = ptr_t'(ptr_a[fa+1]);
      job.b_start = ptr_t'(ptr_b[fb]); job.b_end = ptr_t'(ptr_b[fb+1]);
      job.dest    = ptr_t'(t);
      if (e != 0) expected[t] = e;
      njobs++;
      while (!job_ready) begin n_full++; @(negedge clk); end
      @(posedge clk);
      #1 job_valid = 0;
    end
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    check(expected.size() == 0, $sformatf("%0d results never written", expected.size()));
    check(n_done == njobs, "one job_done per job");
    check(n_full > 0, "local job queue filled up at least once");
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
