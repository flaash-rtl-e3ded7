// tb_intersect_mac: random sparse fiber pairs fed through two stream models.
// Entries of each fiber become available at random times (as from a loader);
// the result handshake is delayed at random. Checks the dot product, the
// destination, the number of index n_match, that the job ends as soon as one
// fiber is exhausted, and, with no stalls, the cycle count: one comparison per
// cycle plus two cycles (end detection and hand-over).
module tb_intersect_mac;
  import flaash_pkg::*;
  logic    clk = 0, rst_n = 0, start = 0, idle;
  ptr_t    dest = '0;
  logic    a_valid, a_done, a_pop, b_valid, b_done, b_pop;
  elem_t   a_elem, b_elem;
  logic    res_valid, res_ready, job_end, ev_match;
  result_t res;
  int      checks = 0, failures = 0;

  elem_t fa[$], fb[$];
  int    ia, ib, da, db;             // heads and delivered counts
  int    avail_pct = 100, ready_pct = 100;
  logic  ra = 1, rb = 1, rr = 1;
  int    n_match;

  intersect_mac dut (.*);

  always #5 clk = ~clk;

  assign a_valid   = ia < da;
  assign b_valid   = ib < db;
  assign a_elem    = a_valid ? fa[ia] : '0;
  assign b_elem    = b_valid ? fb[ib] : '0;
  assign a_done    = da == fa.size();
  assign b_done    = db == fb.size();
  assign res_ready = rr;

  always @(posedge clk) begin
    if (a_pop) ia <= ia + 1;
    if (b_pop) ib <= ib + 1;
    if (da < fa.size() && ra) da <= da + 1;
    if (db < fb.size() && rb) db <= db + 1;
    if (ev_match) n_match <= n_match + 1;
    ra <= ($urandom % 100) < avail_pct;
    rb <= ($urandom % 100) < avail_pct;
    rr <= ($urandom % 100) < ready_pct;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic void make_fiber(ref elem_t f[$], input int len, input int density);
    f.delete();
    for (int i = 0; i < len; i++)
      if (($urandom % 100) < density) f.push_back('{idx: idx_t'(i), val: val_t'($urandom)});
  endfunction

  task automatic run_job(output int cycles);
    acc_t exp_acc = 0;
    int   exp_match = 0, exp_cmp = 0, pa = 0, pb = 0;
    ptr_t d = ptr_t'($urandom);
    // reference merge, as in the paper's Algorithm 2
    while (pa < fa.size() && pb < fb.size()) begin
      exp_cmp++;
      if (fa[pa].idx == fb[pb].idx) begin
        exp_acc += acc_t'(fa[pa].val) * acc_t'(fb[pb].val);
        exp_match++; pa++; pb++;
      end else if (fa[pa].idx > fb[pb].idx) pb++;
      else pa++;
    end
    @(negedge clk);
    ia = 0; ib = 0; da = 0; db = 0; n_match = 0;
    start = 1; dest = d;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!job_end) begin
      @(negedge clk);
      cycles++;
      if (cycles > 20000) break;
    end
    check(res.data == exp_acc, $sformatf("dot product %0d exp %0d", res.data, exp_acc));
    check(res.dest == d, "destination");
    @(negedge clk);
    check(n_match == exp_match, "match count");
    check(ia + ib == pa + pb, "elements consumed until one fiber is exhausted");
    check(idle, "idle after hand-over");
    if (avail_pct == 100 && ready_pct == 100)
      check(cycles == exp_cmp + 2, $sformatf("cycles %0d for %0d comparisons", cycles, exp_cmp));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the paper's example of an all-zero fiber
    make_fiber(fa, 50, 0); make_fiber(fb, 50, 50);
    run_job(cyc);
    for (int t = 0; t < 300; t++) begin
      avail_pct = (t < 100) ? 100 : 40 + $urandom % 60;
      ready_pct = (t < 100) ? 100 : 30 + $urandom % 70;
      make_fiber(fa, 1 + $urandom % 120, 5 + $urandom % 90);
      make_fiber(fb, 1 + $urandom % 120, 5 + $urandom % 90);
      run_job(cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
