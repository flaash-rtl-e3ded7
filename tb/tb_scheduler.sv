// tb_scheduler: dispatch from a job queue model to SDPE models.
// Each SDPE model accepts a job when its random ready bit is high. Checks
// that jobs leave in queue order, at most one per cycle, only to a ready
// SDPE, in round-robin order among the ready ones, that a job leaves in every
// cycle in which one waits and some SDPE is ready, and that the stall strobe
// marks exactly the cycles where none is.
module tb_scheduler;
  import flaash_pkg::*;
  localparam int N = 5;
  logic          clk = 0, rst_n = 0;
  logic          q_empty, q_pop, ev_stall;
  job_t          q_head, pe_job;
  logic [N-1:0]  pe_valid, pe_ready = '0;
  int            checks = 0, failures = 0;
  int            head = 0, total = 600, last = N - 1, stalls = 0;

  scheduler #(.N_PE(N)) dut (.*);

  always #5 clk = ~clk;
  assign q_empty = head >= total;
  assign q_head  = '{a_start: ptr_t'(head), a_end: ptr_t'(head + 1), b_start: '0, b_end: '0, dest: ptr_t'(head)};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(posedge clk) begin
    pe_ready <= N'($urandom) & N'($urandom);
  end

  always @(negedge clk) if (rst_n) begin
    check($onehot0(pe_valid), "at most one job per cycle");
    check((pe_valid & ~pe_ready) == '0, "only to a ready SDPE");
    check(q_pop == (pe_valid != '0), "pop with dispatch");
    check(ev_stall == (!q_empty && pe_ready == '0), "stall strobe");
    if (!q_empty && pe_ready != '0) begin
      // expected: first ready SDPE after the last one served
      automatic int exp = -1;
      for (int k = 1; k <= N; k++)
        if (exp < 0 && pe_ready[(last + k) % N]) exp = (last + k) % N;
      check(pe_valid == N'(1) << exp, "round-robin choice");
      check(pe_job.dest == ptr_t'(head), "queue order");
      last = exp;
    end else check(pe_valid == '0, "nothing dispatched");
    if (ev_stall) stalls++;
  end

  always @(posedge clk) if (rst_n && q_pop) head <= head + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!q_empty) @(negedge clk);
    check(stalls > 0, "stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
