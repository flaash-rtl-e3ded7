// tb_fiber_loader: a fiber loader against a memory model with random grants.
// For random fibers it checks that exactly the entries start..end-1 come out,
// in order; that done rises only after the last entry arrived; that an empty
// fiber is done at once; that a flush in mid-fiber drops the read in flight
// so the next job sees only its own entries; and, with a grant every cycle,
// that the last of n entries is taken n+3 cycles after start.
module tb_fiber_loader;
  import flaash_pkg::*;
  localparam int DEPTH = 4, MEMSZ = 256;

  logic  clk = 0, rst_n = 0;
  logic  start = 0, flush = 0, ready, done;
  ptr_t  start_ptr = '0, end_ptr = '0;
  logic  req_valid, req_ready, rsp_valid = 0;
  ptr_t  req_ptr;
  elem_t rsp_data = '0, elem;
  logic  elem_valid, elem_pop;
  int    checks = 0, failures = 0;
  int    grant_pct = 100, pop_pct = 100;
  elem_t mem [MEMSZ];

  fiber_loader #(.FIFO_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  // memory model: grant at random, answer one cycle after the grant
  logic grant_rnd = 1, pop_rnd = 1;
  always @(posedge clk) begin
    grant_rnd <= ($urandom % 100) < grant_pct;
    pop_rnd   <= ($urandom % 100) < pop_pct;
  end
  assign req_ready = req_valid && grant_rnd;
  always_ff @(posedge clk) begin
    rsp_valid <= rst_n && req_valid && req_ready;
    rsp_data  <= mem[req_ptr[7:0]];
  end
  assign elem_pop = elem_valid && pop_rnd;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // run one fiber; abort_after >= 0 flushes after that many elements
  task automatic run_fiber(input int s, input int e, input int abort_after, output int cycles);
    int got = 0;
    while (!ready) @(posedge clk);
    @(negedge clk);
    start = 1; start_ptr = ptr_t'(s); end_ptr = ptr_t'(e);
    @(negedge clk);
    start = 0;
    cycles = 1;
    forever begin
      if (abort_after >= 0 && got == abort_after) begin
        flush = 1; @(negedge clk); flush = 0;
        break;
      end
      if (done && !elem_valid) break;
      if (done) check(got + 32'(dut.fifo_count) == e - s, "done only after the last entry");
      if (elem_pop) begin
        check(elem == mem[s + got], "element value and order");
        got++;
      end
      @(negedge clk);
      cycles++;
      if (cycles > 5000) begin check(0, "fiber never finished"); break; end
    end
    if (abort_after < 0) begin
      check(got == e - s, "all entries delivered");
      flush = 1; @(negedge clk); flush = 0;   // the SDPE ends every job with a flush
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, s, n;
    for (int k = 0; k < MEMSZ; k++) begin
      mem[k].idx = idx_t'(k * 3 + 1);
      mem[k].val = val_t'($urandom);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // full rate: last of n entries taken n+3 cycles after start
    run_fiber(10, 40, -1, cyc);
    check(cyc <= 30 + 3, $sformatf("full-rate load took %0d cycles", cyc));
    // empty fiber
    run_fiber(7, 7, -1, cyc);
    check(cyc <= 2, "empty fiber done at once");
    // random grants and pops
    grant_pct = 60; pop_pct = 50;
    for (int t = 0; t < 150; t++) begin
      s = $urandom % 200; n = $urandom % 40;
      if (s + n > MEMSZ) n = MEMSZ - s;
      if (t % 3 == 2 && n > 2) run_fiber(s, s + n, $urandom % (n - 1), cyc);
      else                     run_fiber(s, s + n, -1, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
