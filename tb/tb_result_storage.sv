// tb_result_storage: random results, a third of them zero, against a memory
// that accepts writes at random. Checks that the writes are exactly the
// nonzero results in order, that zero results are taken at once and counted,
// and that the queue stalls its producer only when full.
module tb_result_storage;
  import flaash_pkg::*;
  localparam int D = 2;
  logic    clk = 0, rst_n = 0;
  logic    in_valid = 0, in_ready, wr_valid, wr_ready, empty, ev_zero;
  result_t in_res = '0;
  ptr_t    wr_addr;
  acc_t    wr_data;
  int      checks = 0, failures = 0, zeros = 0, exp_zeros = 0, stalls = 0;
  result_t expq[$];
  logic    wr_rnd = 1;

  result_storage #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  assign wr_ready = wr_rnd;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(posedge clk) begin
    wr_rnd <= ($urandom % 100) < 40;
    if (rst_n && ev_zero) zeros <= zeros + 1;
  end

  // memory side: compare every accepted write with the model
  always @(negedge clk) if (rst_n && wr_valid && wr_ready) begin
    if (expq.size() == 0) check(0, "unexpected write");
    else begin
      check(wr_addr == expq[0].dest && wr_data == expq[0].data, "write order and content");
      void'(expq.pop_front());
    end
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
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      #1;
      in_valid = 1;
      in_res.dest = ptr_t'($urandom);
      in_res.data = (($urandom % 3) == 0) ? '0 : acc_t'($urandom);
      if (in_res.data == 0) exp_zeros++;
      else expq.push_back(in_res);
      forever begin
        @(posedge clk);
        if (in_ready) break;
        stalls++;
        check(dut.full && in_res.data != 0, "stall only when full");
      end
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    check(expq.size() == 0, "all nonzero results written");
    check(empty, "empty at the end");
    check(zeros == exp_zeros, "zero results dropped and counted");
    check(stalls > 0, "producer stalled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
