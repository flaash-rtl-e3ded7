// tb_sync_fifo: random push/pop traffic against a queue model.
// Checks head data, count, full and empty every cycle, simultaneous push and
// pop, and the one-cycle clear.
module tb_sync_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(count == $bits(count)'(model.size()), "count");
      check(full == (model.size() == D), "full");
      check(empty == (model.size() == 0), "empty");
      if (model.size() > 0) check(rd_data == model[0], "head data");
      clear   = (cyc % 500) == 499;
      push    = ($urandom % 100) < ((cyc / 300) % 2 ? 70 : 35);
      pop     = !empty && (($urandom % 100) < ((cyc / 300) % 2 ? 35 : 70));
      if (full) push = 0;                      // overfilling is a caller error
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (clear) model.delete();
      else begin
        automatic bit was_full = (model.size() == D);
        if (pop && model.size() > 0) void'(model.pop_front());
        if (push && !was_full) model.push_back(wr_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
