// sync_fifo: single-clock first-in first-out queue.
//
// Used for every queue of the accelerator: the central job queue, the local job
// queue of each SDPE, the element FIFO of each fiber loader and the result queue
// of each SDPE. The paper names these queues but gives no depth or timing;
// this implementation is a circular buffer in registers.
//
// Interface: push/pop handshake with full and empty flags. A push while full or
// a pop while empty is ignored (and flagged by an assertion). Push and pop in
// the same cycle are allowed; a push while full is refused even if a pop
// happens in the same cycle.
// clear empties the queue in one cycle. rd_data shows the oldest entry
// combinationally (first-word fall-through), so a reader sees data in the
// cycle after it was pushed. count gives the fill level.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push && !clear) mem[wr_ptr] <= wr_data;
  end

  // the owner must never overfill or overdrain a queue
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !clear));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !clear));

endmodule
