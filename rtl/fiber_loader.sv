// fiber_loader: fetches one fiber of a CSF operand into a local FIFO.
//
// Given the start and end pointer of a fiber, the loader reads the entries
// ptr = start .. end-1 from its operand memory, one read request per entry, and
// pushes each returned (index, value) pair into a FIFO that the intersection
// unit drains from the other side. Only nonzero entries exist in memory, so
// only nonzero elements ever reach the FIFO (as the paper requires of the
// loader/memory interface).
//
// Memory interface (this design's choice; the paper gives none): req_valid and
// req_ptr ask for one entry; req_ready is the memory's grant in the same cycle.
// The data returns exactly one cycle after the grant with rsp_valid. The
// loader keeps at most one read in flight and only requests when the FIFO has
// room for the returning entry (count + in-flight < FIFO_DEPTH), so it never
// overruns. With a grant every cycle it loads one entry per cycle.
//
// Control: start (while ready) loads new bounds and begins fetching.
// done is high when every entry of the fiber has arrived in the FIFO (the
// paper's "finished adding new pairs" flag); an empty fiber (start == end)
// is done at once. flush abandons the job: the FIFO is cleared, fetching
// stops, and a read still in flight is dropped when it returns; ready stays
// low until that read has returned so that a stale entry cannot reach the
// next job.
module fiber_loader
  import flaash_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // job control
  input  logic  start,
  input  ptr_t  start_ptr,
  input  ptr_t  end_ptr,
  input  logic  flush,
  output logic  ready,
  output logic  done,
  // tensor memory read port
  output logic  req_valid,
  output ptr_t  req_ptr,
  input  logic  req_ready,
  input  logic  rsp_valid,
  input  elem_t rsp_data,
  // element stream to the intersection unit
  output logic  elem_valid,
  output elem_t elem,
  input  logic  elem_pop
);
  typedef enum logic {L_IDLE, L_FETCH} lstate_e;

  lstate_e state;
  ptr_t    next_ptr, end_q;
  logic    inflight;           // a granted read whose data arrives next cycle
  logic    fifo_empty, fifo_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  logic    accept;             // returned entry belongs to the current job

  assign ready     = (state == L_IDLE) && !inflight;
  assign req_valid = (state == L_FETCH) && !flush && (next_ptr < end_q)
                     && ((32'(fifo_count) + (inflight ? 32'd1 : 32'd0)) < 32'(FIFO_DEPTH));
  assign req_ptr   = next_ptr;
  assign done      = (state == L_FETCH) && (next_ptr >= end_q) && !inflight;
  assign accept    = rsp_valid && (state == L_FETCH) && !flush;
  assign elem_valid = !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= L_IDLE;
      next_ptr <= '0;
      end_q    <= '0;
      inflight <= 1'b0;
    end else begin
      inflight <= req_valid && req_ready;
      if (flush) begin
        state <= L_IDLE;
      end else if (state == L_IDLE) begin
        if (start && ready) begin
          state    <= L_FETCH;
          next_ptr <= start_ptr;
          end_q    <= end_ptr;
        end
      end else if (req_valid && req_ready) begin
        next_ptr <= next_ptr + 1'b1;
      end
    end
  end

  sync_fifo #(.WIDTH($bits(elem_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (flush),
    .push    (accept),
    .wr_data (rsp_data),
    .pop     (elem_pop && !flush),
    .rd_data (elem),
    .full    (fifo_full),
    .empty   (fifo_empty),
    .count   (fifo_count)
  );

  // the memory answers only reads it granted, one cycle later
  a_rsp_only_after_grant: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> inflight);
  a_start_only_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ready);

endmodule
