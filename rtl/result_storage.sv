// result_storage: per-SDPE queue of finished dot products.
//
// A finished dot product {dest, data} enters a FIFO and waits there until the
// tensor memory accepts the write, so the SDPE can start its next job while
// the memory is busy (the paper's "storage unit"). A result whose value is
// zero is taken but not queued: the result tensor is preallocated dense and
// cleared, so writing a zero would change nothing (Algorithm 1 writes a result
// only "if Result Data != 0").
//
// Interface: in_valid/in_ready accept one result per cycle; in_ready is low
// only while the queue is full and the result is nonzero, which stalls the
// intersection unit. wr_valid/wr_addr/wr_data/wr_ready form the write request
// to tensor memory; a write is done in a cycle with wr_valid && wr_ready.
// empty tells the SDPE that no write is pending. ev_zero pulses for each
// dropped zero result. The queue depth is this design's choice.
module result_storage
  import flaash_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  result_t in_res,
  output logic    in_ready,
  output logic    wr_valid,
  output ptr_t    wr_addr,
  output acc_t    wr_data,
  input  logic    wr_ready,
  output logic    empty,
  output logic    ev_zero
);
  logic    full, is_zero;
  result_t head;
  logic [$clog2(DEPTH+1)-1:0] count;

  assign is_zero  = (in_res.data == '0);
  assign in_ready = is_zero || !full;
  assign ev_zero  = in_valid && is_zero;

  sync_fifo #(.WIDTH($bits(result_t)), .DEPTH(DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (1'b0),
    .push    (in_valid && !is_zero && !full),
    .wr_data (in_res),
    .pop     (wr_valid && wr_ready),
    .rd_data (head),
    .full    (full),
    .empty   (empty),
    .count   (count)
  );

  assign wr_valid = !empty;
  assign wr_addr  = head.dest;
  assign wr_data  = head.data;

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));

endmodule
