// sdpe: Sparse Dot Product Engine.
//
// One SDPE computes one dot product at a time, C[dest] = sum_i A[a,i]*B[b,i],
// over two CSF fibers given by pointer bounds. As in the paper it is built from
// a local job queue, two fiber loaders (one per operand), an intersection & MAC
// unit and a result storage queue:
//
//   job_in -> local job queue -> start -> fiber_loader A --\
//                                         fiber_loader B ---> intersect_mac -> result_storage -> C write
//
// When the intersection unit is idle, both loaders are ready and a job waits in
// the local queue, the job is popped and all three units start in the same
// cycle. When the intersection unit hands its result to the storage queue
// (job_end) both loaders are flushed, discarding what is left of the longer
// fiber, and the next job may start in the following cycle. The local job queue
// lets the central scheduler hand over the next job while the current one runs.
//
// Interface: job_valid/job_ready push a job into the local queue (job_ready is
// "queue not full"). Two read ports (A, B) and one write port (C) go to tensor
// memory; their timing is described in fiber_loader and result_storage. idle is
// high when the SDPE holds no job, no partial result and no pending write.
// job_done pulses once per finished job. ev_* are single-cycle event strobes
// used only for statistics. Queue depths are this design's choice.
module sdpe
  import flaash_pkg::*;
#(
  parameter int unsigned LJQ_DEPTH    = 2,   // local job queue
  parameter int unsigned LOADER_DEPTH = 4,   // element FIFO of each fiber loader
  parameter int unsigned RES_DEPTH    = 2    // result storage queue
) (
  input  logic  clk,
  input  logic  rst_n,
  // job input from the scheduler
  input  logic  job_valid,
  input  job_t  job,
  output logic  job_ready,
  // operand A read port
  output logic  a_req_valid,
  output ptr_t  a_req_ptr,
  input  logic  a_req_ready,
  input  logic  a_rsp_valid,
  input  elem_t a_rsp_data,
  // operand B read port
  output logic  b_req_valid,
  output ptr_t  b_req_ptr,
  input  logic  b_req_ready,
  input  logic  b_rsp_valid,
  input  elem_t b_rsp_data,
  // result write port
  output logic  c_wr_valid,
  output ptr_t  c_wr_addr,
  output acc_t  c_wr_data,
  input  logic  c_wr_ready,
  // status
  output logic  idle,
  output logic  job_done,
  output logic  ev_match,
  output logic  ev_zero
);
  // local job queue
  job_t cur_job;
  logic ljq_full, ljq_empty, launch;
  logic [$clog2(LJQ_DEPTH+1)-1:0] ljq_count;

  // loaders
  logic  la_ready, la_done, la_valid, la_pop;
  logic  lb_ready, lb_done, lb_valid, lb_pop;
  elem_t la_elem, lb_elem;

  // intersection and results
  logic    mac_idle, res_valid, res_ready, job_end;
  result_t res;
  logic    rs_empty;

  assign job_ready = !ljq_full;
  assign launch    = !ljq_empty && mac_idle && la_ready && lb_ready;

  sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(LJQ_DEPTH)) u_local_job_queue (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (1'b0),
    .push    (job_valid && !ljq_full),
    .wr_data (job),
    .pop     (launch),
    .rd_data (cur_job),
    .full    (ljq_full),
    .empty   (ljq_empty),
    .count   (ljq_count)
  );

  fiber_loader #(.FIFO_DEPTH(LOADER_DEPTH)) u_loader_a (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (launch),
    .start_ptr  (cur_job.a_start),
    .end_ptr    (cur_job.a_end),
    .flush      (job_end),
    .ready      (la_ready),
    .done       (la_done),
    .req_valid  (a_req_valid),
    .req_ptr    (a_req_ptr),
    .req_ready  (a_req_ready),
    .rsp_valid  (a_rsp_valid),
    .rsp_data   (a_rsp_data),
    .elem_valid (la_valid),
    .elem       (la_elem),
    .elem_pop   (la_pop)
  );

  fiber_loader #(.FIFO_DEPTH(LOADER_DEPTH)) u_loader_b (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (launch),
    .start_ptr  (cur_job.b_start),
    .end_ptr    (cur_job.b_end),
    .flush      (job_end),
    .ready      (lb_ready),
    .done       (lb_done),
    .req_valid  (b_req_valid),
    .req_ptr    (b_req_ptr),
    .req_ready  (b_req_ready),
    .rsp_valid  (b_rsp_valid),
    .rsp_data   (b_rsp_data),
    .elem_valid (lb_valid),
    .elem       (lb_elem),
    .elem_pop   (lb_pop)
  );

  intersect_mac u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (launch),
    .dest      (cur_job.dest),
    .idle      (mac_idle),
    .a_valid   (la_valid),
    .a_elem    (la_elem),
    .a_done    (la_done),
    .a_pop     (la_pop),
    .b_valid   (lb_valid),
    .b_elem    (lb_elem),
    .b_done    (lb_done),
    .b_pop     (lb_pop),
    .res_valid (res_valid),
    .res       (res),
    .res_ready (res_ready),
    .job_end   (job_end),
    .ev_match  (ev_match)
  );

  result_storage #(.DEPTH(RES_DEPTH)) u_result_storage (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (res_valid),
    .in_res   (res),
    .in_ready (res_ready),
    .wr_valid (c_wr_valid),
    .wr_addr  (c_wr_addr),
    .wr_data  (c_wr_data),
    .wr_ready (c_wr_ready),
    .empty    (rs_empty),
    .ev_zero  (ev_zero)
  );

  assign idle     = ljq_empty && mac_idle && la_ready && lb_ready && rs_empty;
  assign job_done = job_end;

endmodule
