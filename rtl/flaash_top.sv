// flaash_top: sparse high-order tensor contraction accelerator.
//
// C[{a},{b}] = sum_i A[{a},i] * B[{b},i] for two CSF operands, computed as
// one independent sparse dot product per pair of fibers. The top wires the
// three on-chip parts of the architecture:
//   job_generator  enumerates the (A fiber, B fiber) pairs, queues them and
//                  hands them out, one per cycle, round robin;
//   sdpe[N_SDPE]   each fetches its two fibers, intersects them by index,
//                  multiplies-accumulates and queues the result for writing;
//   tensor_memory  holds the operand entries and the dense result, and
//                  arbitrates the SDPEs' reads and writes.
// The fourth part of the architecture, the input/output unit (DMA or PCIe to a
// host), is not built; its side is exposed as the host ports below.
//
// Use: (1) pulse ld_clear; append the nonzero entries of A (ld_sel = SEL_A)
// and of B in CSF order with ld_valid; (2) write the fiber pointer arrays with
// ptr_wr_*; (3) pulse start with a_cnt/b_cnt = number of pointers of each
// operand; (4) wait for done; error reports a contraction that does not fit;
// (5) read C[res_base + a*(b_cnt-1) + b] through rd_addr/rd_data (one cycle
// latency). SHARED_READ selects one arbitrated read port per operand memory
// instead of one per SDPE (see tensor_memory). nnz_count is the number of nonzero result entries. The defaults
// are 8 SDPEs (the count the paper uses for its results) and memory sizes that
// hold every workload the paper evaluates. The ev_* strobes and jobs_done are
// internal statistics, left unconnected here and observed by testbenches.
module flaash_top
  import flaash_pkg::*;
#(
  parameter int unsigned N_SDPE    = N_SDPE_DEF,
  parameter int unsigned OP_DEPTH  = OP_DEPTH_DEF,
  parameter int unsigned RES_DEPTH = RES_DEPTH_DEF,
  parameter int unsigned PTR_DEPTH = PTR_DEPTH_DEF,
  parameter bit          SHARED_READ = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  // operand entry loading
  input  logic               ld_clear,
  input  logic               ld_valid,
  input  op_sel_e            ld_sel,
  input  elem_t              ld_elem,
  output ptr_t               a_fill,
  output ptr_t               b_fill,
  output logic               ld_overflow,
  // fiber pointer loading
  input  logic               ptr_wr_en,
  input  op_sel_e            ptr_wr_sel,
  input  ptr_t               ptr_wr_addr,
  input  ptr_t               ptr_wr_data,
  // contraction specification and status
  input  logic               start,
  input  ptr_t               a_cnt,
  input  ptr_t               b_cnt,
  output logic               busy,
  output logic               done,
  output logic               error,
  output ptr_t               res_base,
  output logic [2*PTR_W-1:0] job_count,
  output logic [2*PTR_W-1:0] nnz_count,
  // result read-back
  input  ptr_t               rd_addr,
  output acc_t               rd_data
);
  // job dispatch
  logic [N_SDPE-1:0] pe_valid, pe_ready, pe_idle, pe_job_done;
  job_t              pe_job;
  // memory ports
  logic [N_SDPE-1:0] a_req_valid, a_req_ready, a_rsp_valid;
  logic [N_SDPE-1:0] b_req_valid, b_req_ready, b_rsp_valid;
  logic [N_SDPE-1:0] c_wr_valid, c_wr_ready;
  ptr_t              a_req_ptr [N_SDPE];
  ptr_t              b_req_ptr [N_SDPE];
  ptr_t              c_wr_addr [N_SDPE];
  acc_t              c_wr_data [N_SDPE];
  elem_t             a_rsp_data [N_SDPE];
  elem_t             b_rsp_data [N_SDPE];
  // allocation
  logic              alloc_req, alloc_ok;
  logic [2*PTR_W-1:0] alloc_size, jobs_done;
  ptr_t              alloc_base;
  // statistics strobes
  logic [N_SDPE-1:0] ev_match, ev_zero;
  logic              ev_stall, ev_rd_conflict, ev_wr_conflict;

  job_generator #(.N_PE(N_SDPE), .PTR_DEPTH(PTR_DEPTH)) u_job_generator (
    .clk         (clk),
    .rst_n       (rst_n),
    .ptr_wr_en   (ptr_wr_en),
    .ptr_wr_sel  (ptr_wr_sel),
    .ptr_wr_addr (ptr_wr_addr),
    .ptr_wr_data (ptr_wr_data),
    .start       (start),
    .a_cnt       (a_cnt),
    .b_cnt       (b_cnt),
    .alloc_req   (alloc_req),
    .alloc_size  (alloc_size),
    .alloc_base  (alloc_base),
    .alloc_ok    (alloc_ok),
    .pe_valid    (pe_valid),
    .pe_job      (pe_job),
    .pe_ready    (pe_ready),
    .pe_idle     (pe_idle),
    .pe_job_done (pe_job_done),
    .busy        (busy),
    .done        (done),
    .error       (error),
    .res_base    (res_base),
    .job_count   (job_count),
    .jobs_done   (jobs_done),
    .ev_stall    (ev_stall)
  );

  for (genvar g = 0; g < N_SDPE; g++) begin : g_sdpe
    sdpe u_sdpe (
      .clk         (clk),
      .rst_n       (rst_n),
      .job_valid   (pe_valid[g]),
      .job         (pe_job),
      .job_ready   (pe_ready[g]),
      .a_req_valid (a_req_valid[g]),
      .a_req_ptr   (a_req_ptr[g]),
      .a_req_ready (a_req_ready[g]),
      .a_rsp_valid (a_rsp_valid[g]),
      .a_rsp_data  (a_rsp_data[g]),
      .b_req_valid (b_req_valid[g]),
      .b_req_ptr   (b_req_ptr[g]),
      .b_req_ready (b_req_ready[g]),
      .b_rsp_valid (b_rsp_valid[g]),
      .b_rsp_data  (b_rsp_data[g]),
      .c_wr_valid  (c_wr_valid[g]),
      .c_wr_addr   (c_wr_addr[g]),
      .c_wr_data   (c_wr_data[g]),
      .c_wr_ready  (c_wr_ready[g]),
      .idle        (pe_idle[g]),
      .job_done    (pe_job_done[g]),
      .ev_match    (ev_match[g]),
      .ev_zero     (ev_zero[g])
    );
  end

  tensor_memory #(.N_PORTS(N_SDPE), .OP_DEPTH(OP_DEPTH), .RES_DEPTH(RES_DEPTH),
                  .SHARED_READ(SHARED_READ)) u_tensor_memory (
    .clk            (clk),
    .rst_n          (rst_n),
    .ld_clear       (ld_clear),
    .ld_valid       (ld_valid),
    .ld_sel         (ld_sel),
    .ld_elem        (ld_elem),
    .a_fill         (a_fill),
    .b_fill         (b_fill),
    .ld_overflow    (ld_overflow),
    .a_req_valid    (a_req_valid),
    .a_req_ptr      (a_req_ptr),
    .a_req_ready    (a_req_ready),
    .a_rsp_valid    (a_rsp_valid),
    .a_rsp_data     (a_rsp_data),
    .b_req_valid    (b_req_valid),
    .b_req_ptr      (b_req_ptr),
    .b_req_ready    (b_req_ready),
    .b_rsp_valid    (b_rsp_valid),
    .b_rsp_data     (b_rsp_data),
    .alloc_req      (alloc_req),
    .alloc_size     (alloc_size),
    .alloc_base     (alloc_base),
    .alloc_ok       (alloc_ok),
    .c_wr_valid     (c_wr_valid),
    .c_wr_addr      (c_wr_addr),
    .c_wr_data      (c_wr_data),
    .c_wr_ready     (c_wr_ready),
    .rd_addr        (rd_addr),
    .rd_data        (rd_data),
    .nnz_count      (nnz_count),
    .ev_rd_conflict (ev_rd_conflict),
    .ev_wr_conflict (ev_wr_conflict)
  );

endmodule
