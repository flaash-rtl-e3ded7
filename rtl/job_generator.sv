// job_generator: the paper's "Job Generator & Dispatch" unit.
//
// It chains the contraction enumeration, the central job queue and the
// scheduler (the three boxes of the paper's Fig. 1 detail view) and tracks
// the progress of a contraction as in Algorithm 1: Job Count is fixed at
// start, a job is counted done when an SDPE reports its dot product finished,
// and the contraction is complete when every job has been generated, the job
// queue is empty, all SDPEs are idle (their result queues drained to memory)
// and Jobs Done equals Job Count. A contraction whose result does not fit
// (error) completes at once without dispatching any job.
//
// Interface: ptr_wr_* loads fiber pointers, start/a_cnt/b_cnt start a
// contraction (ignored while busy). alloc_* reaches tensor memory for the
// dense result region. pe_* connect to the SDPEs: one job per cycle at most,
// one-hot pe_valid. done rises one cycle after the completion condition holds
// and stays high until the next start; res_base is then the pointer to C.
// The queue depth is this design's choice.
module job_generator
  import flaash_pkg::*;
#(
  parameter int unsigned N_PE      = N_SDPE_DEF,
  parameter int unsigned PTR_DEPTH = PTR_DEPTH_DEF,
  parameter int unsigned JQ_DEPTH  = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ptr_wr_en,
  input  op_sel_e         ptr_wr_sel,
  input  ptr_t            ptr_wr_addr,
  input  ptr_t            ptr_wr_data,
  input  logic            start,
  input  ptr_t            a_cnt,
  input  ptr_t            b_cnt,
  output logic            alloc_req,
  output logic [2*PTR_W-1:0] alloc_size,
  input  ptr_t            alloc_base,
  input  logic            alloc_ok,
  output logic [N_PE-1:0] pe_valid,
  output job_t            pe_job,
  input  logic [N_PE-1:0] pe_ready,
  input  logic [N_PE-1:0] pe_idle,
  input  logic [N_PE-1:0] pe_job_done,
  output logic            busy,
  output logic            done,
  output logic            error,
  output ptr_t            res_base,
  output logic [2*PTR_W-1:0] job_count,
  output logic [2*PTR_W-1:0] jobs_done,
  output logic            ev_stall
);
  logic enum_busy, gen_valid, q_full, q_empty, q_pop, running, finished;
  job_t gen_job, q_head;
  logic [$clog2(JQ_DEPTH+1)-1:0] q_count;

  contraction_enum #(.PTR_DEPTH(PTR_DEPTH)) u_enum (
    .clk         (clk),
    .rst_n       (rst_n),
    .ptr_wr_en   (ptr_wr_en),
    .ptr_wr_sel  (ptr_wr_sel),
    .ptr_wr_addr (ptr_wr_addr),
    .ptr_wr_data (ptr_wr_data),
    .start       (start && !busy),
    .a_cnt       (a_cnt),
    .b_cnt       (b_cnt),
    .alloc_req   (alloc_req),
    .alloc_size  (alloc_size),
    .alloc_base  (alloc_base),
    .alloc_ok    (alloc_ok),
    .job_valid   (gen_valid),
    .job         (gen_job),
    .job_ready   (!q_full),
    .busy        (enum_busy),
    .error       (error),
    .job_count   (job_count),
    .res_base    (res_base)
  );

  sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(JQ_DEPTH)) u_job_queue (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (1'b0),
    .push    (gen_valid && !q_full),
    .wr_data (gen_job),
    .pop     (q_pop),
    .rd_data (q_head),
    .full    (q_full),
    .empty   (q_empty),
    .count   (q_count)
  );

  scheduler #(.N_PE(N_PE)) u_scheduler (
    .clk      (clk),
    .rst_n    (rst_n),
    .q_empty  (q_empty),
    .q_head   (q_head),
    .q_pop    (q_pop),
    .pe_valid (pe_valid),
    .pe_job   (pe_job),
    .pe_ready (pe_ready),
    .ev_stall (ev_stall)
  );

  // number of SDPEs finishing a job this cycle
  logic [$clog2(N_PE+1)-1:0] n_fin;
  always_comb begin
    n_fin = '0;
    for (int unsigned k = 0; k < N_PE; k++) n_fin += ($clog2(N_PE+1))'(pe_job_done[k]);
  end

  assign finished = running && !start && !enum_busy && q_empty && (&pe_idle)
                    && (error || (jobs_done == job_count));
  assign busy     = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      done      <= 1'b0;
      jobs_done <= '0;
    end else if (start && !running) begin
      running   <= 1'b1;
      done      <= 1'b0;
      jobs_done <= '0;
    end else begin
      jobs_done <= jobs_done + (2*PTR_W)'(n_fin);
      if (finished) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

endmodule
