// scheduler: dispatches jobs from the central job queue to the SDPEs.
//
// Every cycle in which the job queue holds a job, the scheduler hands the job
// at its head to one SDPE whose local job queue has room, so at most one job
// leaves per cycle (the paper's central queue "distributes one job per cycle").
// The SDPE is chosen in round-robin order, as the paper's "sequential
// round-robin job distribution": the search starts after the SDPE served last
// and skips SDPEs whose local queue is full. If no SDPE has room the job waits
// (ev_stall pulses).
//
// Interface: q_empty/q_head/q_pop read the job queue (first-word fall-through).
// pe_valid is one-hot with the job on pe_job, accepted by the SDPE in the same
// cycle because it is only raised where pe_ready is high.
module scheduler
  import flaash_pkg::*;
#(
  parameter int unsigned N_PE = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            q_empty,
  input  job_t            q_head,
  output logic            q_pop,
  output logic [N_PE-1:0] pe_valid,
  output job_t            pe_job,
  input  logic [N_PE-1:0] pe_ready,
  output logic            ev_stall
);
  logic [N_PE-1:0]         grant;
  logic [((N_PE > 1) ? $clog2(N_PE) : 1)-1:0] grant_idx;
  logic                    any;

  rr_arbiter #(.N(N_PE)) u_rr (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (pe_ready & {N_PE{!q_empty}}),
    .advance   (1'b1),
    .grant     (grant),
    .grant_idx (grant_idx),
    .any       (any)
  );

  assign pe_valid = grant;
  assign pe_job   = q_head;
  assign q_pop    = any;
  assign ev_stall = !q_empty && !any;

  a_valid_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (pe_valid & ~pe_ready) == '0);

endmodule
