// contraction_enum: turns a contraction into a list of dot product jobs.
//
// The host stores the fiber pointer array of each operand here (A: a_cnt
// pointers for a_cnt-1 fibers along the contraction mode, B likewise). Fibers
// are numbered in the row-major order of their free-mode coordinates, so
// iterating over fiber numbers iterates over all free-mode coordinates {a}
// and {b}. On start the unit
//   1. computes Job Count = (A pointer count - 1) * (B pointer count - 1) (Eq. 6),
//   2. asks tensor memory for a dense result region of Job Count entries,
//   3. emits job j = 0 .. Job Count-1 with
//        A fiber = j / (B pointer count - 1)   (Eq. 4)
//        B fiber = j % (B pointer count - 1)   (Eq. 5)
//        bounds  = ptr[fiber], ptr[fiber+1]
//        dest    = result base + j,
//      which gives the job order of the paper's Table 1 and stores C with the
//      free modes of A outermost and those of B innermost.
// Instead of a divider the two fiber numbers are kept as nested counters (B
// inner, A outer), which yields the same quotient and remainder for every j.
// One job is emitted per cycle while job_ready is high.
//
// Interface: ptr_wr_* loads pointers while idle. start latches a_cnt and b_cnt.
// alloc_req/alloc_size/alloc_base/alloc_ok is a single-cycle combinational
// handshake with tensor memory. busy is high from start until the last job has
// been emitted; error is set if the result does not fit or a count exceeds
// the pointer memory; job_count holds the number of jobs of the last start.
module contraction_enum
  import flaash_pkg::*;
#(
  parameter int unsigned PTR_DEPTH = PTR_DEPTH_DEF
) (
  input  logic    clk,
  input  logic    rst_n,
  // pointer loading
  input  logic    ptr_wr_en,
  input  op_sel_e ptr_wr_sel,
  input  ptr_t    ptr_wr_addr,
  input  ptr_t    ptr_wr_data,
  // contraction specification
  input  logic    start,
  input  ptr_t    a_cnt,
  input  ptr_t    b_cnt,
  // result allocation in tensor memory
  output logic    alloc_req,
  output logic [2*PTR_W-1:0] alloc_size,
  input  ptr_t    alloc_base,
  input  logic    alloc_ok,
  // job output to the job queue
  output logic    job_valid,
  output job_t    job,
  input  logic    job_ready,
  // status
  output logic    busy,
  output logic    error,
  output logic [2*PTR_W-1:0] job_count,
  output ptr_t    res_base
);
  typedef enum logic [1:0] {E_IDLE, E_ALLOC, E_GEN} estate_e;
  localparam int unsigned PAW = (PTR_DEPTH > 1) ? $clog2(PTR_DEPTH) : 1;  // pointer memory address bits

  ptr_t    ptr_a [PTR_DEPTH];
  ptr_t    ptr_b [PTR_DEPTH];
  estate_e state;
  ptr_t    a_fibers, b_fibers;      // pointer counts minus one
  ptr_t    a_i, b_i;                // current fiber numbers
  ptr_t    job_no;
  logic    last_job;
  logic    cnt_ok;

  always_ff @(posedge clk) begin
    if (ptr_wr_en && (state == E_IDLE) && (32'(ptr_wr_addr) < PTR_DEPTH)) begin
      if (ptr_wr_sel == SEL_A) ptr_a[ptr_wr_addr[PAW-1:0]] <= ptr_wr_data;
      else                     ptr_b[ptr_wr_addr[PAW-1:0]] <= ptr_wr_data;
    end
  end

  assign cnt_ok     = (a_cnt >= 1) && (b_cnt >= 1)
                      && (32'(a_cnt) <= PTR_DEPTH) && (32'(b_cnt) <= PTR_DEPTH);
  assign alloc_req  = (state == E_ALLOC);
  assign alloc_size = job_count;
  assign busy       = (state != E_IDLE);
  assign last_job   = (a_i == a_fibers - 1'b1) && (b_i == b_fibers - 1'b1);

  assign job_valid   = (state == E_GEN);
  assign job.a_start = ptr_a[a_i[PAW-1:0]];
  assign job.a_end   = ptr_a[PAW'(a_i + 1'b1)];
  assign job.b_start = ptr_b[b_i[PAW-1:0]];
  assign job.b_end   = ptr_b[PAW'(b_i + 1'b1)];
  assign job.dest    = res_base + job_no;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= E_IDLE;
      a_fibers  <= '0;
      b_fibers  <= '0;
      a_i       <= '0;
      b_i       <= '0;
      job_no    <= '0;
      job_count <= '0;
      res_base  <= '0;
      error     <= 1'b0;
    end else begin
      unique case (state)
        E_IDLE: if (start) begin
          error <= 1'b0;
          a_i   <= '0;
          b_i   <= '0;
          job_no <= '0;
          if (!cnt_ok) begin
            error     <= 1'b1;
            job_count <= '0;
          end else begin
            a_fibers  <= a_cnt - 1'b1;
            b_fibers  <= b_cnt - 1'b1;
            job_count <= (2*PTR_W)'(a_cnt - 1'b1) * (2*PTR_W)'(b_cnt - 1'b1);
            state     <= E_ALLOC;
          end
        end
        E_ALLOC: begin
          res_base <= alloc_base;
          if (!alloc_ok) begin
            error <= 1'b1;
            state <= E_IDLE;
          end else if (job_count == '0) begin
            state <= E_IDLE;
          end else begin
            state <= E_GEN;
          end
        end
        E_GEN: if (job_ready) begin
          job_no <= job_no + 1'b1;
          if (last_job) begin
            state <= E_IDLE;
          end else if (b_i == b_fibers - 1'b1) begin
            b_i <= '0;
            a_i <= a_i + 1'b1;
          end else begin
            b_i <= b_i + 1'b1;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

endmodule
