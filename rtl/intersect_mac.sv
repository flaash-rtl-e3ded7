// intersect_mac: sparse dot product by index intersection (Algorithm 2).
//
// Two FIFOs deliver the nonzero elements of an A fiber and a B fiber in
// increasing index order. Each cycle in which both heads are present the unit
// compares the two indices:
//   equal   -> multiply the values, add to the accumulator, pop both;
//   A > B   -> discard the B head (pop B);
//   A < B   -> discard the A head (pop A).
// This follows the paper's algorithm and text. The job ends as soon as either
// fiber is exhausted, i.e. its loader reports done and its FIFO is empty (the
// paper's loop condition "A_ptr < A_end and B_ptr < B_end"); the remaining
// elements of the other fiber cannot match and are not examined.
//
// Interface: start (while idle) clears the accumulator and latches the result
// destination. At the end of the job the unit offers {dest, acc} on res_valid
// and holds it until res_ready; in that handshake cycle job_end pulses, which
// the SDPE uses to flush both loaders. One comparison per cycle; a job of
// k comparisons therefore takes k cycles plus one cycle to detect the end and
// at least one cycle to hand over the result.
// The arithmetic (16-bit signed values, 32-bit wrapping accumulator) is this
// design's choice; the paper gives no number format.
module intersect_mac
  import flaash_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  ptr_t    dest,
  output logic    idle,
  // fiber A stream
  input  logic    a_valid,
  input  elem_t   a_elem,
  input  logic    a_done,
  output logic    a_pop,
  // fiber B stream
  input  logic    b_valid,
  input  elem_t   b_elem,
  input  logic    b_done,
  output logic    b_pop,
  // finished dot product
  output logic    res_valid,
  output result_t res,
  input  logic    res_ready,
  output logic    job_end,
  // event strobes for statistics
  output logic    ev_match
);
  typedef enum logic [1:0] {M_IDLE, M_RUN, M_EMIT} mstate_e;

  mstate_e state;
  acc_t    acc;
  ptr_t    dest_q;
  logic    both, a_exhausted, b_exhausted;
  acc_t    product;

  assign a_exhausted = a_done && !a_valid;
  assign b_exhausted = b_done && !b_valid;
  assign both        = (state == M_RUN) && a_valid && b_valid && !a_exhausted && !b_exhausted;
  assign product     = ACC_W'(a_elem.val) * ACC_W'(b_elem.val);

  always_comb begin
    a_pop    = 1'b0;
    b_pop    = 1'b0;
    ev_match = 1'b0;
    if (both) begin
      if (a_elem.idx == b_elem.idx) begin
        a_pop    = 1'b1;
        b_pop    = 1'b1;
        ev_match = 1'b1;
      end else if (a_elem.idx > b_elem.idx) begin
        b_pop = 1'b1;
      end else begin
        a_pop = 1'b1;
      end
    end
  end

  assign idle      = (state == M_IDLE);
  assign res_valid = (state == M_EMIT);
  assign res.dest  = dest_q;
  assign res.data  = acc;
  assign job_end   = res_valid && res_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= M_IDLE;
      acc    <= '0;
      dest_q <= '0;
    end else begin
      unique case (state)
        M_IDLE: if (start) begin
          state  <= M_RUN;
          acc    <= '0;
          dest_q <= dest;
        end
        M_RUN: begin
          if (a_exhausted || b_exhausted) state <= M_EMIT;
          else if (ev_match) acc <= acc + product;
        end
        M_EMIT: if (res_ready) state <= M_IDLE;
        default: state <= M_IDLE;
      endcase
    end
  end

  // a finished result is held unchanged until it is taken
  a_emit_holds: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res));

endmodule
