// rr_arbiter: round-robin arbiter over N requesters.
//
// Grants the first requester at or after a rotating priority pointer. When the
// grant is used (advance high in a cycle with a grant), the pointer moves to
// the requester after the one granted, so every requester is served within N
// grants. grant is combinational from req and the pointer; the pointer updates
// on the clock. Used by the scheduler and by the tensor memory ports; the paper
// names round-robin job distribution but gives no circuit, so this is the
// plain textbook form.
module rr_arbiter #(
  parameter  int unsigned N  = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [IW-1:0]        grant_idx,
  output logic                 any
);
  logic [IW-1:0] prio;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      automatic int unsigned idx = (32'(prio) + k) % N;
      if (!any && req[idx]) begin
        any        = 1'b1;
        grant[idx] = 1'b1;
        grant_idx  = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prio <= '0;
    else if (advance && any) prio <= (32'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
