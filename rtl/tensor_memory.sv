// tensor_memory: operand and result storage shared by all SDPEs.
//
// Three memories: A and B hold the nonzero (index, value) entries of the two
// CSF operands; C holds the dense result tensor. Following the paper, the
// operands are read-only and the result write-only while a contraction runs,
// the SDPEs address entries by physical pointer (the pointer arithmetic is
// done by the job generator), and the unit allocates space by keeping a
// boundary between allocated and free memory.
//
//  * Operand loading: each ld_valid appends ld_elem to the A or B memory at
//    its fill level, which then advances; the host therefore writes a CSF
//    operand in order and its fiber pointers are offsets from 0. ld_clear
//    frees all three memories. ld_overflow is set by an append to a full
//    memory (the entry is dropped).
//  * Operand reads: each of the N_PORTS SDPEs has one A and one B read port.
//    The entry comes back on the port's rsp_valid/rsp_data one cycle after
//    the grant (req_ready, combinational). With SHARED_READ = 0 (default)
//    every port is served every cycle, as from a memory replicated or banked
//    per SDPE; with SHARED_READ = 1 each operand memory has a single read port
//    and a round-robin arbiter grants one read per cycle.
//  * Result allocation: alloc_req reserves alloc_size entries of C at
//    alloc_base (the current boundary) if they fit (alloc_ok, combinational)
//    and marks them as zero in one cycle with a per-entry valid bit, so the
//    preallocated dense result reads as zero where no SDPE writes.
//  * Result writes: one write per cycle, round-robin among the SDPE ports
//    (wr_ready is the grant). nnz_count counts the entries written, i.e. the
//    nonzero results ("Entry Count" of Algorithm 1).
//  * Host result read: rd_data returns C[rd_addr] one cycle after rd_addr.
// The memory sizes, the single-cycle latency, the port structure and the
// arbitration are this
// design's choices; the paper leaves the unit open ("plenty of flexibility").
module tensor_memory
  import flaash_pkg::*;
#(
  parameter int unsigned N_PORTS   = N_SDPE_DEF,
  parameter int unsigned OP_DEPTH  = OP_DEPTH_DEF,
  parameter int unsigned RES_DEPTH = RES_DEPTH_DEF,
  parameter bit          SHARED_READ = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  // host operand loading
  input  logic               ld_clear,
  input  logic               ld_valid,
  input  op_sel_e            ld_sel,
  input  elem_t              ld_elem,
  output ptr_t               a_fill,
  output ptr_t               b_fill,
  output logic               ld_overflow,
  // operand A read ports
  input  logic [N_PORTS-1:0] a_req_valid,
  input  ptr_t               a_req_ptr [N_PORTS],
  output logic [N_PORTS-1:0] a_req_ready,
  output logic [N_PORTS-1:0] a_rsp_valid,
  output elem_t              a_rsp_data [N_PORTS],
  // operand B read ports
  input  logic [N_PORTS-1:0] b_req_valid,
  input  ptr_t               b_req_ptr [N_PORTS],
  output logic [N_PORTS-1:0] b_req_ready,
  output logic [N_PORTS-1:0] b_rsp_valid,
  output elem_t              b_rsp_data [N_PORTS],
  // result allocation
  input  logic               alloc_req,
  input  logic [2*PTR_W-1:0] alloc_size,
  output ptr_t               alloc_base,
  output logic               alloc_ok,
  // result write ports
  input  logic [N_PORTS-1:0] c_wr_valid,
  input  ptr_t               c_wr_addr [N_PORTS],
  input  acc_t               c_wr_data [N_PORTS],
  output logic [N_PORTS-1:0] c_wr_ready,
  // host result read
  input  ptr_t               rd_addr,
  output acc_t               rd_data,
  output logic [2*PTR_W-1:0] nnz_count,
  // event strobes for statistics: several ports request in the same cycle
  output logic               ev_rd_conflict,
  output logic               ev_wr_conflict
);
  localparam int unsigned PW  = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;
  localparam int unsigned OAW = (OP_DEPTH > 1) ? $clog2(OP_DEPTH) : 1;   // operand address bits
  localparam int unsigned RAW = (RES_DEPTH > 1) ? $clog2(RES_DEPTH) : 1; // result address bits

  elem_t mem_a [OP_DEPTH];
  elem_t mem_b [OP_DEPTH];
  acc_t  mem_c [RES_DEPTH];
  logic [RES_DEPTH-1:0] c_written;
  ptr_t  c_free;

  // ---------------- operand loading ----------------
  logic ld_a_ok, ld_b_ok;
  assign ld_a_ok = ld_valid && (ld_sel == SEL_A) && (32'(a_fill) < OP_DEPTH);
  assign ld_b_ok = ld_valid && (ld_sel == SEL_B) && (32'(b_fill) < OP_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_fill      <= '0;
      b_fill      <= '0;
      ld_overflow <= 1'b0;
    end else if (ld_clear) begin
      a_fill      <= '0;
      b_fill      <= '0;
      ld_overflow <= 1'b0;
    end else begin
      if (ld_a_ok) a_fill <= a_fill + 1'b1;
      if (ld_b_ok) b_fill <= b_fill + 1'b1;
      if (ld_valid && !ld_a_ok && !ld_b_ok) ld_overflow <= 1'b1;
    end
  end

  // ---------------- operand reads ----------------
  logic [PW-1:0] a_gidx, b_gidx;
  logic          a_any, b_any;

  logic [N_PORTS-1:0] a_grant, b_grant;

  rr_arbiter #(.N(N_PORTS)) u_arb_a (
    .clk(clk), .rst_n(rst_n), .req(a_req_valid), .advance(1'b1),
    .grant(a_grant), .grant_idx(a_gidx), .any(a_any));
  rr_arbiter #(.N(N_PORTS)) u_arb_b (
    .clk(clk), .rst_n(rst_n), .req(b_req_valid), .advance(1'b1),
    .grant(b_grant), .grant_idx(b_gidx), .any(b_any));

  always_ff @(posedge clk) begin
    if (ld_a_ok) mem_a[a_fill[OAW-1:0]] <= ld_elem;
    if (ld_b_ok) mem_b[b_fill[OAW-1:0]] <= ld_elem;
  end

  if (SHARED_READ) begin : g_shared_read
    // one read port per operand memory, result broadcast to all ports
    elem_t a_q, b_q;
    assign a_req_ready = a_grant;
    assign b_req_ready = b_grant;
    always_ff @(posedge clk) begin
      a_q <= mem_a[a_req_ptr[a_gidx][OAW-1:0]];
      b_q <= mem_b[b_req_ptr[b_gidx][OAW-1:0]];
    end
    for (genvar k = 0; k < N_PORTS; k++) begin : g_port
      assign a_rsp_data[k] = a_q;
      assign b_rsp_data[k] = b_q;
    end
  end else begin : g_port_read
    // a read port per SDPE: every request is served at once
    assign a_req_ready = a_req_valid;
    assign b_req_ready = b_req_valid;
    for (genvar k = 0; k < N_PORTS; k++) begin : g_port
      always_ff @(posedge clk) begin
        a_rsp_data[k] <= mem_a[a_req_ptr[k][OAW-1:0]];
        b_rsp_data[k] <= mem_b[b_req_ptr[k][OAW-1:0]];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rsp_valid <= '0;
      b_rsp_valid <= '0;
    end else begin
      a_rsp_valid <= a_req_ready;
      b_rsp_valid <= b_req_ready;
    end
  end

  assign ev_rd_conflict = ($countones(a_req_valid) > 1) || ($countones(b_req_valid) > 1);

  // ---------------- result allocation ----------------
  assign alloc_base = c_free;
  assign alloc_ok   = ((2*PTR_W)'(c_free) + alloc_size) <= (2*PTR_W)'(RES_DEPTH);

  // ---------------- result writes ----------------
  logic [PW-1:0] c_gidx;
  logic          c_any;

  rr_arbiter #(.N(N_PORTS)) u_arb_c (
    .clk(clk), .rst_n(rst_n), .req(c_wr_valid), .advance(1'b1),
    .grant(c_wr_ready), .grant_idx(c_gidx), .any(c_any));

  assign ev_wr_conflict = ($countones(c_wr_valid) > 1);

  always_ff @(posedge clk) begin
    if (c_any) mem_c[c_wr_addr[c_gidx][RAW-1:0]] <= c_wr_data[c_gidx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_free    <= '0;
      c_written <= '0;
      nnz_count <= '0;
    end else if (ld_clear) begin
      c_free    <= '0;
      c_written <= '0;
      nnz_count <= '0;
    end else if (alloc_req && alloc_ok) begin
      c_free    <= c_free + PTR_W'(alloc_size);
      nnz_count <= '0;
      for (int unsigned k = 0; k < RES_DEPTH; k++)
        if ((k >= 32'(c_free)) && (64'(k) < 64'(c_free) + 64'(alloc_size))) c_written[k] <= 1'b0;
    end else if (c_any) begin
      c_written[c_wr_addr[c_gidx][RAW-1:0]] <= 1'b1;
      nnz_count <= nnz_count + 1'b1;
    end
  end

  // ---------------- host result read ----------------
  acc_t rd_raw;
  logic rd_hit;
  always_ff @(posedge clk) begin
    rd_raw <= mem_c[rd_addr[RAW-1:0]];
    rd_hit <= c_written[rd_addr[RAW-1:0]];
  end
  assign rd_data = rd_hit ? rd_raw : '0;

  for (genvar k = 0; k < N_PORTS; k++) begin : g_chk
    a_rd_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      a_req_ready[k] |-> 32'(a_req_ptr[k]) < OP_DEPTH);
    b_rd_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      b_req_ready[k] |-> 32'(b_req_ptr[k]) < OP_DEPTH);
  end
  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    c_any |-> 32'(c_wr_addr[c_gidx]) < RES_DEPTH);
  a_no_write_during_alloc: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_req |-> !c_any);

endmodule
