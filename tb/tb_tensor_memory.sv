// tb_tensor_memory: operand loading, arbitrated reads, allocation and writes.
// Appends random entries to A and B (checking fill levels and the overflow
// flag), then lets three read ports request random pointers at random: each
// granted read must return the right entry exactly one cycle later on the
// granted port, one grant per memory per cycle, and no port may wait more than
// N cycles. A second instance built with a read port per SDPE sees the same
// stimulus: it must grant every request at once and return each port's own
// entry a cycle later, and match the first instance on everything else.
// Then allocates result regions, writes from three ports at random
// and reads C back: written entries hold the value, unwritten entries of the
// fresh region read as zero, and nnz_count counts the writes.
module tb_tensor_memory;
  import flaash_pkg::*;
  localparam int N = 3, OD = 64, RD = 32;
  logic clk = 0, rst_n = 0;
  logic ld_clear = 0, ld_valid = 0;
  op_sel_e ld_sel = SEL_A;
  elem_t ld_elem = '0;
  elem_t a_rsp_data [N], b_rsp_data [N], a_rsp_data_p [N], b_rsp_data_p [N];
  ptr_t  a_fill, b_fill;
  logic  ld_overflow;
  logic [N-1:0] a_req_valid = '0, a_req_ready, a_rsp_valid, b_req_valid = '0, b_req_ready, b_rsp_valid;
  ptr_t  a_req_ptr [N], b_req_ptr [N];
  logic  alloc_req = 0, alloc_ok;
  logic [2*PTR_W-1:0] alloc_size = '0, nnz_count;
  ptr_t  alloc_base;
  logic [N-1:0] c_wr_valid = '0, c_wr_ready;
  ptr_t  c_wr_addr [N];
  acc_t  c_wr_data [N];
  ptr_t  rd_addr = '0;
  acc_t  rd_data;
  logic  ev_rd_conflict, ev_wr_conflict;
  int    checks = 0, failures = 0;
  elem_t ma [OD], mb [OD];
  acc_t  mc [RD];
  bit    wc [RD];
  int    wait_a [N];

  tensor_memory #(.N_PORTS(N), .OP_DEPTH(OD), .RES_DEPTH(RD), .SHARED_READ(1'b1)) dut (.*);

  // per-port-read instance; outputs suffixed _p
  ptr_t  a_fill_p, b_fill_p, alloc_base_p;
  logic  ld_overflow_p, alloc_ok_p, ev_rd_conflict_p, ev_wr_conflict_p;
  logic [N-1:0] a_req_ready_p, a_rsp_valid_p, b_req_ready_p, b_rsp_valid_p, c_wr_ready_p;
  logic [2*PTR_W-1:0] nnz_count_p;
  acc_t  rd_data_p;
  tensor_memory #(.N_PORTS(N), .OP_DEPTH(OD), .RES_DEPTH(RD), .SHARED_READ(1'b0)) dut_p (
    .clk, .rst_n, .ld_clear, .ld_valid, .ld_sel, .ld_elem,
    .a_fill(a_fill_p), .b_fill(b_fill_p), .ld_overflow(ld_overflow_p),
    .a_req_valid, .a_req_ptr, .a_req_ready(a_req_ready_p), .a_rsp_valid(a_rsp_valid_p), .a_rsp_data(a_rsp_data_p),
    .b_req_valid, .b_req_ptr, .b_req_ready(b_req_ready_p), .b_rsp_valid(b_rsp_valid_p), .b_rsp_data(b_rsp_data_p),
    .alloc_req, .alloc_size, .alloc_base(alloc_base_p), .alloc_ok(alloc_ok_p),
    .c_wr_valid, .c_wr_addr, .c_wr_data, .c_wr_ready(c_wr_ready_p),
    .rd_addr, .rd_data(rd_data_p), .nnz_count(nnz_count_p),
    .ev_rd_conflict(ev_rd_conflict_p), .ev_wr_conflict(ev_wr_conflict_p));

  // everything but the read ports must agree between the two instances
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (a_fill_p != a_fill || b_fill_p != b_fill || ld_overflow_p != ld_overflow
        || alloc_ok_p != alloc_ok || alloc_base_p != alloc_base
        || c_wr_ready_p != c_wr_ready || nnz_count_p != nnz_count || rd_data_p != rd_data
        || ev_rd_conflict_p != ev_rd_conflict || ev_wr_conflict_p != ev_wr_conflict) begin
      failures++; $display("FAIL instances disagree @%0t", $time);
    end
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ptr_t exp_ptr_a [N], exp_ptr_b [N];
    logic [N-1:0] g_a, g_b, p_a, p_b;
    for (int k = 0; k < N; k++) begin
      a_req_ptr[k] = '0; b_req_ptr[k] = '0; c_wr_addr[k] = '0; c_wr_data[k] = '0; wait_a[k] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- load A and B; one append too many on A
    for (int k = 0; k < 2 * OD + 1; k++) begin
      @(negedge clk);
      ld_valid = 1;
      ld_sel   = (k < OD || k == 2 * OD) ? SEL_A : SEL_B;
      ld_elem  = '{idx: idx_t'($urandom), val: val_t'($urandom)};
      if (k < OD) ma[k] = ld_elem; else if (k < 2 * OD) mb[k - OD] = ld_elem;
      if (k == OD) check(!ld_overflow, "no overflow while A fits");
    end
    @(negedge clk);
    ld_valid = 0;
    check(int'(a_fill) == OD && int'(b_fill) == OD, "fill levels");
    check(ld_overflow, "overflow flagged");
    // ---- random reads
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      // responses to the grants of the previous cycle
      if (c > 0) begin
        check(a_rsp_valid == g_a && b_rsp_valid == g_b, "response one cycle after grant");
        check(a_rsp_valid_p == p_a && b_rsp_valid_p == p_b, "per-port response one cycle after request");
        for (int k = 0; k < N; k++) begin
          if (g_a[k]) check(a_rsp_data[k] == ma[exp_ptr_a[k]], "A read data");
          if (g_b[k]) check(b_rsp_data[k] == mb[exp_ptr_b[k]], "B read data");
          if (p_a[k]) check(a_rsp_data_p[k] == ma[exp_ptr_a[k]], "per-port A read data");
          if (p_b[k]) check(b_rsp_data_p[k] == mb[exp_ptr_b[k]], "per-port B read data");
        end
      end
      for (int k = 0; k < N; k++) begin
        // a port holds its request until granted
        if (!a_req_valid[k] || g_a[k]) begin
          a_req_valid[k] = ($urandom % 100) < 70;
          a_req_ptr[k]   = ptr_t'($urandom % OD);
        end
        if (!b_req_valid[k] || g_b[k]) begin
          b_req_valid[k] = ($urandom % 100) < 70;
          b_req_ptr[k]   = ptr_t'($urandom % OD);
        end
      end
      #1;
      check($onehot0(a_req_ready) && $onehot0(b_req_ready), "one grant per memory");
      check((a_req_ready & ~a_req_valid) == '0, "grant only on request");
      check(a_req_ready_p == a_req_valid && b_req_ready_p == b_req_valid, "per-port reads never wait");
      g_a = a_req_ready; g_b = b_req_ready;
      p_a = a_req_ready_p; p_b = b_req_ready_p;
      for (int k = 0; k < N; k++) begin
        exp_ptr_a[k] = a_req_ptr[k]; exp_ptr_b[k] = b_req_ptr[k];
        if (a_req_valid[k] && !a_req_ready[k]) wait_a[k]++; else wait_a[k] = 0;
        check(wait_a[k] < N, "round robin: no port waits N cycles");
      end
      @(posedge clk);
    end
    @(negedge clk);
    a_req_valid = '0; b_req_valid = '0;
    // ---- two allocations, writes, read back
    for (int r = 0; r < 2; r++) begin
      automatic int base;
      @(negedge clk);
      alloc_req = 1; alloc_size = 12;
      #1;
      check(alloc_ok && int'(alloc_base) == 12 * r, "allocation base");
      base = int'(alloc_base);
      @(negedge clk);
      alloc_req = 0;
      check(nnz_count == 0, "entry count cleared by allocation");
      for (int k = 0; k < RD; k++) wc[k] = 0;
      // each port writes two distinct entries of the region
      for (int k = 0; k < N; k++) begin
        c_wr_valid[k] = 1; c_wr_addr[k] = ptr_t'(base + 2 * k); c_wr_data[k] = acc_t'($urandom | 1);
      end
      for (int w = 0; w < 2 * N;) begin
        #1;
        for (int k = 0; k < N; k++) if (c_wr_ready[k]) begin
          mc[c_wr_addr[k]] = c_wr_data[k]; wc[c_wr_addr[k]] = 1; w++;
        end
        @(negedge clk);
        for (int k = 0; k < N; k++) if (wc[c_wr_addr[k]]) begin
          if (int'(c_wr_addr[k]) == base + 2 * k) begin
            c_wr_addr[k] = ptr_t'(base + 2 * k + 1); c_wr_data[k] = acc_t'($urandom | 1);
          end else c_wr_valid[k] = 0;
        end
      end
      check(int'(nnz_count) == 2 * N, "entry count");
      for (int k = base; k < base + 12; k++) begin
        rd_addr = ptr_t'(k);
        @(negedge clk);
        check(rd_data == (wc[k] ? mc[k] : 0), $sformatf("C[%0d] read back", k));
      end
    end
    // third region does not fit
    alloc_size = 12;
    #1 check(!alloc_ok, "allocation beyond the memory refused");
    ld_clear = 1;
    @(negedge clk);
    ld_clear = 0;
    check(a_fill == 0 && b_fill == 0 && alloc_base == 0, "clear frees everything");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
