// tb_flaash_full: the accelerator at its default size (8 SDPEs, 4096-entry
// operand memories, 1024-entry result memory, 256 fiber pointers) running the
// tensor contraction layers the paper evaluates, at 5% tensor density with a
// 50%-dense weight matrix, plus the order-6 synthetic case:
//   3x3x1024 x 3x1024, 7x7x512 x 7x512, 10x10x100 x 10x100,
//   3x3x3x3x3x512 (700 nonzeros) x 3x512.
// Each result is checked entry by entry against a reference; the cycle count
// from start to done is printed (at 1 GHz one cycle is 1 ns).
//
module tb_flaash_full;
  import flaash_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    ld_clear = 0, ld_valid = 0;
  op_sel_e ld_sel = SEL_A;
  elem_t   ld_elem = '0;
  ptr_t    a_fill, b_fill;
  logic    ld_overflow;
  logic    ptr_wr_en = 0;
  op_sel_e ptr_wr_sel = SEL_A;
  ptr_t    ptr_wr_addr = '0, ptr_wr_data = '0;
  logic    start = 0;
  ptr_t    a_cnt = '0, b_cnt = '0;
  logic    busy, done, error;
  ptr_t    res_base;
  logic [2*PTR_W-1:0] job_count, nnz_count;
  ptr_t    rd_addr = '0;
  acc_t    rd_data;

  int checks = 0, failures = 0;

  flaash_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---------------- operands and reference ----------------
  elem_t a_ent[$], b_ent[$];
  int    a_ptr[$], b_ptr[$];

  function automatic void gen(ref elem_t ent[$], ref int ptr[$], input int fibers, input int len,
                              input int dens_permille, input int empty_every);
    int r;
    ent.delete(); ptr.delete();
    for (int f = 0; f < fibers; f++) begin
      ptr.push_back(ent.size());
      if (empty_every > 0 && f % empty_every == empty_every - 1) continue;
      for (int i = 0; i < len; i++) begin
        r = int'($urandom % 1000);
        if (r < dens_permille) ent.push_back('{idx: idx_t'(i), val: val_t'(int'($urandom % 15) - 7)});
      end
    end
    ptr.push_back(ent.size());
  endfunction

  function automatic acc_t ref_dot(int fa, int fb);
    acc_t s = 0;
    int   i = a_ptr[fa], j = b_ptr[fb];
    while (i < a_ptr[fa+1] && j < b_ptr[fb+1]) begin
      if (a_ent[i].idx == b_ent[j].idx) begin
        s += acc_t'(a_ent[i].val) * acc_t'(b_ent[j].val); i++; j++;
      end else if (a_ent[i].idx > b_ent[j].idx) j++;
      else i++;
    end
    return s;
  endfunction

  task automatic contract(input string name, input bit expect_err, output int cycles);
    int fa_n = a_ptr.size() - 1, fb_n = b_ptr.size() - 1, bad = 0, nz = 0;
    // load operands (the part a DMA engine would do)
    @(negedge clk);
    ld_clear = 1;
    @(negedge clk);
    ld_clear = 0;
    foreach (a_ent[k]) begin ld_valid = 1; ld_sel = SEL_A; ld_elem = a_ent[k]; @(negedge clk); end
    foreach (b_ent[k]) begin ld_valid = 1; ld_sel = SEL_B; ld_elem = b_ent[k]; @(negedge clk); end
    ld_valid = 0;
    check(int'(a_fill) == a_ent.size() && int'(b_fill) == b_ent.size() && !ld_overflow, "operands loaded");
    foreach (a_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_A; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(a_ptr[k]); @(negedge clk); end
    foreach (b_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_B; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(b_ptr[k]); @(negedge clk); end
    ptr_wr_en = 0;
    // run
    a_cnt = ptr_t'(a_ptr.size()); b_cnt = ptr_t'(b_ptr.size()); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    check(error == expect_err, $sformatf("%s: error flag", name));
    if (expect_err) return;
    check(int'(job_count) == fa_n * fb_n, $sformatf("%s: job count", name));
    // read back the dense result
    for (int a = 0; a < fa_n; a++)
      for (int b = 0; b < fb_n; b++) begin
        automatic acc_t e = ref_dot(a, b);
        rd_addr = res_base + ptr_t'(a * fb_n + b);
        @(negedge clk);
        if (e != 0) nz++;
        if (rd_data != e) begin
          bad++;
          if (bad < 5) $display("%s: C[%0d][%0d] = %0d, expected %0d", name, a, b, rd_data, e);
        end
      end
    check(bad == 0, $sformatf("%s: %0d result entries wrong", name, bad));
    check(int'(nnz_count) == nz, $sformatf("%s: nonzero entry count", name));
    $display("%s: %0d x %0d fibers, nnz A %0d B %0d, %0d cycles (%0.2f us at 1 GHz)", name, fa_n, fb_n, a_ent.size(), b_ent.size(), cycles, real'(cycles) / 1000.0);
  endtask

  // order-6 operand: 3^5 fibers of length 512 holding exactly nnz nonzeros
  function automatic void gen_nnz(ref elem_t ent[$], ref int ptr[$], input int fibers, input int len, input int nnz);
    bit hit [];
    hit = new[fibers * len];
    for (int k = 0; k < nnz;) begin
      automatic int p = int'($urandom % (fibers * len));
      if (!hit[p]) begin hit[p] = 1; k++; end
    end
    ent.delete(); ptr.delete();
    for (int f = 0; f < fibers; f++) begin
      ptr.push_back(ent.size());
      for (int i = 0; i < len; i++)
        if (hit[f * len + i]) ent.push_back('{idx: idx_t'(i), val: val_t'(int'($urandom % 7) + 1)});
    end
    ptr.push_back(ent.size());
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    gen(a_ent, a_ptr, 9, 1024, 50, 0);   gen(b_ent, b_ptr, 3, 1024, 500, 0);
    contract("tcl_3x3x1024", 0, cyc);
    gen(a_ent, a_ptr, 49, 512, 50, 0);   gen(b_ent, b_ptr, 7, 512, 500, 0);
    contract("tcl_7x7x512", 0, cyc);
    gen(a_ent, a_ptr, 100, 100, 50, 0);  gen(b_ent, b_ptr, 10, 100, 500, 0);
    contract("tcl_10x10x100", 0, cyc);
    gen_nnz(a_ent, a_ptr, 243, 512, 700); gen(b_ent, b_ptr, 3, 512, 500, 0);
    contract("order6_3x3x3x3x3x512", 0, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
