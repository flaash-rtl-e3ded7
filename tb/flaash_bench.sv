// flaash_bench: testbench helper that owns one flaash_top of a given SDPE
// count and read-port structure and runs one contraction per request.
//
// On a go pulse it generates two random CSF operands from cfg (A: fa fibers,
// B: fb fibers, both of length len along the contraction mode; each entry
// nonzero with probability dens_a or dens_b per mille, or, if nnz_a > 0,
// exactly nnz_a nonzeros spread over all of A), loads them through the host
// ports, starts the contraction, counts the cycles from start to done, reads
// the dense result back and compares every entry with a reference merge.
// It then raises finished with the cycle count and the number of wrong
// entries. Values are small nonzero integers.
module flaash_bench
  import flaash_pkg::*;
#(
  parameter int unsigned N = 8,
  parameter bit          SHARED_READ = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  input  int   fa,
  input  int   fb,
  input  int   len,
  input  int   dens_a,
  input  int   dens_b,
  input  int   nnz_a,
  output logic finished,
  output int   cycles,
  output int   wrong
);
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

  flaash_top #(.N_SDPE(N), .SHARED_READ(SHARED_READ)) dut (.*);

  elem_t a_ent[$], b_ent[$];
  int    a_ptr[$], b_ptr[$];

  function automatic void gen(ref elem_t ent[$], ref int ptr[$], input int fibers, input int flen,
                              input int dens_permille, input int nnz);
    bit hit [];
    int r;
    hit = new[fibers * flen];
    if (nnz > fibers * flen) nnz = fibers * flen;
    if (nnz > 0) begin
      for (int k = 0; k < nnz;) begin
        r = int'($urandom % (fibers * flen));
        if (!hit[r]) begin hit[r] = 1; k++; end
      end
    end else begin
      for (int p = 0; p < fibers * flen; p++) begin
        r = int'($urandom % 1000);
        hit[p] = r < dens_permille;
      end
    end
    ent.delete(); ptr.delete();
    for (int f = 0; f < fibers; f++) begin
      ptr.push_back(ent.size());
      for (int i = 0; i < flen; i++)
        if (hit[f * flen + i]) ent.push_back('{idx: idx_t'(i), val: val_t'(int'($urandom % 7) + 1)});
    end
    ptr.push_back(ent.size());
  endfunction

  function automatic acc_t ref_dot(int a, int b);
    acc_t s = 0;
    int   i = a_ptr[a], j = b_ptr[b];
    while (i < a_ptr[a+1] && j < b_ptr[b+1]) begin
      if (a_ent[i].idx == b_ent[j].idx) begin
        s += acc_t'(a_ent[i].val) * acc_t'(b_ent[j].val); i++; j++;
      end else if (a_ent[i].idx > b_ent[j].idx) j++;
      else i++;
    end
    return s;
  endfunction

  initial begin
    finished = 0; cycles = 0; wrong = 0;
    forever begin
      @(negedge clk);
      if (go) begin
        finished = 0;
        gen(a_ent, a_ptr, fa, len, dens_a, nnz_a);
        gen(b_ent, b_ptr, fb, len, dens_b, 0);
        ld_clear = 1;
        @(negedge clk);
        ld_clear = 0;
        foreach (a_ent[k]) begin ld_valid = 1; ld_sel = SEL_A; ld_elem = a_ent[k]; @(negedge clk); end
        foreach (b_ent[k]) begin ld_valid = 1; ld_sel = SEL_B; ld_elem = b_ent[k]; @(negedge clk); end
        ld_valid = 0;
        foreach (a_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_A; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(a_ptr[k]); @(negedge clk); end
        foreach (b_ptr[k]) begin ptr_wr_en = 1; ptr_wr_sel = SEL_B; ptr_wr_addr = ptr_t'(k); ptr_wr_data = ptr_t'(b_ptr[k]); @(negedge clk); end
        ptr_wr_en = 0;
        a_cnt = ptr_t'(a_ptr.size()); b_cnt = ptr_t'(b_ptr.size()); start = 1;
        @(negedge clk);
        start = 0;
        cycles = 1;
        while (!done) begin @(negedge clk); cycles++; end
        wrong = (error || ld_overflow) ? 1 : 0;
        for (int a = 0; a < fa; a++)
          for (int b = 0; b < fb; b++) begin
            rd_addr = res_base + ptr_t'(a * fb + b);
            @(negedge clk);
            if (rd_data != ref_dot(a, b)) wrong++;
          end
        finished = 1;
      end
    end
  end
endmodule
