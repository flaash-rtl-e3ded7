// tb_flaash_workloads: the paper's evaluation sweeps, run on the RTL.
//
// Seven accelerators run the sweeps: 1, 2, 4, 8, 16 and 32 SDPEs with a
// read port per SDPE (the default), and 8 SDPEs sharing one arbitrated read
// port per operand memory; memories are at their default sizes.
//   * SDPE-count sweep: 3x3x1024 tensor at 10% and 0.5% density against a
//     3x1024 matrix at 50% (the matrix is this bench's choice), all seven;
// and the default 8-SDPE accelerator alone runs:
//   * volume sweep: 5x5xn, n = 100, 400, 700, with 30 and 70 nonzeros per
//     fiber, against a 5xn matrix with the same nonzeros per fiber;
//   * order sweep: 3x..x3x512 of order 3, 4, 6 with 100 and 700 nonzeros
//     against a 3x512 matrix at 50%;
//   * density sweep of the three tensor contraction layers 3x3x1024, 7x7x512,
//     10x10x100 at 0.5% and 5% against a 50%-dense matrix.
// Every result entry of every run is checked. The cycle counts are printed;
// the checks on them are only the trends this design must show: with a port
// per SDPE more SDPEs never slow a contraction down by more than 5% and 8
// SDPEs are at least 3x faster than 1 at 10% density, the shared port is
// slower than a port per SDPE, the time at constant nonzeros per fiber stays
// within 1.5x across a 7x volume range, and a higher order with the same
// nonzeros takes longer.
module tb_flaash_workloads;
  localparam int NI = 7;
  localparam int SIZES [NI] = '{1, 2, 4, 8, 16, 32, 8};
  localparam bit SHARED [NI] = '{0, 0, 0, 0, 0, 0, 1};
  localparam logic [NI-1:0] ONLY8 = 7'b0001000;

  logic clk = 0, rst_n = 0;
  logic [NI-1:0] go = '0, finished;
  int   fa = 1, fb = 1, len = 1, dens_a = 0, dens_b = 0, nnz_a = 0;
  int   cycles [NI], wrong [NI];
  int   checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_acc
    flaash_bench #(.N(SIZES[g]), .SHARED_READ(SHARED[g])) u_bench (
      .clk(clk), .rst_n(rst_n), .go(go[g]), .fa(fa), .fb(fb), .len(len),
      .dens_a(dens_a), .dens_b(dens_b), .nnz_a(nnz_a),
      .finished(finished[g]), .cycles(cycles[g]), .wrong(wrong[g]));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // run the current configuration on the instances selected by mask
  task automatic run(input logic [NI-1:0] mask, input string name);
    @(negedge clk);
    go = mask;
    @(negedge clk);
    go = '0;
    @(negedge clk);
    while ((finished & mask) != mask) @(negedge clk);
    for (int g = 0; g < NI; g++) if (mask[g]) begin
      check(wrong[g] == 0, $sformatf("%s on %0d SDPEs: %0d wrong result entries", name, SIZES[g], wrong[g]));
      $display("%-34s SDPEs %2d%s: %7d cycles", name, SIZES[g], SHARED[g] ? " shared" : "", cycles[g]);
    end
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t [8];
    int lo, hi;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- SDPE-count sweep
    foreach (t[i]) t[i] = 0;
    for (int d = 0; d < 2; d++) begin
      automatic int dens = (d == 0) ? 100 : 5;
      fa = 9; fb = 3; len = 1024; dens_a = dens; dens_b = 500; nnz_a = 0;
      run('1, $sformatf("3x3x1024 @%0d.%0d%% vs SDPEs", dens / 10, dens % 10));
      for (int g = 1; g < 6; g++)
        check(cycles[g] * 100 <= cycles[g-1] * 105, $sformatf("more SDPEs not slower (%0d)", SIZES[g]));
      if (d == 0) begin
        check(cycles[0] >= 3 * cycles[3], "8 SDPEs at least 3x faster than 1 at 10%");
        check(cycles[6] > cycles[3], "shared read port slower than a port per SDPE");
      end
    end

    // ---- volume sweep (8 SDPEs)
    for (int k = 0; k < 2; k++) begin
      automatic int nnzf = 30 + 40 * k;
      lo = 1 << 30; hi = 0;
      for (int n = 100; n <= 700; n += 300) begin
        fa = 25; fb = 5; len = n; dens_a = nnzf * 1000 / n; dens_b = nnzf * 1000 / n; nnz_a = 0;
        run(ONLY8, $sformatf("5x5x%0d, %0d nnz/fiber", n, nnzf));
        if (cycles[3] < lo) lo = cycles[3];
        if (cycles[3] > hi) hi = cycles[3];
      end
      check(hi * 10 <= lo * 15, $sformatf("volume sweep at %0d nnz/fiber: %0d..%0d cycles", nnzf, lo, hi));
    end

    // ---- order sweep (8 SDPEs)
    for (int k = 0; k < 2; k++) begin
      automatic int nnz = (k == 0) ? 100 : 700;
      automatic int fibers = 3;
      for (int order = 3; order <= 6; order += (order == 3) ? 1 : 2) begin
        fa = fibers; fb = 3; len = 512; dens_a = 0; dens_b = 500; nnz_a = nnz;
        run(ONLY8, $sformatf("order %0d, %0d nnz", order, nnz));
        t[order] = cycles[3];
        fibers *= (order == 3) ? 3 : 9;
      end
      check(t[6] > t[3], $sformatf("order 6 slower than order 3 at %0d nnz", nnz));
    end

    // ---- density sweep of the tensor contraction layers (8 SDPEs)
    for (int s = 0; s < 3; s++) begin
      for (int d = 0; d < 2; d++) begin
        automatic int dens = (d == 0) ? 5 : 50;
        case (s)
          0: begin fa = 9;   fb = 3;  len = 1024; end
          1: begin fa = 49;  fb = 7;  len = 512;  end
          default: begin fa = 100; fb = 10; len = 100; end
        endcase
        dens_a = dens; dens_b = 500; nnz_a = 0;
        run(ONLY8, $sformatf("TCL %0dx%0d fibers x %0d @%0d.%0d%%", fa, fb, len, dens / 10, dens % 10));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
