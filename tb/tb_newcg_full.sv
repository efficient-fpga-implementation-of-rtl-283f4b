// tb_newcg_full: one complete solve at the design's default size, a
// 100 x 100 grid (10000 unknowns) in 16 sub-grids of 25 x 25, run for 120
// iterations, the iteration count used for this grid size in the published
// evaluation. x is compared with textbook CG in double precision after the
// same number of iterations, and the cycles per iteration are compared with
// the published figure for this size (181k cycles for 120 iterations, about
// 1508 per iteration); they must be within 10 %.
module tb_newcg_full;
  import cg_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 100, V = 4, H = 4, F = V * H, SV = N / V, SH = N / H;
  localparam int DEPTH = SV * SH, AW = $clog2(DEPTH), LW = $clog2(F);

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] max_iter = '0, iter_count;
  fx_t tol = '0, ld_data = '0, rd_data, gamma;
  logic ld_we = 0;
  logic [LW-1:0] ld_lane = '0, rd_lane = '0;
  logic [AW-1:0] ld_addr = '0, rd_addr = '0;
  logic busy, done, converged;
  int checks = 0, failures = 0;

  newcg_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------- mechanism counters
  int n_first = 0, n_later = 0, n_inner = 0, n_outer = 0, n_zero = 0;
  int n_wait = 0, n_stop_iter = 0, n_stop_tol = 0, cycles = 0;
  always @(posedge clk) begin
    cycles++;
    if (dut.u_scalar.start) begin
      if (dut.u_scalar.first) n_first++; else n_later++;
    end
    if (dut.u_spmv.u_halo.pad_valid) begin
      case (int'(dut.u_spmv.u_halo.region_q))
        1, 3: n_inner++;
        2, 4: n_outer++;
        default: ;
      endcase
    end
    if (int'(dut.state) == 2 && dut.sp_seen && !(dut.g_seen && dut.d_seen)) n_wait++;
    if (int'(dut.state) == 4) n_wait++;
    if (done) begin if (converged) n_stop_tol++; else n_stop_iter++; end
  end

  // ---------------------------------------------------------- references
  real b [N][N], xr [N][N], xh [N][N];

  function automatic real av(input real v [N][N], input int i, input int j);
    if (i < 0 || i >= N || j < 0 || j >= N) return 0.0;
    return v[i][j];
  endfunction

  task automatic apply_a(input real v [N][N], output real o [N][N]);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        o[i][j] = 4.0 * v[i][j] - av(v, i-1, j) - av(v, i+1, j) - av(v, i, j-1) - av(v, i, j+1);
  endtask

  // textbook CG; stops after maxit iterations or when (r,r) <= tolr
  task automatic ref_cg(input int maxit, input real tolr, output int its);
    real r [N][N], p [N][N], ap [N][N];
    real rr, rr_new, pap, al;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      xr[i][j] = 0.0; r[i][j] = b[i][j]; p[i][j] = b[i][j];
    end
    rr = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) rr += r[i][j] * r[i][j];
    its = 0;
    while (its < maxit && rr > tolr) begin
      apply_a(p, ap);
      pap = 0.0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) pap += p[i][j] * ap[i][j];
      al = rr / pap;
      rr_new = 0.0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        xr[i][j] += al * p[i][j];
        r[i][j]  -= al * ap[i][j];
        rr_new   += r[i][j] * r[i][j];
      end
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        p[i][j] = r[i][j] + (rr_new / rr) * p[i][j];
      rr = rr_new;
      its++;
    end
  endtask

  // ------------------------------------------------------------- host I/O
  task automatic load_b();
    for (int l = 0; l < F; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        ld_we = 1; ld_lane = LW'(l); ld_addr = AW'(a);
        ld_data = fx_t'(to_fx(b[grow(l / H, a / SH, SV)][grow(l % H, a % SH, SH)]));
      end
    @(negedge clk); ld_we = 0;
  endtask

  task automatic read_x();
    for (int l = 0; l < F; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        rd_lane = LW'(l); rd_addr = AW'(a);
        @(negedge clk);
        xh[grow(l / H, a / SH, SV)][grow(l % H, a % SH, SH)] = to_real(longint'(rd_data));
      end
  endtask

  task automatic run_solve(input int maxit, input real tolr, output int cyc);
    int c0;
    @(negedge clk);
    max_iter = 16'(maxit); tol = fx_t'(to_fx(tolr)); start = 1;
    c0 = cycles;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    cyc = cycles - c0;
  endtask

  initial begin
    int its_ref, cyc, per_iter;
    real err, xmax;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        b[i][j] = srange(1000) / 1000.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_b();
    run_solve(120, 0.0, cyc);
    read_x();
    ref_cg(120, -1.0, its_ref);
    checks += 2;
    if (converged) begin failures++; $display("solve claims convergence"); end
    if (iter_count != 16'd120) begin failures++; $display("iterations %0d", iter_count); end
    err = 0.0; xmax = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if ((xh[i][j] - xr[i][j]) > err) err = xh[i][j] - xr[i][j];
      if ((xr[i][j] - xh[i][j]) > err) err = xr[i][j] - xh[i][j];
      if (xr[i][j] > xmax) xmax = xr[i][j];
      if (-xr[i][j] > xmax) xmax = -xr[i][j];
    end
    per_iter = cyc / 120;
    $display("full size: %0d cycles, %0d per iteration (published 1508), max |x - x_ref| = %g (max |x| %g), gamma = %g",
             cyc, per_iter, err, xmax, to_real(longint'(gamma)));
    checks += 2;
    if (err > 1e-3 * xmax) begin failures++; $display("x differs from reference"); end
    if (per_iter > 1659 || per_iter < 1357) begin failures++; $display("iteration length not within 10%% of 1508"); end
    $display("mechanisms: first-iter %0d, later-iter %0d, inner copy %0d, inter-quad copy %0d, wait %0d, stop-limit %0d",
             n_first, n_later, n_inner, n_outer, n_wait, n_stop_iter);
    checks += 6;
    if (n_first == 0) failures++;
    if (n_later == 0) failures++;
    if (n_inner == 0) failures++;
    if (n_outer == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_stop_iter == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
