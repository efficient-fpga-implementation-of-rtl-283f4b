// tb_newcg_top: end-to-end solves of the 2D Laplace system on a 16 x 16
// grid split into 4 x 4 sub-grids (two quadruples each way).
//
// The right-hand side is loaded through the host port in the mirrored bank
// order; x is read back the same way. The reference is textbook CG
// (r = b, p = r, alpha = (r,r)/(p,Ap), ...) in double precision, a different
// formulation from the pipelined variant in the design, so agreement checks
// the whole data path. Solve 1 stops on the iteration limit and x must match
// the reference after the same number of iterations. Solve 2 stops on the
// tolerance; the true residual of the returned x must be small and the
// iteration count close to the reference's. Cycle counts per iteration are
// checked against the phase lengths. Each mechanism (first-iteration
// scalar path, later path, inner- and inter-quadruple halo copies, zero
// boundary, waiting for the dot products, stop on limit, stop on tolerance)
// is counted and must occur.
module tb_newcg_top;
  import cg_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 16, V = 4, H = 4, F = V * H, SV = N / V, SH = N / H;
  localparam int DEPTH = SV * SH, AW = $clog2(DEPTH), LW = $clog2(F);

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] max_iter = '0, iter_count;
  fx_t tol = '0, ld_data = '0, rd_data, gamma;
  logic ld_we = 0;
  logic [LW-1:0] ld_lane = '0, rd_lane = '0;
  logic [AW-1:0] ld_addr = '0, rd_addr = '0;
  logic busy, done, converged;
  int checks = 0, failures = 0;

  newcg_top #(.N(N), .V(V), .H(H)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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
    int its_ref, cyc, per_iter, exp_iter;
    real err, xmax, res, bn, ax [N][N];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        b[i][j] = srange(1000) / 1000.0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- solve 1: stop on iteration limit
    load_b();
    run_solve(6, 0.0, cyc);
    read_x();
    ref_cg(6, -1.0, its_ref);
    checks += 2;
    if (converged) begin failures++; $display("solve 1 claims convergence"); end
    if (iter_count != 16'd6) begin failures++; $display("solve 1 iterations %0d", iter_count); end
    err = 0.0; xmax = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if ((xh[i][j] - xr[i][j]) > err) err = xh[i][j] - xr[i][j];
      if ((xr[i][j] - xh[i][j]) > err) err = xr[i][j] - xh[i][j];
      if (xr[i][j] > xmax) xmax = xr[i][j];
      if (-xr[i][j] > xmax) xmax = -xr[i][j];
    end
    $display("solve 1: %0d cycles, max |x - x_ref| = %g (max |x| %g)", cyc, err, xmax);
    checks++;
    if (err > 1e-5 * xmax + 1e-6) begin failures++; $display("solve 1: x differs from reference"); end
    // per-iteration cycles: phase A (SV+2)(SH+2)+5, scalar <= 2*(W+FRAC)+12,
    // phase B SV*SH+5; plus one init pass and a final phase A
    per_iter = (SV + 2) * (SH + 2) + 5 + 2 * (W + FRAC) + 12 + DEPTH + 5;
    exp_iter = (cyc - 2 * ((SV + 2) * (SH + 2) + 6)) / 6;
    $display("solve 1: %0d cycles per iteration (bound %0d)", exp_iter, per_iter);
    checks++;
    if (exp_iter > per_iter || exp_iter < per_iter - 40) begin
      failures++; $display("solve 1: iteration length out of range");
    end

    // ---- solve 2: stop on tolerance (b is reloaded: r was overwritten)
    load_b();
    run_solve(200, 1e-6, cyc);
    read_x();
    ref_cg(200, 1e-6, its_ref);
    apply_a(xh, ax);
    res = 0.0; bn = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      res += (b[i][j] - ax[i][j]) * (b[i][j] - ax[i][j]);
      bn  += b[i][j] * b[i][j];
    end
    $display("solve 2: %0d iterations (reference %0d), %0d cycles, |b-Ax|^2 = %g, |b|^2 = %g, gamma = %g",
             iter_count, its_ref, cyc, res, bn, to_real(longint'(gamma)));
    checks += 3;
    if (!converged) begin failures++; $display("solve 2 did not converge"); end
    if (int'(iter_count) > its_ref + 3 || int'(iter_count) < its_ref - 3) begin
      failures++; $display("solve 2 iteration count far from reference");
    end
    if (res > 1e-4) begin failures++; $display("solve 2 residual too large"); end

    $display("mechanisms: first-iter %0d, later-iter %0d, inner copy %0d, inter-quad copy %0d, wait %0d, stop-limit %0d, stop-tol %0d",
             n_first, n_later, n_inner, n_outer, n_wait, n_stop_iter, n_stop_tol);
    checks += 7;
    if (n_first == 0) failures++;
    if (n_later == 0) failures++;
    if (n_inner == 0) failures++;
    if (n_outer == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_stop_iter == 0) failures++;
    if (n_stop_tol == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
