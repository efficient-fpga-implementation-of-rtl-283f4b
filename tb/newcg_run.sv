// newcg_run: testbench helper that performs one solve on its own newcg_top
// instance of size N with V x H lanes, for ITERS iterations, and checks it.
//
// It loads a random b (entries in [-1, 1]) through the host port, runs
// ITERS iterations, reads x, and compares with textbook CG in double
// precision: (r,r) after every iteration (the convergence curve) must agree
// within 1 % while it is above 1e-4, and x must agree to 1e-3 of its
// largest entry. It prints the cycle count next to PUB, a published cycle
// count for the same size, iteration count and lane count, and checks that
// the count is within 25 % of it. 'finished' rises when the run is over;
// 'checks' and 'failures' then hold its results.
module newcg_run
  import cg_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int N     = 16,
  parameter int V     = 2,
  parameter int H     = 2,
  parameter int ITERS = 33,
  parameter int PUB   = 10000
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int F = V * H, SV = N / V, SH = N / H;
  localparam int DEPTH = SV * SH, AW = $clog2(DEPTH), LW = $clog2(F);

  logic start = 0, ld_we = 0, busy, done, converged;
  logic [15:0] max_iter = '0, iter_count;
  fx_t tol = '0, ld_data = '0, rd_data, gamma;
  logic [LW-1:0] ld_lane = '0, rd_lane = '0;
  logic [AW-1:0] ld_addr = '0, rd_addr = '0;

  newcg_top #(.N(N), .V(V), .H(H)) dut (.*);

  real b [N][N], xr [N][N], xh [N][N];
  real g_hw [ITERS+1], g_ref [ITERS+1];

  // (r,r) seen by the solver at each check, indexed by iterations done
  always @(posedge clk) begin
    automatic int k = int'(dut.iter_count);
    if (rst_n && int'(dut.state) == 3 && k <= ITERS)
      g_hw[k] = to_real(longint'(dut.g_res));
  end

  function automatic real av(input real v [N][N], input int i, input int j);
    if (i < 0 || i >= N || j < 0 || j >= N) return 0.0;
    return v[i][j];
  endfunction

  task automatic ref_cg();
    real r [N][N], p [N][N], ap [N][N];
    real rr, rr_new, pap, al;
    rr = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      xr[i][j] = 0.0; r[i][j] = b[i][j]; p[i][j] = b[i][j];
      rr += b[i][j] * b[i][j];
    end
    g_ref[0] = rr;
    for (int it = 1; it <= ITERS; it++) begin
      pap = 0.0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        ap[i][j] = 4.0 * p[i][j] - av(p, i-1, j) - av(p, i+1, j) - av(p, i, j-1) - av(p, i, j+1);
        pap += p[i][j] * ap[i][j];
      end
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
      g_ref[it] = rr;
    end
  endtask

  initial begin
    int c0, cyc, ncmp;
    real err, xmax, rel;
    finished = 0; checks = 0; failures = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) b[i][j] = srange(1000) / 1000.0;
    ref_cg();
    wait (rst_n);
    for (int l = 0; l < F; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        ld_we = 1; ld_lane = LW'(l); ld_addr = AW'(a);
        ld_data = fx_t'(to_fx(b[grow(l / H, a / SH, SV)][grow(l % H, a % SH, SH)]));
      end
    @(negedge clk);
    ld_we = 0; max_iter = 16'(ITERS); tol = '0; start = 1;
    c0 = 0;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    for (int l = 0; l < F; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        rd_lane = LW'(l); rd_addr = AW'(a);
        @(negedge clk);
        xh[grow(l / H, a / SH, SV)][grow(l % H, a % SH, SH)] = to_real(longint'(rd_data));
      end
    checks++;
    if (iter_count != 16'(ITERS)) begin failures++; $display("N=%0d: %0d iterations", N, iter_count); end
    ncmp = 0;
    for (int it = 0; it <= ITERS; it++) begin
      if (g_ref[it] > 1e-4) begin
        rel = (g_hw[it] - g_ref[it]) / g_ref[it];
        if (rel < 0) rel = -rel;
        checks++; ncmp++;
        if (rel > 0.01) begin
          failures++;
          $display("N=%0d F=%0d iteration %0d: (r,r) %g, reference %g", N, F, it, g_hw[it], g_ref[it]);
        end
      end
    end
    err = 0.0; xmax = 0.0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if ((xh[i][j] - xr[i][j]) > err) err = xh[i][j] - xr[i][j];
      if ((xr[i][j] - xh[i][j]) > err) err = xr[i][j] - xh[i][j];
      if (xr[i][j] > xmax) xmax = xr[i][j];
      if (-xr[i][j] > xmax) xmax = -xr[i][j];
    end
    checks++;
    if (err > 1e-3 * xmax) begin failures++; $display("N=%0d F=%0d: x differs by %g", N, F, err); end
    checks++;
    if (real'(cyc) > 1.25 * PUB || real'(cyc) < 0.75 * PUB) begin
      failures++; $display("N=%0d F=%0d: cycle count far from published", N, F);
    end
    $display("N=%0d F=%0d (%0dx%0d) %0d iterations: %0d cycles (published %0d), (r,r) %g -> %g (reference %g), %0d curve points compared, max |x-x_ref| %g",
             N, F, V, H, ITERS, cyc, PUB, g_hw[0], g_hw[ITERS], g_ref[ITERS], ncmp, err);
    finished = 1;
  end
endmodule
