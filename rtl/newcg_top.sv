// newcg_top: pipelined conjugate-gradient solver for the 2D Laplace equation.
//
// Solves A x = b where A is the 5-point Laplacian (stencil 4 on the diagonal,
// -1 to the four neighbours, zero Dirichlet boundary) on an N x N grid,
// using the pipelined CG variant that needs one SpMV and two dot products per
// iteration, all of which read the same vectors and so run in one pass:
//
//   phase A : gamma = (r,r), delta = (w,r) and n = A w, all from one
//             streamed read of r and w (SpMV through halo_exchange and F
//             stencil lanes, dot products in two dot_product units)
//   check   : stop if gamma <= tol or max_iter iterations are done
//   scalar  : beta = gamma/gamma_old, alpha (scalar_unit); first iteration
//             beta = 0, alpha = gamma/delta
//   phase B : p = r + beta p, q = w + beta q, z = n + beta z   (axpy set 1)
//             x = x + alpha p, r = r - alpha q, w = w - alpha z (axpy set 2)
//             streamed once over all words, written back in place.
// Before the first iteration an init pass computes w = A r (x = 0, r = b)
// and zeroes x, p, q, z. The grid is split into F = V*H sub-grids, each held
// in its own bank lane and processed by its own pipeline lane, so every
// stage handles F words per cycle.
//
// Host interface. While idle, b is written word by word through ld_* into
// lane ld_lane at bank address ld_addr (the sub-grid's mirrored row-major
// order; see halo_exchange), and x is read through rd_lane/rd_addr, data on
// rd_data one cycle later. A 'start' pulse runs the solve; 'done' pulses at
// the end, 'converged' tells whether the tolerance stopped it, iter_count and
// gamma give the iteration count and the last (r,r).
//
// Timing per iteration: phase A (SV+2)*(SH+2) + 5 cycles, check 1, scalar
// 170 (86 on the first iteration: one division instead of two), phase B
// SV*SH + 3; 1533 cycles at the default size. The structure of the iteration, the
// operations and their overlap follow the published design; the banks, the
// host ports, the stopping rule and the non-overlap of phase B with the next
// phase A are this design's choices.
module newcg_top
  import cg_pkg::*;
#(
  parameter int unsigned N = 100,
  parameter int unsigned V = 4,
  parameter int unsigned H = 4,
  localparam int unsigned F     = V * H,
  localparam int unsigned SV    = N / V,
  localparam int unsigned SH    = N / H,
  localparam int unsigned DEPTH = SV * SH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned LW    = (F > 1) ? $clog2(F) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   max_iter,
  input  fx_t           tol,
  input  logic          ld_we,
  input  logic [LW-1:0] ld_lane,
  input  logic [AW-1:0] ld_addr,
  input  fx_t           ld_data,
  input  logic [LW-1:0] rd_lane,
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data,
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [15:0]   iter_count,
  output fx_t           gamma
);

  typedef enum logic [2:0] {
    T_IDLE, T_INIT, T_PHASE_A, T_CHECK, T_SCALAR, T_PHASE_B
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- banks
  logic [AW-1:0] raddr;
  fx_t x_rd [F], r_rd [F], w_rd [F], p_rd [F], q_rd [F], z_rd [F], n_rd [F];
  logic [F-1:0]  x_we, r_we, w_we, p_we, q_we, z_we, n_we;
  logic [AW-1:0] x_wa, r_wa, w_wa, p_wa, q_wa, z_wa, n_wa;
  fx_t x_wd [F], r_wd [F], w_wd [F], p_wd [F], q_wd [F], z_wd [F], n_wd [F];

  vector_bank #(.F(F), .DEPTH(DEPTH)) u_x (.clk, .raddr, .rdata(x_rd), .we(x_we), .waddr(x_wa), .wdata(x_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_r (.clk, .raddr, .rdata(r_rd), .we(r_we), .waddr(r_wa), .wdata(r_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_w (.clk, .raddr, .rdata(w_rd), .we(w_we), .waddr(w_wa), .wdata(w_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_p (.clk, .raddr, .rdata(p_rd), .we(p_we), .waddr(p_wa), .wdata(p_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_q (.clk, .raddr, .rdata(q_rd), .we(q_we), .waddr(q_wa), .wdata(q_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_z (.clk, .raddr, .rdata(z_rd), .we(z_we), .waddr(z_wa), .wdata(z_wd));
  vector_bank #(.F(F), .DEPTH(DEPTH)) u_n (.clk, .raddr, .rdata(n_rd), .we(n_we), .waddr(n_wa), .wdata(n_wd));

  // ----------------------------------------------------------------- SpMV
  logic          spmv_start, own_valid, sp_valid, sp_done, sp_busy;
  logic [AW-1:0] sp_raddr, sp_waddr;
  fx_t           sp_src [F], sp_out [F];

  assign sp_src = (state == T_INIT) ? r_rd : w_rd;

  spmv #(.V(V), .H(H), .SV(SV), .SH(SH)) u_spmv (
    .clk, .rst_n, .start(spmv_start), .rd_addr(sp_raddr), .src_data(sp_src),
    .own_valid, .out_valid(sp_valid), .out_addr(sp_waddr), .out_data(sp_out),
    .done(sp_done), .busy(sp_busy)
  );

  // --------------------------------------------------------- dot products
  logic          dot_valid, dot_last, g_done, d_done;
  logic [AW-1:0] own_cnt;
  fx_t           g_res, d_res;

  assign dot_valid = own_valid && (state == T_PHASE_A);
  assign dot_last  = dot_valid && (own_cnt == AW'(DEPTH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          own_cnt <= '0;
    else if (spmv_start) own_cnt <= '0;
    else if (own_valid)  own_cnt <= own_cnt + 1'b1;
  end

  dot_product #(.F(F)) u_dot_rr (
    .clk, .rst_n, .clear(spmv_start), .in_valid(dot_valid), .in_last(dot_last),
    .a(r_rd), .b(r_rd), .result(g_res), .done(g_done)
  );
  dot_product #(.F(F)) u_dot_wr (
    .clk, .rst_n, .clear(spmv_start), .in_valid(dot_valid), .in_last(dot_last),
    .a(w_rd), .b(r_rd), .result(d_res), .done(d_done)
  );

  // ---------------------------------------------------------- scalar unit
  logic scal_start, scal_done;
  fx_t  alpha, beta, neg_alpha;

  scalar_unit u_scalar (
    .clk, .rst_n, .start(scal_start), .first(iter_count == '0),
    .gamma(g_res), .delta(d_res), .alpha, .beta, .done(scal_done)
  );

  assign neg_alpha = fx_sub('0, alpha);

  // ------------------------------------------------------ vector updates
  logic          b_run, b_v1;
  logic [AW-1:0] b_addr, b_a1, b_a2, b_a3;
  logic          s1_valid, s2_valid;
  fx_t           p_new [F], q_new [F], z_new [F];
  fx_t           x_new [F], r_new [F], w_new [F];
  fx_t           x_d [F], r_d [F], w_d [F];

  axpy #(.F(F)) u_upd_p (.clk, .rst_n, .in_valid(b_v1), .alpha(beta), .a(r_rd), .b(p_rd), .out_valid(s1_valid), .s(p_new));
  axpy #(.F(F)) u_upd_q (.clk, .rst_n, .in_valid(b_v1), .alpha(beta), .a(w_rd), .b(q_rd), .out_valid(), .s(q_new));
  axpy #(.F(F)) u_upd_z (.clk, .rst_n, .in_valid(b_v1), .alpha(beta), .a(n_rd), .b(z_rd), .out_valid(), .s(z_new));

  always_ff @(posedge clk) begin
    if (b_v1) begin
      x_d <= x_rd;
      r_d <= r_rd;
      w_d <= w_rd;
    end
  end

  axpy #(.F(F)) u_upd_x (.clk, .rst_n, .in_valid(s1_valid), .alpha(alpha),     .a(x_d), .b(p_new), .out_valid(s2_valid), .s(x_new));
  axpy #(.F(F)) u_upd_r (.clk, .rst_n, .in_valid(s1_valid), .alpha(neg_alpha), .a(r_d), .b(q_new), .out_valid(), .s(r_new));
  axpy #(.F(F)) u_upd_w (.clk, .rst_n, .in_valid(s1_valid), .alpha(neg_alpha), .a(w_d), .b(z_new), .out_valid(), .s(w_new));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_v1 <= 1'b0;
      b_a1 <= '0;
      b_a2 <= '0;
      b_a3 <= '0;
    end else begin
      b_v1 <= b_run;
      b_a1 <= b_addr;
      b_a2 <= b_a1;
      b_a3 <= b_a2;
    end
  end

  // ------------------------------------------------------ shared read port
  always_comb begin
    unique case (state)
      T_INIT, T_PHASE_A: raddr = sp_raddr;
      T_PHASE_B:         raddr = b_addr;
      default:           raddr = rd_addr;
    endcase
  end

  logic [LW-1:0] rd_lane_q;
  always_ff @(posedge clk) rd_lane_q <= rd_lane;
  assign rd_data = x_rd[rd_lane_q];

  // ----------------------------------------------------------- write ports
  fx_t zero_f [F];
  always_comb for (int l = 0; l < F; l++) zero_f[l] = '0;

  logic init_wr;
  assign init_wr = (state == T_INIT) && sp_valid;

  always_comb begin
    // x, p, q, z: zeroed by the init pass, then phase B
    x_we = init_wr ? '1 : {F{s2_valid}};
    x_wa = init_wr ? sp_waddr : b_a3;
    x_wd = init_wr ? zero_f : x_new;
    p_we = init_wr ? '1 : {F{s1_valid}};
    p_wa = init_wr ? sp_waddr : b_a2;
    p_wd = init_wr ? zero_f : p_new;
    q_we = p_we;
    q_wa = p_wa;
    q_wd = init_wr ? zero_f : q_new;
    z_we = p_we;
    z_wa = p_wa;
    z_wd = init_wr ? zero_f : z_new;
    // w: A r from the init pass, then phase B
    w_we = init_wr ? '1 : {F{s2_valid}};
    w_wa = init_wr ? sp_waddr : b_a3;
    w_wd = init_wr ? sp_out : w_new;
    // r: host load of b while idle, then phase B
    if (state == T_IDLE) begin
      r_we = ld_we ? (F'(1) << ld_lane) : '0;
      r_wa = ld_addr;
      for (int l = 0; l < F; l++) r_wd[l] = ld_data;
    end else begin
      r_we = {F{s2_valid}};
      r_wa = b_a3;
      r_wd = r_new;
    end
    // n = A w from phase A
    n_we = {F{(state == T_PHASE_A) && sp_valid}};
    n_wa = sp_waddr;
    n_wd = sp_out;
  end

  // ------------------------------------------------------------ sequencer
  logic sp_seen, g_seen, d_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      spmv_start <= 1'b0;
      scal_start <= 1'b0;
      sp_seen    <= 1'b0;
      g_seen     <= 1'b0;
      d_seen     <= 1'b0;
      b_run      <= 1'b0;
      b_addr     <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      converged  <= 1'b0;
      iter_count <= '0;
      gamma      <= '0;
    end else begin
      spmv_start <= 1'b0;
      scal_start <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          state      <= T_INIT;
          spmv_start <= 1'b1;
          busy       <= 1'b1;
          converged  <= 1'b0;
          iter_count <= '0;
        end
        T_INIT: if (sp_done) begin
          state      <= T_PHASE_A;
          spmv_start <= 1'b1;
          sp_seen    <= 1'b0;
          g_seen     <= 1'b0;
          d_seen     <= 1'b0;
        end
        T_PHASE_A: begin
          if (sp_done) sp_seen <= 1'b1;
          if (g_done)  g_seen  <= 1'b1;
          if (d_done)  d_seen  <= 1'b1;
          if ((sp_seen || sp_done) && (g_seen || g_done) && (d_seen || d_done))
            state <= T_CHECK;
        end
        T_CHECK: begin
          gamma <= g_res;
          if (g_res <= tol || iter_count >= max_iter) begin
            converged <= (g_res <= tol);
            busy      <= 1'b0;
            done      <= 1'b1;
            state     <= T_IDLE;
          end else begin
            scal_start <= 1'b1;
            state      <= T_SCALAR;
          end
        end
        T_SCALAR: if (scal_done) begin
          state  <= T_PHASE_B;
          b_run  <= 1'b1;
          b_addr <= '0;
        end
        T_PHASE_B: begin
          if (b_run) begin
            if (b_addr == AW'(DEPTH - 1)) b_run <= 1'b0;
            else                          b_addr <= b_addr + 1'b1;
          end
          if (s2_valid && b_a3 == AW'(DEPTH - 1)) begin
            iter_count <= iter_count + 1'b1;
            state      <= T_PHASE_A;
            spmv_start <= 1'b1;
            sp_seen    <= 1'b0;
            g_seen     <= 1'b0;
            d_seen     <= 1'b0;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // The host may only load b while the solver is idle.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                ld_we |-> state == T_IDLE)
    else $error("newcg_top: ld_we while solving");

  // Phase B must never overlap a SpMV pass.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 b_v1 |-> !sp_busy)
    else $error("newcg_top: vector update overlaps SpMV");

endmodule
