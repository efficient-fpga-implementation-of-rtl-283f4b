// axpy: F-wide vector update S = A + alpha*B.
//
// One multiplier and one adder per lane, as in the published superscalar
// axpy. The product is rounded and the sum saturated to <50,20>. The solver
// also uses this unit for r - alpha*q and w - alpha*z by passing -alpha.
//
// Timing: one register stage; S and out_valid appear 1 cycle after A, B and
// in_valid (the published unit's initial latency of 1 cycle). Fully
// pipelined: one F-wide element per cycle.
module axpy
  import cg_pkg::*;
#(
  parameter int unsigned F = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  alpha,
  input  fx_t  a [F],
  input  fx_t  b [F],
  output logic out_valid,
  output fx_t  s [F]
);

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < F; l++) s[l] <= fx_add(a[l], fx_mul(alpha, b[l]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
