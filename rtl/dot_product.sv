// dot_product: pipelined, F-wide inner product of two streamed vectors.
//
// Each cycle one word from each of the F lanes of both streams enters. F
// multipliers form the products, a binary adder tree of log2(F) levels reduces
// them to one partial sum, and an accumulator adds the partial sums of the
// whole stream (the multiplier-adder tree of the published design; the final
// accumulator is this design's reading of it). Products are rounded and all
// sums saturated to <50,20>.
//
// Interface: pulse 'clear' before a stream; drive in_valid for each element
// and in_last with the final one. 'done' pulses, and 'result' holds the
// inner product, log2(F)+2 cycles after the last element (1 multiply stage,
// log2(F) adder stages, 1 accumulate stage). result keeps its value until the
// next clear. F must be a power of two.
module dot_product
  import cg_pkg::*;
#(
  parameter int unsigned F = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  logic in_last,
  input  fx_t  a [F],
  input  fx_t  b [F],
  output fx_t  result,
  output logic done
);

  localparam int unsigned LG = $clog2(F);

  initial begin
    assert (F == (1 << LG)) else $fatal(1, "dot_product: F must be a power of two");
  end

  // tree[0] = products, tree[k] = sums of level k (F >> k valid entries)
  fx_t  tree [LG+1][F];
  logic vld  [LG+1];
  logic lst  [LG+1];

  always_ff @(posedge clk) begin
    for (int l = 0; l < F; l++) tree[0][l] <= fx_mul(a[l], b[l]);
  end

  for (genvar k = 1; k <= LG; k++) begin : g_level
    always_ff @(posedge clk) begin
      for (int l = 0; l < (F >> k); l++)
        tree[k][l] <= fx_add(tree[k-1][2*l], tree[k-1][2*l+1]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= LG; k++) begin
        vld[k] <= 1'b0;
        lst[k] <= 1'b0;
      end
      result <= '0;
      done   <= 1'b0;
    end else begin
      vld[0] <= in_valid && !clear;
      lst[0] <= in_valid && in_last && !clear;
      for (int k = 1; k <= LG; k++) begin
        vld[k] <= vld[k-1] && !clear;
        lst[k] <= lst[k-1] && !clear;
      end
      if (clear)           result <= '0;
      else if (vld[LG])    result <= fx_add(result, tree[LG][0]);
      done <= lst[LG] && !clear;
    end
  end

endmodule
