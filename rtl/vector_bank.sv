// vector_bank: storage for one solver vector, split into F sub-grid banks.
//
// The grid is cut into F = V x H sub-grids and each sub-grid owns one bank of
// DEPTH = (N/V)*(N/H) words. Inside a bank, words are kept in the order the
// sub-grid is streamed (row-major, starting at the corner of the sub-grid that
// touches the middle of its 2x2 quadruple). Because every lane is streamed in
// step, all F banks share one read address and one write address; the write
// has a per-lane enable so a host can fill a single sub-grid.
//
// Timing: rdata is registered, valid one cycle after raddr. A write in the
// same cycle as a read of the same address returns the old word.
// Where the vectors live between iterations is not given by the published
// design (it streams data between stages); these banks are this design's.
module vector_bank
  import cg_pkg::*;
#(
  parameter int unsigned F     = 16,
  parameter int unsigned DEPTH = 625,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output fx_t           rdata [F],
  input  logic [F-1:0]  we,
  input  logic [AW-1:0] waddr,
  input  fx_t           wdata [F]
);

  for (genvar l = 0; l < F; l++) begin : g_lane
    fx_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we[l]) mem[waddr] <= wdata[l];
      rdata[l] <= mem[raddr];
    end
  end

endmodule
