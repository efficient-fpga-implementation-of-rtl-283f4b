// stencil_lane: matrix-free product with the 2D Laplacian on one sub-grid.
//
// Input is a padded sub-grid streamed row-major, PH rows of PW words, one word
// per valid cycle. Output is, for every interior point, the 5-point stencil
//        0 -1  0
//       -1  4 -1
//        0 -1  0
// applied to its 3x3 neighbourhood, in interior row-major order, i.e.
// (PH-2)*(PW-2) results per pass.
//
// Structure (as in the published design): three line buffers of PW words and
// a 3x3 window of shift registers. When a word arrives at column c, column c
// of the line buffers moves up by one line and the new word enters the last
// line; the updated column is loaded into the window's last column while the
// window shifts left; then the stencil is applied to the window. The
// multiply-by-coefficient is a shift and subtractions; the sum is saturated to
// the <50,20> range.
//
// Timing: three register stages (line-buffer column, window, result); the
// result is registered on the second clock edge after the edge that takes
// the input word completing its window. No back-pressure. 'clear' restarts the
// row/column count (the count also wraps on its own after a full pass).
module stencil_lane
  import cg_pkg::*;
#(
  parameter int unsigned PW = 27,
  parameter int unsigned PH = 27
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  fx_t  in_data,
  output logic out_valid,
  output fx_t  out_data
);

  localparam int unsigned CW = $clog2(PW);
  localparam int unsigned RW = $clog2(PH);

  logic [CW-1:0] pc;
  logic [RW-1:0] pr;
  fx_t           lb [3][PW];     // line buffers, [0] oldest line, [2] last
  fx_t           col_q [3];      // column handed to the window
  fx_t           win [3][3];     // [row][col], col 2 newest
  logic          s1_valid, s1_emit, s2_valid, s2_emit;

  // Input position
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0;
      pr <= '0;
    end else if (clear) begin
      pc <= '0;
      pr <= '0;
    end else if (in_valid) begin
      if (pc == CW'(PW - 1)) begin
        pc <= '0;
        pr <= (pr == RW'(PH - 1)) ? '0 : pr + 1'b1;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  // Stage 1: line-buffer column shift
  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb[0][pc] <= lb[1][pc];
      lb[1][pc] <= lb[2][pc];
      lb[2][pc] <= in_data;
      col_q[0]  <= lb[1][pc];
      col_q[1]  <= lb[2][pc];
      col_q[2]  <= in_data;
    end
  end

  // Stage 2: window shift
  always_ff @(posedge clk) begin
    if (s1_valid) begin
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
        win[r][2] <= col_q[r];
      end
    end
  end

  // Stage 3: stencil
  always_ff @(posedge clk) begin
    if (s2_valid && s2_emit) begin
      out_data <= fx_sat((wide_t'(win[1][1]) <<< 2)
                         - wide_t'(win[0][1]) - wide_t'(win[2][1])
                         - wide_t'(win[1][0]) - wide_t'(win[1][2]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_emit   <= 1'b0;
      s2_valid  <= 1'b0;
      s2_emit   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid && !clear;
      s1_emit   <= (pr >= RW'(2)) && (pc >= CW'(2));
      s2_valid  <= s1_valid;
      s2_emit   <= s1_emit;
      out_valid <= s2_valid && s2_emit;
    end
  end

endmodule
