// halo_exchange: streams all F sub-grids of a vector at once, each wrapped
// in a one-cell ring of padding taken from its neighbours.
//
// Layout. The N x N grid is cut into V rows by H columns of sub-grids, each
// SV = N/V rows by SH = N/H columns. Sub-grids are grouped in 2x2 quadruples.
// Lane l = a*H + b is sub-grid row a, column b. Every sub-grid is traversed
// row-major in its own mirrored frame: local row 0 / column 0 is the row /
// column that touches the middle corner of its quadruple, and the traversal
// moves away from that corner (the streaming pattern of the published
// design). Banks store words in this order (see vector_bank).
//
// Exchange. Because the four sub-grids of a quadruple are mirror images, and
// neighbouring quadruples are mirror images across their shared edge, the
// padding cell that any lane needs at padded position (pi, pj) is, in every
// case, the word at the same bank address in one neighbour:
//   pi = -1 : local row 0 of the sub-grid across the quadruple's middle row
//   pi = SV : local row SV-1 of the sub-grid in the next quadruple (or zero at
//             the domain edge: zero Dirichlet boundary)
//   pj = -1 / pj = SH : the same for columns.
// So a single shared read address serves all banks, and the exchange is a
// per-cycle selection between own data and four neighbour lanes; no buffer is
// needed. The published design copies these cells through small buffers; the
// same-address crossbar is this design's way of doing that copy.
// The four padding corners are not used by a 5-point stencil and are zero.
//
// Interface/timing. A 'start' pulse begins a pass of (SV+2)*(SH+2) cycles,
// one padded position per cycle, row-major over padded rows -1..SV.
// rd_addr is presented in cycle t; the bank's data must come back on src_data
// in cycle t+1, when pad_valid/pad_data for that position are output.
// own_valid marks the positions that are the lane's own interior words (their
// address is the bank address of cycle t). No back-pressure.
module halo_exchange
  import cg_pkg::*;
#(
  parameter int unsigned V  = 4,
  parameter int unsigned H  = 4,
  parameter int unsigned SV = 25,
  parameter int unsigned SH = 25,
  localparam int unsigned F  = V * H,
  localparam int unsigned AW = $clog2(SV * SH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [AW-1:0] rd_addr,
  input  fx_t           src_data [F],
  output logic          pad_valid,
  output fx_t           pad_data [F],
  output logic          own_valid,
  output logic          busy
);

  typedef enum logic [2:0] {
    R_OWN, R_IN_ROW, R_OUT_ROW, R_IN_COL, R_OUT_COL, R_ZERO
  } region_e;

  localparam int unsigned CW = $clog2(SH + 2);
  localparam int unsigned RW = $clog2(SV + 2);

  logic          running;
  logic [RW-1:0] pi;  // padded row 0..SV+1 (interior 1..SV)
  logic [CW-1:0] pj;  // padded column 0..SH+1
  region_e       region, region_q;
  logic [RW-1:0] row_c;
  logic [CW-1:0] col_c;

  initial begin
    assert (V % 2 == 0 && H % 2 == 0)
      else $fatal(1, "halo_exchange: V and H must be even (2x2 quadruples)");
  end

  // Position counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      pi      <= '0;
      pj      <= '0;
    end else if (start) begin
      running <= 1'b1;
      pi      <= '0;
      pj      <= '0;
    end else if (running) begin
      if (pj == CW'(SH + 1)) begin
        pj <= '0;
        if (pi == RW'(SV + 1)) running <= 1'b0;
        else pi <= pi + 1'b1;
      end else begin
        pj <= pj + 1'b1;
      end
    end
  end

  // Region of the current padded position and the clamped bank address
  always_comb begin
    logic row_in, col_in;
    row_in = (pi != '0) && (pi != RW'(SV + 1));
    col_in = (pj != '0) && (pj != CW'(SH + 1));
    if (row_in && col_in)     region = R_OWN;
    else if (!row_in && !col_in) region = R_ZERO;
    else if (pi == '0)        region = R_IN_ROW;
    else if (!row_in)         region = R_OUT_ROW;
    else if (pj == '0)        region = R_IN_COL;
    else                      region = R_OUT_COL;

    if (pi == '0)                row_c = '0;
    else if (pi == RW'(SV + 1))  row_c = RW'(SV - 1);
    else                         row_c = pi - 1'b1;
    if (pj == '0)                col_c = '0;
    else if (pj == CW'(SH + 1))  col_c = CW'(SH - 1);
    else                         col_c = pj - 1'b1;
  end

  assign rd_addr = AW'(row_c) * AW'(SH) + AW'(col_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pad_valid <= 1'b0;
      region_q  <= R_ZERO;
    end else begin
      pad_valid <= running;
      region_q  <= region;
    end
  end

  assign own_valid = pad_valid && (region_q == R_OWN);
  assign busy      = running || pad_valid;

  // Per-lane selection between own data and the four neighbours
  for (genvar l = 0; l < F; l++) begin : g_lane
    localparam int unsigned A = l / H;
    localparam int unsigned B = l % H;
    // inner neighbours always exist (V, H even)
    localparam int unsigned IN_ROW = (A ^ 1) * H + B;
    localparam int unsigned IN_COL = A * H + (B ^ 1);
    // outer neighbours lie in the next quadruple, if there is one
    localparam bit HAS_OUT_ROW = (A % 2 == 0) ? (A > 0) : (A < V - 1);
    localparam bit HAS_OUT_COL = (B % 2 == 0) ? (B > 0) : (B < H - 1);
    localparam int unsigned OUT_ROW =
        !HAS_OUT_ROW ? l : ((A % 2 == 0) ? (A - 1) * H + B : (A + 1) * H + B);
    localparam int unsigned OUT_COL =
        !HAS_OUT_COL ? l : ((B % 2 == 0) ? A * H + B - 1 : A * H + B + 1);

    always_comb begin
      unique case (region_q)
        R_OWN:     pad_data[l] = src_data[l];
        R_IN_ROW:  pad_data[l] = src_data[IN_ROW];
        R_OUT_ROW: pad_data[l] = HAS_OUT_ROW ? src_data[OUT_ROW] : '0;
        R_IN_COL:  pad_data[l] = src_data[IN_COL];
        R_OUT_COL: pad_data[l] = HAS_OUT_COL ? src_data[OUT_COL] : '0;
        default:   pad_data[l] = '0;
      endcase
    end
  end

endmodule
