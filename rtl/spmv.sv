// spmv: n = A*w for the N x N 2D Laplacian, without storing A.
//
// One halo_exchange drives F = V*H stencil_lanes, one per sub-grid. The halo
// unit reads the source vector's banks at one shared address per cycle and
// hands every lane its padded stream; each lane applies the 5-point stencil.
// Results come out in the banks' own address order, so out_addr is a simple
// count of results and can be used directly as the write address of the
// destination banks.
//
// Timing: the edge that takes 'start' begins the pass; rd_addr then runs
// over (SV+2)*(SH+2) padded positions, one per cycle, and the source banks
// must answer one cycle later on src_data. The last result, with a 'done'
// pulse, is registered (SV+2)*(SH+2)+3 clock edges after the edge that took
// 'start' (one bank read stage, three stencil stages). 'busy' covers the
// whole pass. own_valid (aligned with src_data) marks the interior words of
// the source, which other units may consume from the same read.
module spmv
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
  output logic          own_valid,
  output logic          out_valid,
  output logic [AW-1:0] out_addr,
  output fx_t           out_data [F],
  output logic          done,
  output logic          busy
);

  logic pad_valid;
  fx_t  pad_data [F];
  logic halo_busy;
  logic [2:0] pipe_busy;
  logic lane_valid [F];

  halo_exchange #(.V(V), .H(H), .SV(SV), .SH(SH)) u_halo (
    .clk, .rst_n, .start, .rd_addr, .src_data,
    .pad_valid, .pad_data, .own_valid, .busy(halo_busy)
  );

  for (genvar l = 0; l < F; l++) begin : g_lane
    stencil_lane #(.PW(SH + 2), .PH(SV + 2)) u_lane (
      .clk, .rst_n, .clear(start),
      .in_valid (pad_valid),
      .in_data  (pad_data[l]),
      .out_valid(lane_valid[l]),
      .out_data (out_data[l])
    );
  end

  assign out_valid = lane_valid[0];

  // Busy while the halo pass runs or results are still in the lanes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pipe_busy <= '0;
    else        pipe_busy <= {pipe_busy[1:0], halo_busy};
  end
  assign busy = halo_busy || (|pipe_busy) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_addr <= '0;
    end else if (start) begin
      out_addr <= '0;
    end else if (out_valid) begin
      out_addr <= (out_addr == AW'(SV * SH - 1)) ? '0 : out_addr + 1'b1;
    end
  end

  assign done = out_valid && (out_addr == AW'(SV * SH - 1));

endmodule
