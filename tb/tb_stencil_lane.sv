// tb_stencil_lane: two padded sub-grids streamed back to back (the second
// with gaps in in_valid) through one stencil lane. Every interior result is
// compared with 4*c - up - down - left - right computed from the stored grid,
// in row-major order, and the result must be registered 2 clock edges after the edge that takes the input word
// that completes its 3x3 window.
module tb_stencil_lane;
  import cg_pkg::*;
  import tb_ref_pkg::*;
  localparam int PW = 6, PH = 5;
  localparam int NOUT = (PW - 2) * (PH - 2);

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  fx_t in_data = '0, out_data;
  int checks = 0, failures = 0;
  longint g [2][PH][PW];
  int in_edge [2][PH][PW];
  int edges = 0, nout = 0;

  stencil_lane #(.PW(PW), .PH(PH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) edges++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int pass, k, r, c;
      longint e;
      pass = nout / NOUT;
      k = nout % NOUT;
      r = 1 + k / (PW - 2);
      c = 1 + k % (PW - 2);
      e = clamp(128'(g[pass][r][c]) * 4 - 128'(g[pass][r-1][c]) - 128'(g[pass][r+1][c])
                - 128'(g[pass][r][c-1]) - 128'(g[pass][r][c+1]));
      checks++;
      if (longint'(out_data) != e) begin
        failures++; $display("pass %0d (%0d,%0d): got %0d exp %0d", pass, r, c, out_data, e);
      end
      checks++;
      if (edges - in_edge[pass][r+1][c+1] != 2) begin
        failures++; $display("pass %0d (%0d,%0d): latency %0d", pass, r, c, edges - in_edge[pass][r+1][c+1]);
      end
      nout++;
    end
  end

  initial begin
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < PH; r++)
        for (int c = 0; c < PW; c++)
          g[p][r][c] = (p == 0 && r == 2 && c == 2) ? to_fx(200000.0)  // saturating point
                                                     : to_fx(srange(50000) / 9.0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < PH; r++)
        for (int c = 0; c < PW; c++) begin
          if (p == 1 && $urandom_range(2) == 0) begin
            in_valid = 0; @(negedge clk);
          end
          in_valid = 1;
          in_data = fx_t'(g[p][r][c]);
          in_edge[p][r][c] = edges + 1;
          @(negedge clk);
        end
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (nout != 2 * NOUT) begin failures++; $display("outputs %0d, expected %0d", nout, 2 * NOUT); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
