// tb_spmv: n = A*w on a 12 x 8 grid split 4 x 2 into sub-grids of 3 x 4.
// Banks are filled from a random global grid through the mirrored
// traversal; every result, written to the bank address given by out_addr,
// is compared with the 5-point Laplacian of the global grid (zero outside).
// Also checks own_valid count and that 'done' comes (SV+2)*(SH+2)+3 clock
// edges after the edge that takes 'start'.
module tb_spmv;
  import cg_pkg::*;
  import tb_ref_pkg::*;
  localparam int V = 4, H = 2, SV = 3, SH = 4, F = V * H;
  localparam int NR = V * SV, NC = H * SH;
  localparam int AW = $clog2(SV * SH);
  localparam int PLEN = (SV + 2) * (SH + 2);

  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] rd_addr, out_addr;
  fx_t src_data [F], out_data [F];
  logic own_valid, out_valid, done, busy;
  int checks = 0, failures = 0;
  longint g [NR][NC];
  longint bank [F][SV*SH];
  bit seen [F][SV*SH];
  int nown = 0, edges = 0, start_edge = 0, done_edge = -1;

  spmv #(.V(V), .H(H), .SV(SV), .SH(SH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) edges++;

  always_ff @(posedge clk)
    for (int l = 0; l < F; l++) src_data[l] <= fx_t'(bank[l][rd_addr]);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint gv(input int r, input int c);
    if (r < 0 || r >= NR || c < 0 || c >= NC) return 0;
    return g[r][c];
  endfunction

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int l = 0; l < F; l++) begin
        int i, j, r, c;
        longint e;
        i = int'(out_addr) / SH; j = int'(out_addr) % SH;
        r = grow(l / H, i, SV); c = grow(l % H, j, SH);
        e = clamp(128'(gv(r, c)) * 4 - 128'(gv(r - 1, c)) - 128'(gv(r + 1, c))
                  - 128'(gv(r, c - 1)) - 128'(gv(r, c + 1)));
        checks++;
        if (longint'(out_data[l]) != e) begin
          failures++; $display("lane %0d addr %0d: got %0d exp %0d", l, out_addr, out_data[l], e);
        end
        seen[l][out_addr] = 1;
      end
    end
    if (rst_n && own_valid) nown++;
    if (rst_n && done) done_edge = edges;
  end

  initial begin
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) g[r][c] = to_fx(srange(100000) / 64.0);
    for (int l = 0; l < F; l++)
      for (int i = 0; i < SV; i++)
        for (int j = 0; j < SH; j++)
          bank[l][i*SH+j] = g[grow(l / H, i, SV)][grow(l % H, j, SH)];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; start_edge = edges + 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (done_edge - start_edge != PLEN + 3) begin
      failures++; $display("done after %0d edges, expected %0d", done_edge - start_edge, PLEN + 3);
    end
    checks++;
    if (nown != SV * SH) begin failures++; $display("own words %0d", nown); end
    for (int l = 0; l < F; l++)
      for (int a = 0; a < SV * SH; a++) begin
        checks++;
        if (!seen[l][a]) begin failures++; $display("lane %0d addr %0d never written", l, a); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
