// tb_halo_exchange: a 12 x 8 grid cut into 4 x 4 sub-grids of 3 x 2 (so
// there are 2 x 2 quadruples and both intra- and inter-quadruple copies).
// Banks are filled from a global grid through the mirrored traversal; every
// padded word of every lane is compared with the global grid value at the
// matching position (zero outside the domain and at padding corners).
// Counts how often each kind of copy happens and fails if one never does.
module tb_halo_exchange;
  import cg_pkg::*;
  import tb_ref_pkg::*;
  localparam int V = 4, H = 4, SV = 3, SH = 2, F = V * H;
  localparam int NR = V * SV, NC = H * SH;
  localparam int AW = $clog2(SV * SH);
  localparam int PLEN = (SV + 2) * (SH + 2);

  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] rd_addr;
  fx_t src_data [F], pad_data [F];
  logic pad_valid, own_valid, busy;
  int checks = 0, failures = 0;
  longint g [NR][NC];
  longint bank [F][SV*SH];
  int npad = 0, nown = 0;
  int n_inner = 0, n_outer = 0, n_edge = 0;

  halo_exchange #(.V(V), .H(H), .SV(SV), .SH(SH)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk)
    for (int l = 0; l < F; l++) src_data[l] <= fx_t'(bank[l][rd_addr]);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && pad_valid) begin
      int pi, pj;
      pi = npad % PLEN / (SH + 2) - 1;
      pj = npad % PLEN % (SH + 2) - 1;
      for (int l = 0; l < F; l++) begin
        int a, b, gr, gc;
        bit row_out, col_out;
        longint e;
        a = l / H; b = l % H;
        row_out = (pi < 0 || pi >= SV);
        col_out = (pj < 0 || pj >= SH);
        gr = grow(a, pi, SV);
        gc = grow(b, pj, SH);
        if (row_out && col_out) e = 0;
        else if (gr < 0 || gr >= NR || gc < 0 || gc >= NC) begin e = 0; n_edge++; end
        else begin
          e = g[gr][gc];
          if (row_out) begin if (gr / SV / 2 == a / 2) n_inner++; else n_outer++; end
          if (col_out) begin if (gc / SH / 2 == b / 2) n_inner++; else n_outer++; end
        end
        checks++;
        if (longint'(pad_data[l]) != e) begin
          failures++;
          $display("lane %0d pad (%0d,%0d): got %0d exp %0d", l, pi, pj, pad_data[l], e);
        end
      end
      checks++;
      if (own_valid != (pi >= 0 && pi < SV && pj >= 0 && pj < SH)) begin
        failures++; $display("own_valid wrong at (%0d,%0d)", pi, pj);
      end
      if (own_valid) nown++;
      npad++;
    end
  end

  initial begin
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) g[r][c] = to_fx(r * 100 + c + 0.5);
    for (int l = 0; l < F; l++)
      for (int i = 0; i < SV; i++)
        for (int j = 0; j < SH; j++)
          bank[l][i*SH+j] = g[grow(l / H, i, SV)][grow(l % H, j, SH)];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (npad != (pass + 1) * PLEN) begin
        failures++; $display("padded words %0d, expected %0d", npad, (pass + 1) * PLEN);
      end
    end
    checks++;
    if (nown != 2 * SV * SH) begin failures++; $display("own words %0d", nown); end
    $display("copies: inner-quadruple %0d, inter-quadruple %0d, domain edge %0d", n_inner, n_outer, n_edge);
    checks += 3;
    if (n_inner == 0) failures++;
    if (n_outer == 0) failures++;
    if (n_edge == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
