// tb_dot_product: streams of random length through the F-wide dot product,
// compared with the reference arithmetic (rounded products, saturating sums
// in the same tree order). Checks the log2(F)+2 cycle latency from the last
// element to 'done', a stream with gaps, and saturation.
module tb_dot_product;
  import cg_pkg::*;
  import tb_ref_pkg::*;
  localparam int F = 8, LG = 3;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_last = 0, done;
  fx_t a [F], b [F], result;
  int checks = 0, failures = 0;

  dot_product #(.F(F)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint tree_sum(input longint p [F]);
    longint t [F];
    int n;
    t = p;
    n = F;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = radd(t[2*i], t[2*i+1]);
      n = n / 2;
    end
    return t[0];
  endfunction

  task automatic run(input int len, input bit gaps, input bit big);
    longint acc, ea [F], eb [F], p [F];
    int lat;
    acc = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int e = 0; e < len; e++) begin
      if (gaps && (e % 3 == 1)) begin
        in_valid = 0; @(negedge clk);
      end
      for (int l = 0; l < F; l++) begin
        ea[l] = big ? to_fx(300000.0) : to_fx(srange(30000) / 7.0);
        eb[l] = big ? to_fx(300000.0) : to_fx(srange(30000) / 11.0);
        a[l] = fx_t'(ea[l]); b[l] = fx_t'(eb[l]);
        p[l] = rmul(ea[l], eb[l]);
      end
      acc = radd(acc, tree_sum(p));
      in_valid = 1;
      in_last = (e == len - 1);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    lat = 0;
    while (!done && lat < 50) begin
      lat++;
      @(posedge clk); #1;
    end
    checks++;
    // lat counts edges after the one that took the last element
    if (lat + 1 != LG + 2) begin
      failures++; $display("latency %0d, expected %0d", lat + 1, LG + 2);
    end
    checks++;
    if (longint'(result) != acc) begin
      failures++; $display("len %0d: got %0d exp %0d", len, result, acc);
    end
  endtask

  initial begin
    for (int l = 0; l < F; l++) begin a[l] = '0; b[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 0, 0);
    run(17, 0, 0);
    run(40, 1, 0);
    run(5, 0, 1);
    for (int k = 0; k < 10; k++) run(1 + int'($urandom_range(30)), k[0], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
