// tb_axpy: S = A + alpha*B against the reference arithmetic, including
// negative alpha and a saturating case; checks the 1-cycle latency.
module tb_axpy;
  import cg_pkg::*;
  import tb_ref_pkg::*;
  localparam int F = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t alpha = '0, a [F], b [F], s [F];
  int checks = 0, failures = 0;

  axpy #(.F(F)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ea [F], eb [F], al;
    for (int l = 0; l < F; l++) begin a[l] = '0; b[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      al = (t % 2 != 0) ? to_fx(srange(1000) / 100.0)
                   : -to_fx($urandom_range(1000) / 37.0);
      if (t == 7) al = to_fx(4000.0);
      alpha = fx_t'(al);
      for (int l = 0; l < F; l++) begin
        ea[l] = to_fx(srange(100000) / 17.0);
        eb[l] = to_fx(srange(100000) / 13.0);
        if (t == 7) eb[l] = to_fx(400000.0);   // saturates
        a[l] = fx_t'(ea[l]); b[l] = fx_t'(eb[l]);
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing at t=%0d", t); end
      for (int l = 0; l < F; l++) begin
        checks++;
        if (longint'(s[l]) != radd(ea[l], rmul(al, eb[l]))) begin
          failures++;
          $display("t=%0d lane %0d got %0d exp %0d", t, l, s[l], radd(ea[l], rmul(al, eb[l])));
        end
      end
    end
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
