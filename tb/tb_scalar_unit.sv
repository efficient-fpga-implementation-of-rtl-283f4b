// tb_scalar_unit: a sequence of iterations (first, then later ones) with
// alpha and beta worked out by the reference arithmetic from the
// data-flow formulas; also checks division-by-zero saturation in the
// divider and that done arrives within the documented time.
module tb_scalar_unit;
  import cg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, first = 0, done;
  fx_t gamma = '0, delta = '0, alpha, beta;
  int checks = 0, failures = 0;

  scalar_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint g_old, a_old;

  task automatic step(input longint g, input longint d, input bit f);
    longint eb, ea, num, den;
    int cyc;
    @(negedge clk);
    gamma = fx_t'(g); delta = fx_t'(d); first = f; start = 1;
    @(negedge clk); start = 0;
    if (f) begin
      eb = 0;
      ea = rdiv(g, d);
    end else begin
      eb  = rdiv(g, g_old);
      num = rmul(g, a_old);
      den = clamp(128'(rmul(d, a_old)) - 128'(rmul(eb, g)));
      ea  = rdiv(num, den);
    end
    cyc = 1;
    while (!done && cyc < 400) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc > (f ? 90 : 180)) begin failures++; $display("slow: %0d cycles", cyc); end
    checks += 2;
    if (longint'(beta) != eb) begin failures++; $display("beta got %0d exp %0d", beta, eb); end
    if (longint'(alpha) != ea) begin failures++; $display("alpha got %0d exp %0d", alpha, ea); end
    g_old = g; a_old = ea;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      step(to_fx(100.0 + run), to_fx(250.5 - run), 1);
      for (int k = 0; k < 8; k++)
        step(to_fx($urandom_range(100000) / 1000.0 + 0.01),
             to_fx($urandom_range(100000) / 700.0 + 0.02), 0);
    end
    // delta = 0 saturates alpha to the largest value
    step(to_fx(3.0), 0, 1);
    step(-to_fx(3.0), 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
