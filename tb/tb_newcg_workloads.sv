// tb_newcg_workloads: every published configuration of the pipelined CG
// solver that a 2x2-quadruple decomposition can hold (grid sizes 16, 32, 40
// and 100 with 4, 8 or 16 lanes, at the published iteration counts), each on
// its own solver instance, all run side by side. Each run compares its
// convergence curve and solution with double-precision CG and its cycle
// count with the published one (see newcg_run). 4 lanes are split 2x2,
// 8 lanes 4x2, 16 lanes 4x4.
module tb_newcg_workloads;
  logic clk = 0, rst_n = 0;
  localparam int NR = 8;
  logic fin [NR];
  int   chk [NR], fail [NR];

  always #5 clk = ~clk;

  newcg_run #(.N(16),  .V(2), .H(2), .ITERS(33),  .PUB(10000))  u0 (.clk, .rst_n, .finished(fin[0]), .checks(chk[0]), .failures(fail[0]));
  newcg_run #(.N(32),  .V(2), .H(2), .ITERS(60),  .PUB(42000))  u1 (.clk, .rst_n, .finished(fin[1]), .checks(chk[1]), .failures(fail[1]));
  newcg_run #(.N(32),  .V(4), .H(2), .ITERS(60),  .PUB(26000))  u2 (.clk, .rst_n, .finished(fin[2]), .checks(chk[2]), .failures(fail[2]));
  newcg_run #(.N(40),  .V(2), .H(2), .ITERS(80),  .PUB(81000))  u3 (.clk, .rst_n, .finished(fin[3]), .checks(chk[3]), .failures(fail[3]));
  newcg_run #(.N(40),  .V(4), .H(2), .ITERS(80),  .PUB(47000))  u4 (.clk, .rst_n, .finished(fin[4]), .checks(chk[4]), .failures(fail[4]));
  newcg_run #(.N(40),  .V(4), .H(4), .ITERS(80),  .PUB(29000))  u5 (.clk, .rst_n, .finished(fin[5]), .checks(chk[5]), .failures(fail[5]));
  newcg_run #(.N(100), .V(4), .H(2), .ITERS(120), .PUB(344000)) u6 (.clk, .rst_n, .finished(fin[6]), .checks(chk[6]), .failures(fail[6]));
  newcg_run #(.N(100), .V(4), .H(4), .ITERS(120), .PUB(181000)) u7 (.clk, .rst_n, .finished(fin[7]), .checks(chk[7]), .failures(fail[7]));

  initial begin
    int checks, failures;
    repeat (2000000) @(posedge clk);
    checks = 0; failures = 1;
    for (int k = 0; k < NR; k++) begin checks += chk[k]; failures += fail[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int k = 0; k < NR; k++) if (!fin[k]) all = 0;
    end while (!all);
    checks = 0; failures = 0;
    for (int k = 0; k < NR; k++) begin checks += chk[k]; failures += fail[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
