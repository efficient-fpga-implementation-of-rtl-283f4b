// tb_vector_bank: random writes with per-lane enables and reads against a
// behavioural array; checks the one-cycle registered read and that a lane
// whose enable is low keeps its word.
module tb_vector_bank;
  import cg_pkg::*;
  localparam int F = 4, DEPTH = 20, AW = $clog2(DEPTH);

  logic clk = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  fx_t rdata [F], wdata [F];
  logic [F-1:0] we = '0;
  longint model [F][DEPTH];
  int checks = 0, failures = 0;

  vector_bank #(.F(F), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = '1; waddr = AW'(a);
      for (int l = 0; l < F; l++) begin
        model[l][a] = longint'($urandom) * 1000 + longint'(l);
        wdata[l] = fx_t'(model[l][a]);
      end
    end
    @(negedge clk); we = '0;
    // random mixed traffic
    for (int t = 0; t < 400; t++) begin
      int ra, wa;
      logic [F-1:0] m;
      ra = $urandom_range(DEPTH - 1);
      wa = $urandom_range(DEPTH - 1);
      m  = F'($urandom);
      @(negedge clk);
      raddr = AW'(ra); waddr = AW'(wa); we = m;
      for (int l = 0; l < F; l++) wdata[l] = fx_t'(longint'($urandom) - 64'sd2147483648);
      @(posedge clk); #1;
      for (int l = 0; l < F; l++) begin
        checks++;
        if (longint'(rdata[l]) != model[l][ra]) begin
          failures++;
          $display("lane %0d addr %0d: got %0d exp %0d", l, ra, rdata[l], model[l][ra]);
        end
      end
      for (int l = 0; l < F; l++) if (m[l]) model[l][wa] = longint'(wdata[l]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
