// fx_divider: sequential signed fixed-point division q = num / den.
//
// Restoring division on magnitudes, one quotient bit per cycle. The dividend
// is |num| shifted left by FRAC bits (W+FRAC bits in all), so the quotient
// keeps FRAC fraction bits; it is truncated toward zero, given the sign
// num^den, and saturated to the fx_t range. Division by zero gives the
// largest value with the sign of num. The divider structure is this design's
// own choice: the published design only states that divisions occur.
//
// Timing: 'start' loads the operands; 'done' pulses W+FRAC+1 cycles later
// with q valid, and q holds until the next start.
module fx_divider
  import cg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  num,
  input  fx_t  den,
  output fx_t  q,
  output logic done
);

  localparam int unsigned DW = W + FRAC;
  localparam int unsigned CW = $clog2(DW + 1);

  logic          busy;
  logic [CW-1:0] cnt;
  logic [W-1:0]  rem;
  logic [DW-1:0] quo;
  logic [W-1:0]  dmag;
  logic          neg, dzero;

  logic [W:0]    trial;
  logic          take;
  assign trial = {rem[W-1:0], quo[DW-1]};
  assign take  = (trial >= {1'b0, dmag});

  function automatic logic [W-1:0] mag(input fx_t v);
    return v[W-1] ? W'(-v) : W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      rem   <= '0;
      quo   <= '0;
      dmag  <= '0;
      neg   <= 1'b0;
      dzero <= 1'b0;
      q     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        cnt   <= '0;
        rem   <= '0;
        quo   <= DW'(mag(num)) << FRAC;
        dmag  <= mag(den);
        neg   <= num[W-1] ^ den[W-1];
        dzero <= (den == '0);
      end else if (busy) begin
        if (cnt == CW'(DW)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (dzero)
            q <= num[W-1] ? FX_MIN : FX_MAX;
          else if (quo > DW'(FX_MAX))
            q <= neg ? FX_MIN : FX_MAX;
          else
            q <= neg ? -fx_t'(quo[W-1:0]) : fx_t'(quo[W-1:0]);
        end else begin
          cnt <= cnt + 1'b1;
          quo <= {quo[DW-2:0], take};
          rem <= take ? W'(trial - {1'b0, dmag}) : trial[W-1:0];
        end
      end
    end
  end

endmodule
