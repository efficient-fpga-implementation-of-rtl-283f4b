// scalar_unit: the step lengths of the pipelined CG iteration.
//
// Given gamma = (r,r) and delta = (w,r) of the current iteration it produces
//   first iteration : beta = 0,                 alpha = gamma / delta
//   later ones      : beta = gamma / gamma_old,
//                     alpha = (gamma*alpha_old) / (delta*alpha_old - beta*gamma)
// and keeps gamma and alpha for the next iteration. The second form of alpha
// is the one printed in the published data-flow diagram; it equals
// 1/(delta/gamma - beta/alpha_old) of the algorithm listing but needs two
// divisions instead of four.
//
// Interface/timing: 'start' with gamma, delta and 'first' valid; 'done'
// pulses when alpha and beta are valid, about W+FRAC+2 cycles after start on
// the first iteration and twice that later (one shared sequential divider).
// alpha and beta hold until the next start.
module scalar_unit
  import cg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic first,
  input  fx_t  gamma,
  input  fx_t  delta,
  output fx_t  alpha,
  output fx_t  beta,
  output logic done
);

  typedef enum logic [2:0] {
    S_IDLE, S_DIV_BETA, S_PREP, S_DIV_ALPHA, S_DONE
  } state_e;

  state_e state;
  fx_t    g_q, d_q, gamma_old;
  fx_t    div_num, div_den, div_q;
  logic   div_start, div_done;

  fx_divider u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .q(div_q), .done(div_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      g_q       <= '0;
      d_q       <= '0;
      gamma_old <= '0;
      alpha     <= '0;
      beta      <= '0;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      done      <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g_q       <= gamma;
          d_q       <= delta;
          div_start <= 1'b1;
          if (first) begin
            beta    <= '0;
            div_num <= gamma;
            div_den <= delta;
            state   <= S_DIV_ALPHA;
          end else begin
            div_num <= gamma;
            div_den <= gamma_old;
            state   <= S_DIV_BETA;
          end
        end
        S_DIV_BETA: if (div_done) begin
          beta  <= div_q;
          state <= S_PREP;
        end
        S_PREP: begin
          div_num   <= fx_mul(g_q, alpha);
          div_den   <= fx_sub(fx_mul(d_q, alpha), fx_mul(beta, g_q));
          div_start <= 1'b1;
          state     <= S_DIV_ALPHA;
        end
        S_DIV_ALPHA: if (div_done) begin
          alpha     <= div_q;
          gamma_old <= g_q;
          state     <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
