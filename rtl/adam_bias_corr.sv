// adam_bias_corr: Adam step-wise correction values, computed once per
// mini-batch and shared by both Adam modules.
//
// The paper avoids the costly power operation of Eq. (3) by computing the
// correction values once per mini-batch and handing them to both Adam
// calculations.  This unit keeps beta1^t and beta2^t as running products
// (one multiplication each per step instead of a power) and, on each `step`,
// advances t and forms with one shared divider
//     k1 = (1 - beta1) / (1 - beta1^t),   k2 = (1 - beta2) / (1 - beta2^t)
// the weights with which adam_lane blends a new gradient into the stored
// corrected momentums (k1 = k2 = 1 at t = 1, tending to 1 - beta as t grows).
//
// Interface: `clear` (one clock, while idle) restarts the optimiser: t = 0,
// both powers = 1.  A `step` pulse starts an update; `done` pulses 200
// clocks later with k1, k2 and t valid; they hold until the next step.
// The form of the correction values is this design's own choice.
module adam_bias_corr
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        step,
  output logic        busy,
  output logic        done,
  output fx_t         k1,
  output fx_t         k2,
  output logic [31:0] t
);
  typedef enum logic [2:0] {S_IDLE, S_POW, S_D1, S_W1, S_D2, S_W2} state_e;
  state_e st;

  fx_t p1, p2;

  logic div_start, div_busy, div_done;
  fx_t  div_num, div_den, div_q;
  fx_div u_div (.clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
                .busy(div_busy), .done(div_done), .quo(div_q));
  assign div_start = (st == S_D1) || (st == S_D2);
  assign div_num   = (st == S_D1) ? ADAM_1MBETA1 : ADAM_1MBETA2;
  assign div_den   = (st == S_D1) ? (FX_ONE - p1) : (FX_ONE - p2);
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p1 <= FX_ONE; p2 <= FX_ONE; k1 <= FX_ONE; k2 <= FX_ONE;
      t <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: begin
          if (clear) begin
            p1 <= FX_ONE; p2 <= FX_ONE; t <= '0;
          end else if (step) begin
            st <= S_POW;
          end
        end
        S_POW: begin
          p1 <= fx_mul(p1, ADAM_BETA1);
          p2 <= fx_mul(p2, ADAM_BETA2);
          t  <= t + 1;
          st <= S_D1;
        end
        S_D1: st <= S_W1;
        S_W1: if (div_done) begin k1 <= div_q; st <= S_D2; end
        S_D2: st <= S_W2;
        default: if (div_done) begin k2 <= div_q; st <= S_IDLE; done <= 1'b1; end
      endcase
    end
  end
endmodule
