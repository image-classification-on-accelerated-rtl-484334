// adam_lane: one Adam update of one weight, Eqs. (2)-(4) of the paper.
//
// The paper's Fig. 1 labels the stored arrays mW1, vW1, mW2, vW2 as the
// corrected momentums, and this lane keeps exactly those: m_hat and v_hat of
// Eq. (3).  Substituting Eq. (2) into Eq. (3) gives the equivalent update
//   m_hat' = (1 - k1) * m_hat + k1 * g,    k1 = (1 - beta1) / (1 - beta1^t)
//   v_hat' = (1 - k2) * v_hat + k2 * g^2,  k2 = (1 - beta2) / (1 - beta2^t)
//   w'     = w - eta * m_hat' / (sqrt(v_hat') + eps)                 (Eq. 4)
// where k1, k2 are the step-wise correction values that adam_bias_corr
// computes once per mini-batch.  Unlike the raw second moment, which is only
// 0.001 * g^2 after the first step, v_hat stays of the order of g^2, so it
// keeps its precision in fixed point.
//
// Number formats (this design's own choices): g, w and m_hat are Q32.32.
// v_hat is held scaled by 2^VS (VS = 24), i.e. v_in/v_out = v_hat * 2^24 in
// a Q32.32 word, which resolves v_hat down to 2^-56 and holds gradients up
// to |g| < 11 (larger squares saturate, which only shortens the step).
// Gradients below about 1e-7 (430 LSB) lose relative precision in m_hat.  The
// square root then yields sqrt(v_hat) * 2^12, so the step is computed as
//   q = (eta * m_hat' * 2^12) / (sqrt(v_hat' * 2^24) + eps * 2^12)
// which equals the step of Eq. (4).  beta1, beta2, eta, eps: Table 1.
//
// Interface: pulse `start` with g, m_in, v_in, w_in, k1, k2 valid (they may
// change after the start clock); `done` pulses with m_out, v_out, w_out
// valid 151 clocks later; the outputs hold until the next start.  Several
// lanes run side by side in the Adam modules.
module adam_lane
  import cnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  g,
  input  fx_t  m_in,
  input  fx_t  v_in,
  input  fx_t  w_in,
  input  fx_t  k1,
  input  fx_t  k2,
  output logic busy,
  output logic done,
  output fx_t  m_out,
  output fx_t  v_out,
  output fx_t  w_out
);
  typedef enum logic [2:0] {S_IDLE, S_MV, S_SQ, S_DIVS, S_DIV} state_e;
  state_e st;

  localparam int unsigned VS = 24;
  localparam int unsigned RS = VS / 2;
  localparam fx_t EPS_S = 64'sh0000_0000_001A_D7F3;   // eps * 2^12

  fx_t w_r, vh;

  // g^2 * 2^VS, saturated
  fx_t gsq_s;
  logic signed [2*FX_W-1:0] gg;
  always_comb begin
    gg    = ((g * g) + (128'sd1 <<< (FX_FRAC - VS - 1))) >>> (FX_FRAC - VS);
    gsq_s = (gg > 128'(signed'(FX_MAX))) ? FX_MAX : fx_t'(gg);
  end

  // eta * m_hat * 2^RS
  fx_t num_s;
  logic signed [2*FX_W-1:0] em;
  always_comb begin
    em    = ((ADAM_ETA * m_out) + (128'sd1 <<< (FX_FRAC - RS - 1))) >>> (FX_FRAC - RS);
    num_s = fx_t'(em);
  end

  logic sq_start, sq_busy, sq_done;
  fx_t  sq_root;
  fx_sqrt u_sqrt (.clk, .rst_n, .start(sq_start), .x(vh),
                  .busy(sq_busy), .done(sq_done), .root(sq_root));
  assign sq_start = (st == S_MV);

  logic div_start, div_busy, div_done;
  fx_t  div_q, num_r, den_r;
  fx_div u_div (.clk, .rst_n, .start(div_start), .num(num_r), .den(den_r),
                .busy(div_busy), .done(div_done), .quo(div_q));
  assign div_start = (st == S_DIVS);

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; w_r <= '0; vh <= '0;
      m_out <= '0; v_out <= '0; w_out <= '0; num_r <= '0; den_r <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          m_out <= fx_add(fx_mul(FX_ONE - k1, m_in), fx_mul(k1, g));
          vh    <= fx_add(fx_mul(FX_ONE - k2, v_in), fx_mul(k2, gsq_s));
          w_r   <= w_in;
          st    <= S_MV;
        end
        S_MV: begin                              // square root starts
          v_out <= vh;
          st    <= S_SQ;
        end
        S_SQ: if (sq_done) begin
          num_r <= num_s;
          den_r <= fx_add(sq_root, EPS_S);
          st    <= S_DIVS;
        end
        S_DIVS: st <= S_DIV;
        default: if (div_done) begin           // S_DIV
          w_out <= fx_add(w_r, -div_q);
          st    <= S_IDLE;
          done  <= 1'b1;
        end
      endcase
    end
  end
endmodule
