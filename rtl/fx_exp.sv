// fx_exp: sequential Q32.32 natural exponential, y = e^x.
//
// Range reduction x = k*ln2 + r with integer k = floor(x / ln2) and
// r in [0, ln2); e^r is a degree-11 Taylor polynomial evaluated by Horner's
// rule with one multiplier, one coefficient per clock; the result is then
// shifted by k.  The input is clamped to [-23, 21] so that the result fits
// the Q32.32 range (e^21 < 2^31; e^-23 is below one LSB and gives 0).
//
// Interface: pulse `start` with `x` valid; `done` pulses with `y` valid 14
// cycles later; `y` holds until the next start.  The paper only states that
// exponentials are computed for the softmax; this unit is this design's own.
module fx_exp
  import cnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic busy,
  output logic done,
  output fx_t  y
);
  localparam int unsigned NCOEF = 12;
  localparam fx_t X_HI = 64'sd21 <<< FX_FRAC;
  localparam fx_t X_LO = -(64'sd23 <<< FX_FRAC);

  // 1/n! in Q32.32, n = 0 .. 11
  function automatic fx_t coef(input logic [3:0] n);
    case (n)
      4'd0, 4'd1: return 64'sh1_0000_0000;
      4'd2:  return 64'sh8000_0000;
      4'd3:  return 64'sh2AAA_AAAB;
      4'd4:  return 64'sh0AAA_AAAB;
      4'd5:  return 64'sh0222_2222;
      4'd6:  return 64'sh005B_05B0;
      4'd7:  return 64'sh000D_00D0;
      4'd8:  return 64'sh0001_A01A;
      4'd9:  return 64'sh0000_2E3C;
      4'd10: return 64'sh0000_04A0;
      default: return 64'sh0000_006C;
    endcase
  endfunction

  fx_t         r, p;
  logic signed [7:0] k;
  logic [3:0]  n;
  logic [1:0]  st;   // 0 idle, 1 reduce, 2 horner, 3 scale

  fx_t xc, kf;
  always_comb begin
    xc = (x > X_HI) ? X_HI : (x < X_LO) ? X_LO : x;
    kf = fx_mul(xc, FX_INVLN2) >>> FX_FRAC;   // floor(x / ln2), integer
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; p <= '0; k <= '0; n <= '0; st <= 2'd0; y <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        2'd0: if (start) begin
          k    <= 8'(kf);
          r    <= xc - fx_mul(kf <<< FX_FRAC, FX_LN2);
          busy <= 1'b1;
          st   <= 2'd1;
        end
        2'd1: begin
          p  <= coef(4'(NCOEF - 1));
          n  <= 4'(NCOEF - 2);
          st <= 2'd2;
        end
        2'd2: begin
          p <= fx_add(coef(n), fx_mul(p, r));
          if (n == 0) st <= 2'd3;
          else        n  <= n - 1;
        end
        default: begin
          y    <= (k >= 0) ? (p <<< k) : (p >>> (-k));
          busy <= 1'b0;
          done <= 1'b1;
          st   <= 2'd0;
        end
      endcase
    end
  end
endmodule
