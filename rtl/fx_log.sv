// fx_log: sequential Q32.32 natural logarithm, y = ln(x) for x > 0.
//
// x is normalised to 2^e * m with m in [1, 2) by a leading-one search; the
// integer part of log2(x) is e.  The 32 fraction bits of log2(m) come from
// repeated squaring: square m, and if the square reaches 2 the next bit is 1
// and m is halved.  Finally ln(x) = log2(x) * ln 2.  Inputs <= 0 are treated
// as the smallest positive value, 2^-32 (ln = -22.18), which keeps the
// cross-entropy finite.
//
// Interface: pulse `start` with `x` valid; `done` pulses with `y` valid 34
// cycles later; `y` holds until the next start.  The paper states only that
// the cross-entropy loss is computed; this unit is this design's own.
module fx_log
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
  logic [FX_W-1:0]   xm;
  logic [6:0]        msb;
  always_comb begin
    xm  = (x <= 0) ? 64'd1 : x;
    msb = '0;
    for (int i = 0; i < FX_W; i++)
      if (xm[i]) msb = 7'(i);
  end

  logic [FX_W-1:0]   m;        // Q32.32, value in [1, 2)
  logic [FX_FRAC-1:0] fbits;
  logic signed [7:0] e;
  logic [5:0]        cnt;
  logic [1:0]        st;

  logic [2*FX_W-1:0] sq;
  always_comb sq = (m * m) >> FX_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0; fbits <= '0; e <= '0; cnt <= '0; st <= 2'd0; y <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        2'd0: if (start) begin
          e     <= 8'(msb) - 8'(FX_FRAC);
          m     <= (msb >= 7'(FX_FRAC)) ? (xm >> (msb - 7'(FX_FRAC)))
                                        : (xm << (7'(FX_FRAC) - msb));
          fbits <= '0;
          cnt   <= 6'(FX_FRAC);
          busy  <= 1'b1;
          st    <= 2'd1;
        end
        2'd1: begin
          if (sq[FX_FRAC+1]) begin          // m^2 >= 2
            m     <= 64'(sq >> 1);
            fbits <= {fbits[FX_FRAC-2:0], 1'b1};
          end else begin
            m     <= 64'(sq);
            fbits <= {fbits[FX_FRAC-2:0], 1'b0};
          end
          cnt <= cnt - 1;
          if (cnt == 1) st <= 2'd2;
        end
        default: begin
          y    <= fx_mul({{(FX_W-FX_FRAC-8){e[7]}}, e, fbits}, FX_LN2);
          busy <= 1'b0;
          done <= 1'b1;
          st   <= 2'd0;
        end
      endcase
    end
  end
endmodule
