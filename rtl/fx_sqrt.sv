// fx_sqrt: sequential Q32.32 square root, r = sqrt(x) for x >= 0.
//
// sqrt(X * 2^-32) * 2^32 = isqrt(X << 32), so the unit takes the integer
// square root of the 96-bit radicand X << 32 with the classic digit-by-digit
// (non-restoring, two radicand bits per step) method.  The 48-bit root is
// the Q32.32 result.  Negative inputs give 0.
//
// Interface: pulse `start` with `x` valid; `done` pulses with `root` valid
// 50 cycles later; `root` holds until the next start.  This unit is this
// design's own fixed-point replacement of the floating-point square root
// used in the Adam update.
// The top 16 bits of the root are always 0, since the square root of a
// non-negative Q32.32 value is below 2^16; the full word is kept so the
// result is an ordinary Q32.32 value.
module fx_sqrt
  import cnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic busy,
  output logic done,
  output fx_t  root
);
  localparam int unsigned RW = FX_W + FX_FRAC;   // 96-bit radicand
  localparam int unsigned QW = RW / 2;           // 48-bit root

  logic [RW-1:0] rad;
  logic [QW+1:0] rem;
  logic [QW-1:0] q;
  logic [5:0]    cnt;
  logic          fin;

  logic [QW+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[QW-1:0], rad[RW-1:RW-2]};
    trial  = {q, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; fin <= 1'b0; root <= '0;
      rad <= '0; rem <= '0; q <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        rad  <= x[FX_W-1] ? '0 : {x, {FX_FRAC{1'b0}}};
        rem  <= '0;
        q    <= '0;
        cnt  <= 6'(QW);
      end else if (busy && cnt != 0) begin
        rad <= rad << 2;
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          q   <= {q[QW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[QW-2:0], 1'b0};
        end
        cnt <= cnt - 1;
        if (cnt == 1) fin <= 1'b1;
      end else if (busy && fin) begin
        busy <= 1'b0;
        done <= 1'b1;
        root <= fx_t'({{(FX_W-QW){1'b0}}, q});
      end
    end
  end
endmodule
