// fx_div: sequential Q32.32 divider, q = num / den.
//
// Restoring long division on the magnitudes, one quotient bit per clock:
// the 96-bit dividend |num| << 32 is shifted through a remainder register and
// |den| is subtracted whenever it fits.  The sign is applied at the end and
// the result saturates to the largest magnitude when it does not fit (or when
// den is 0).  The quotient is truncated towards zero.
//
// Interface: pulse `start` with num/den valid (ignored while busy); `done` is
// a one-cycle pulse with `quo` valid, 98 cycles after start.  `quo` holds its
// value until the next start.  The paper's datapath uses floating-point
// division; this unit is this design's own fixed-point replacement.
module fx_div
  import cnn_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  num,
  input  fx_t  den,
  output logic busy,
  output logic done,
  output fx_t  quo
);
  localparam int unsigned NBITS = FX_W + FX_FRAC;   // 96 quotient bits

  logic [NBITS-1:0] dividend, q;
  logic [FX_W:0]    rem;
  logic [FX_W-1:0]  dmag;
  logic             neg, dzero;
  logic [6:0]       cnt;
  logic             fin;

  logic [FX_W:0] rem_sh;
  always_comb rem_sh = {rem[FX_W-1:0], dividend[NBITS-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; fin <= 1'b0; quo <= '0;
      dividend <= '0; q <= '0; rem <= '0; dmag <= '0; neg <= 1'b0;
      dzero <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        neg      <= num[FX_W-1] ^ den[FX_W-1];
        dividend <= {(num[FX_W-1] ? -num : num), {FX_FRAC{1'b0}}};
        dmag     <= den[FX_W-1] ? -den : den;
        dzero    <= (den == '0);
        rem      <= '0;
        q        <= '0;
        cnt      <= 7'(NBITS);
      end else if (busy && cnt != 0) begin
        dividend <= dividend << 1;
        if (rem_sh >= {1'b0, dmag}) begin
          rem <= rem_sh - {1'b0, dmag};
          q   <= {q[NBITS-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[NBITS-2:0], 1'b0};
        end
        cnt <= cnt - 1;
        if (cnt == 1) fin <= 1'b1;
      end else if (busy && fin) begin
        busy <= 1'b0;
        done <= 1'b1;
        if (dzero || q[NBITS-1:FX_W-1] != '0)
          quo <= neg ? FX_MIN : FX_MAX;
        else
          quo <= neg ? -fx_t'(q[FX_W-1:0]) : fx_t'(q[FX_W-1:0]);
      end
    end
  end
endmodule
