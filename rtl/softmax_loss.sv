// softmax_loss: softmax activation, cross-entropy loss and the output error.
//
// For each image i of the mini-batch the row {e[i][0..C-1], s[i]} produced
// by the output layer (exponentials and their sum) is read, the reciprocal
// 1/s[i] is formed once by a divider and the C class probabilities
// h2[i][j] = e[i][j] / s[i] by C parallel multipliers.  h2 is written for the
// host (the inference result) and, for training, the error of the output
// layer d2[i][j] = (h2[i][j] - outActual[i][j]) / B, the gradient of the
// mean cross-entropy with respect to the output-layer values.  Alongside, as
// the paper states, the cross-entropy loss -(1/B) * sum y * ln(h2) is
// accumulated; the logarithm is only taken for classes whose target y is
// non-zero (one per image for one-hot targets).
//
// Interface: pulse `start`; `done` pulses when all rows are written and
// `loss` (Q32.32) is final.  Memory reads have one clock of latency.
// Timing per image: 101 + 36 * nz + (C - nz) clocks, nz being the number of
// non-zero targets (1 for one-hot).  The
// reciprocal-then-multiply order and the error scaling by 1/B are this
// design's own choices; the paper gives only the function.
// The one-bit tile-column outputs (e_rd_tcol, y_rd_tcol, h2_wr_tcol,
// d2_wr_tcol) are always 0: those arrays are one tile wide, and the port is
// kept for the common memory interface.
module softmax_loss
  import cnn_pkg::*;
#(
  parameter int unsigned B = BATCHSIZE,
  parameter int unsigned C = CLASSSIZE,
  localparam int unsigned BW = idx_w(B)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // e[B][C+1], partition (1, C+1)
  output logic               e_rd_en,
  output logic [BW-1:0]      e_rd_trow,
  output logic [0:0]         e_rd_tcol,
  input  fx_t  [0:0][C:0]    e_rd_data,
  // outActual[B][C], partition (1, C)
  output logic               y_rd_en,
  output logic [BW-1:0]      y_rd_trow,
  output logic [0:0]         y_rd_tcol,
  input  fx_t  [0:0][C-1:0]  y_rd_data,
  // h2[B][C] and d2[B][C], partition (1, C)
  output logic [0:0][C-1:0]  h2_wr_en,
  output logic [BW-1:0]      h2_wr_trow,
  output logic [0:0]         h2_wr_tcol,
  output fx_t  [0:0][C-1:0]  h2_wr_data,
  output logic [0:0][C-1:0]  d2_wr_en,
  output logic [BW-1:0]      d2_wr_trow,
  output logic [0:0]         d2_wr_tcol,
  output fx_t  [0:0][C-1:0]  d2_wr_data,
  output fx_t                loss
);
  localparam fx_t INV_B = fx_recip_const(B);
  localparam int unsigned JW = idx_w(C);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_LATCH, S_DIV, S_PROB, S_WRITE, S_LOG, S_LWAIT} state_e;
  state_e st;

  logic [BW-1:0] i;
  logic [JW-1:0] j;
  fx_t  [C-1:0]  erow, yrow, prob;
  fx_t           recip, lacc;

  logic div_start, div_busy, div_done;
  fx_t  div_q;
  fx_div u_div (.clk, .rst_n, .start(div_start), .num(FX_ONE), .den(e_rd_data[0][C]),
                .busy(div_busy), .done(div_done), .quo(div_q));
  assign div_start = (st == S_LATCH);

  logic log_start, log_busy, log_done;
  fx_t  log_y;
  fx_log u_log (.clk, .rst_n, .start(log_start), .x(prob[j]),
                .busy(log_busy), .done(log_done), .y(log_y));
  assign log_start = (st == S_LOG) && (yrow[j] != '0);

  assign busy       = (st != S_IDLE);
  assign e_rd_en    = (st == S_READ);
  assign e_rd_trow  = i;
  assign e_rd_tcol  = '0;
  assign y_rd_en    = (st == S_READ);
  assign y_rd_trow  = i;
  assign y_rd_tcol  = '0;
  assign h2_wr_trow = i;
  assign h2_wr_tcol = '0;
  assign d2_wr_trow = i;
  assign d2_wr_tcol = '0;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      h2_wr_en[0][c]   = (st == S_WRITE);
      d2_wr_en[0][c]   = (st == S_WRITE);
      h2_wr_data[0][c] = prob[c];
      d2_wr_data[0][c] = fx_mul(prob[c] - yrow[c], INV_B);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; j <= '0; erow <= '0; yrow <= '0; prob <= '0;
      recip <= '0; lacc <= '0; loss <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          i <= '0; lacc <= '0; st <= S_READ;
        end
        S_READ: st <= S_LATCH;
        S_LATCH: begin                       // read data valid; divider starts
          for (int c = 0; c < C; c++) begin
            erow[c] <= e_rd_data[0][c];
            yrow[c] <= y_rd_data[0][c];
          end
          st <= S_DIV;
        end
        S_DIV: if (div_done) begin
          recip <= div_q;
          st    <= S_PROB;
        end
        S_PROB: begin
          for (int c = 0; c < C; c++) prob[c] <= fx_mul(erow[c], recip);
          st <= S_WRITE;
        end
        S_WRITE: begin
          j  <= '0;
          st <= S_LOG;
        end
        S_LOG: begin
          if (yrow[j] != '0) st <= S_LWAIT;
          else if (j == JW'(C - 1)) begin
            if (i == BW'(B - 1)) begin
              st <= S_IDLE; done <= 1'b1; loss <= fx_mul(lacc, INV_B);
            end else begin
              i <= i + 1; st <= S_READ;
            end
          end else j <= j + 1;
        end
        default: if (log_done) begin         // S_LWAIT
          lacc <= fx_add(lacc, -fx_mul(yrow[j], log_y));
          if (j == JW'(C - 1)) begin
            if (i == BW'(B - 1)) begin
              st <= S_IDLE; done <= 1'b1;
              loss <= fx_mul(fx_add(lacc, -fx_mul(yrow[j], log_y)), INV_B);
            end else begin
              i <= i + 1; st <= S_READ;
            end
          end else begin
            j <= j + 1; st <= S_LOG;
          end
        end
      endcase
    end
  end
endmodule
