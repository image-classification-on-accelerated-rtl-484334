// output_layer: output layer z = h1 * W2, its exponentials
// e = exp(z - max(z)) and the per-image sum of the exponentials.
//
// The paper's Listing 3: the batch loop is unrolled by U = 4 and the class
// loop completely (C = 10), so U x C = 40 multiply-accumulate units build a
// 4 x 10 tile of z while k runs over the LAYERSIZE hidden neurons, one k per
// clock.  Each clock reads the 4 x 4 h1 tile that holds h1[i0..i0+3][k]
// (h1 is partitioned 4 x 4) and the row W2[k][0..9] (W2 completely
// partitioned in dimension 2).  As the paper states, the sum of all
// exponentials needed by the softmax is formed here, while the output layer
// is computed: after a tile is accumulated, U exponential units (one per
// image of the tile) work through the C classes, summing as they go.  Each
// image's largest logit is subtracted first, which leaves the softmax
// e / sum(e) unchanged but keeps every exponential in (0, 1], so large
// logits cannot saturate it (this design's own choice).  Each
// image row {e[0..C-1], sum} is then written to the e memory, which has
// C + 1 columns (column C holds the sum), completely partitioned.
//
// Interface: pulse `start`; `done` pulses when all B rows are written.
// Memory reads have one clock of latency.  Timing per tile of U images:
// L + 2 MAC and maximum clocks, C * 15 exponential clocks and U write
// clocks: (B/U) * (L + 2 + 15*C + U) + 1 clocks in all, 2,273 at the
// default sizes.
// Running the exponentials per tile after the MACs, with U units, is this
// design's own choice.
// The one-bit tile-column outputs (w_rd_tcol, e_wr_tcol) are always 0:
// those arrays are one tile wide, and the port is kept for the common
// memory interface.
module output_layer
  import cnn_pkg::*;
#(
  parameter int unsigned B = BATCHSIZE,
  parameter int unsigned L = LAYERSIZE,
  parameter int unsigned C = CLASSSIZE,
  parameter int unsigned U = UNROLL,
  localparam int unsigned IW  = idx_w(B / U),
  localparam int unsigned BW  = idx_w(B),
  localparam int unsigned KW  = idx_w(L),
  localparam int unsigned KTW = idx_w(L / U)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // h1[B][L], partition (U, U)
  output logic                  h_rd_en,
  output logic [IW-1:0]         h_rd_trow,
  output logic [KTW-1:0]        h_rd_tcol,
  input  fx_t  [U-1:0][U-1:0]   h_rd_data,
  // W2[L][C], partition (1, C)
  output logic                  w_rd_en,
  output logic [KW-1:0]         w_rd_trow,
  output logic [0:0]            w_rd_tcol,
  input  fx_t  [0:0][C-1:0]     w_rd_data,
  // e[B][C+1], partition (1, C+1)
  output logic [0:0][C:0]       e_wr_en,
  output logic [BW-1:0]         e_wr_trow,
  output logic [0:0]            e_wr_tcol,
  output fx_t  [0:0][C:0]       e_wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_MAX, S_EXP, S_EWAIT, S_WRITE} state_e;
  state_e st;

  localparam int unsigned JW = idx_w(C);
  localparam int unsigned AW = idx_w(U);

  logic [IW-1:0] it;
  logic [KW-1:0] k;
  logic [JW-1:0] j;
  logic [AW-1:0] a_wr;
  logic          vld_d, first_d;
  logic [idx_w(U)-1:0] kk_d;
  fx_t [U-1:0][C-1:0] acc;
  fx_t [U-1:0][C-1:0] ev;
  fx_t [U-1:0]        esum;
  fx_t [U-1:0]        zmax, zmax_c;

  // largest logit of each image of the tile
  always_comb
    for (int a = 0; a < U; a++) begin
      zmax_c[a] = acc[a][0];
      for (int c = 1; c < C; c++)
        if (acc[a][c] > zmax_c[a]) zmax_c[a] = acc[a][c];
    end

  logic [U-1:0] ex_start, ex_done, ex_busy;
  fx_t  [U-1:0] ex_y;
  fx_t  [U-1:0] ex_x;

  for (genvar a = 0; a < U; a++) begin : g_exp
    fx_exp u_exp (.clk, .rst_n, .start(ex_start[a]), .x(ex_x[a]),
                  .busy(ex_busy[a]), .done(ex_done[a]), .y(ex_y[a]));
    // z - max(z) <= 0, saturated at the bottom of the range
    logic signed [FX_W:0] zd;
    assign zd      = {acc[a][j][FX_W-1], acc[a][j]} - {zmax[a][FX_W-1], zmax[a]};
    assign ex_x[a] = (zd < $signed({2'b11, {(FX_W - 1){1'b0}}})) ? FX_MIN : zd[FX_W-1:0];
    assign ex_start[a] = (st == S_EXP);
  end

  assign busy      = (st != S_IDLE);
  assign h_rd_en   = (st == S_RUN);
  assign h_rd_trow = it;
  assign h_rd_tcol = KTW'(k / KW'(U));
  assign w_rd_en   = (st == S_RUN);
  assign w_rd_trow = k;
  assign w_rd_tcol = '0;
  assign e_wr_trow = BW'(it) * BW'(U) + BW'(a_wr);
  assign e_wr_tcol = '0;

  always_comb begin
    for (int c = 0; c <= C; c++) begin
      e_wr_en[0][c]   = (st == S_WRITE);
      e_wr_data[0][c] = (c == C) ? esum[a_wr] : ev[a_wr][(c < C) ? c : 0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; it <= '0; k <= '0; j <= '0; a_wr <= '0;
      vld_d <= 1'b0; first_d <= 1'b0; kk_d <= '0;
      acc <= '0; ev <= '0; esum <= '0; zmax <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      vld_d   <= (st == S_RUN);
      first_d <= (st == S_RUN) && (k == 0);
      kk_d    <= idx_w(U)'(k % KW'(U));
      if (vld_d)
        for (int a = 0; a < U; a++)
          for (int c = 0; c < C; c++)
            acc[a][c] <= fx_add(first_d ? '0 : acc[a][c],
                                fx_mul(h_rd_data[a][kk_d], w_rd_data[0][c]));
      case (st)
        S_IDLE: if (start) begin
          it <= '0; k <= '0; st <= S_RUN;
        end
        S_RUN: begin
          if (k == KW'(L - 1)) begin k <= '0; st <= S_DRAIN; end
          else k <= k + 1;
        end
        S_DRAIN: st <= S_MAX;               // last product accumulates
        S_MAX: begin
          zmax <= zmax_c; j <= '0; esum <= '0; st <= S_EXP;
        end
        S_EXP: st <= S_EWAIT;
        S_EWAIT: if (ex_done[0]) begin
          for (int a = 0; a < U; a++) begin
            ev[a][j] <= ex_y[a];
            esum[a]  <= fx_add(esum[a], ex_y[a]);
          end
          if (j == JW'(C - 1)) begin a_wr <= '0; st <= S_WRITE; end
          else begin j <= j + 1; st <= S_EXP; end
        end
        default: begin                      // S_WRITE
          if (a_wr == AW'(U - 1)) begin
            a_wr <= '0;
            if (it == IW'(B / U - 1)) begin
              it <= '0; st <= S_IDLE; done <= 1'b1;
            end else begin
              it <= it + 1; st <= S_RUN;
            end
          end else a_wr <= a_wr + 1;
        end
      endcase
    end
  end
endmodule
