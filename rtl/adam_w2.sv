// adam_w2: backward pass of the output layer ("ADAM on W2").
//
// Works in two phases on one mini-batch.
//  1. Error of the hidden layer, d1[i][k] = relu'(h1[i][k]) *
//     sum_j d2[i][j] * W2[k][j], one (i, k) per clock with C multipliers,
//     using W2 before it is updated.  This is the value the paper passes from
//     the Adam calculation on W2 on to the one on W1; relu'(h1) is 1 where the
//     stored post-ReLU h1 is positive and 0 elsewhere.
//  2. For each hidden neuron k: the gradient row g[j] = sum_i h1[i][k] *
//     d2[i][j] (C multiply-accumulates per clock over the B images), then C
//     Adam lanes (the class dimension completely unrolled, as in the paper)
//     update mW2, vW2 and W2 of row k in place.
// The corrected Adam momentums mW2 and vW2 (vW2 scaled by 2^24, see
// adam_lane) are stored here, in two cyclic_ram arrays
// (L x C, completely partitioned in dimension 2); the paper keeps them on
// the FPGA.
//
// Interface: `clear` zeroes mW2 and vW2 (L clocks) and pulses `done`;
// `start` runs both phases and pulses `done`.  k1, k2 are the step-wise
// correction values of the current mini-batch, stable while busy.  Memory
// reads have one clock of latency.  Timing: B*L + L*(B + 155) + 2 clocks
// from start to done (28,034 at the default sizes).  Phase order and loop
// order are this design's own choices.
// The one-bit tile-column outputs (d2_rd_tcol, w_rd_tcol, w_wr_tcol) are
// always 0: those arrays are one tile wide, and the port is kept for the
// common memory interface.
module adam_w2
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
  input  logic                  clear,
  input  fx_t                   k1,
  input  fx_t                   k2,
  output logic                  busy,
  output logic                  done,
  // h1[B][L], partition (U, U)
  output logic                  h_rd_en,
  output logic [IW-1:0]         h_rd_trow,
  output logic [KTW-1:0]        h_rd_tcol,
  input  fx_t  [U-1:0][U-1:0]   h_rd_data,
  // d2[B][C], partition (1, C)
  output logic                  d2_rd_en,
  output logic [BW-1:0]         d2_rd_trow,
  output logic [0:0]            d2_rd_tcol,
  input  fx_t  [0:0][C-1:0]     d2_rd_data,
  // W2[L][C], partition (1, C)
  output logic                  w_rd_en,
  output logic [KW-1:0]         w_rd_trow,
  output logic [0:0]            w_rd_tcol,
  input  fx_t  [0:0][C-1:0]     w_rd_data,
  output logic [0:0][C-1:0]     w_wr_en,
  output logic [KW-1:0]         w_wr_trow,
  output logic [0:0]            w_wr_tcol,
  output fx_t  [0:0][C-1:0]     w_wr_data,
  // d1[B][L], partition (1, U)
  output logic [0:0][U-1:0]     d1_wr_en,
  output logic [BW-1:0]         d1_wr_trow,
  output logic [KTW-1:0]        d1_wr_tcol,
  output fx_t  [0:0][U-1:0]     d1_wr_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_D1, S_D1_DRAIN, S_G, S_G_DRAIN, S_MREAD, S_LSTART, S_LWAIT, S_WB
  } state_e;
  state_e st;

  localparam int unsigned UW = idx_w(U);

  logic [BW-1:0] i, i_d;
  logic [KW-1:0] k, k_d;
  logic          vld_d, first_d;
  fx_t  [C-1:0]  gacc;

  // ---- Adam moment memories
  logic              mv_rd_en;
  fx_t [0:0][C-1:0]  m_rd_data, v_rd_data, m_wr_data, v_wr_data;
  logic [0:0][C-1:0] mv_wr_en;
  cyclic_ram #(.ROWS(L), .COLS(C), .PR(1), .PC(C)) u_mw2 (
    .clk, .rd_en(mv_rd_en), .rd_trow(k), .rd_tcol(1'b0), .rd_data(m_rd_data),
    .wr_en(mv_wr_en), .wr_trow(k), .wr_tcol(1'b0), .wr_data(m_wr_data));
  cyclic_ram #(.ROWS(L), .COLS(C), .PR(1), .PC(C)) u_vw2 (
    .clk, .rd_en(mv_rd_en), .rd_trow(k), .rd_tcol(1'b0), .rd_data(v_rd_data),
    .wr_en(mv_wr_en), .wr_trow(k), .wr_tcol(1'b0), .wr_data(v_wr_data));

  // ---- Adam lanes, one per class
  logic [C-1:0] ln_done, ln_busy;
  fx_t  [C-1:0] ln_m, ln_v, ln_w;
  for (genvar c = 0; c < C; c++) begin : g_lane
    adam_lane u_lane (
      .clk, .rst_n, .start(st == S_LSTART), .g(gacc[c]),
      .m_in(m_rd_data[0][c]), .v_in(v_rd_data[0][c]), .w_in(w_rd_data[0][c]),
      .k1, .k2, .busy(ln_busy[c]), .done(ln_done[c]),
      .m_out(ln_m[c]), .v_out(ln_v[c]), .w_out(ln_w[c]));
  end

  // ---- memory ports
  assign busy       = (st != S_IDLE);
  assign h_rd_en    = (st == S_D1) || (st == S_G);
  assign h_rd_trow  = IW'(i / BW'(U));
  assign h_rd_tcol  = KTW'(k / KW'(U));
  assign d2_rd_en   = (st == S_D1) || (st == S_G);
  assign d2_rd_trow = i;
  assign d2_rd_tcol = '0;
  assign w_rd_en    = (st == S_D1) || (st == S_MREAD);
  assign w_rd_trow  = k;
  assign w_rd_tcol  = '0;
  assign w_wr_trow  = k;
  assign w_wr_tcol  = '0;
  assign mv_rd_en   = (st == S_MREAD);
  assign d1_wr_trow = i_d;
  assign d1_wr_tcol = KTW'(k_d / KW'(U));

  fx_t h_sel, d1_sum;
  always_comb begin
    h_sel  = h_rd_data[UW'(i_d % BW'(U))][UW'(k_d % KW'(U))];
    d1_sum = '0;
    for (int c = 0; c < C; c++) d1_sum = fx_add(d1_sum, fx_mul(d2_rd_data[0][c], w_rd_data[0][c]));
    for (int u = 0; u < U; u++) begin
      d1_wr_en[0][u]   = (st inside {S_D1, S_D1_DRAIN}) && vld_d && (UW'(k_d % KW'(U)) == UW'(u));
      d1_wr_data[0][u] = (h_sel > 0) ? d1_sum : '0;
    end
    for (int c = 0; c < C; c++) begin
      mv_wr_en[0][c]  = (st == S_CLR) || (st == S_WB);
      w_wr_en[0][c]   = (st == S_WB);
      m_wr_data[0][c] = (st == S_CLR) ? '0 : ln_m[c];
      v_wr_data[0][c] = (st == S_CLR) ? '0 : ln_v[c];
      w_wr_data[0][c] = ln_w[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; k <= '0; i_d <= '0; k_d <= '0;
      vld_d <= 1'b0; first_d <= 1'b0; gacc <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      vld_d   <= (st == S_D1) || (st == S_G);
      first_d <= (st == S_G) && (i == 0);
      i_d     <= i;
      k_d     <= k;
      if (vld_d && (st inside {S_G, S_G_DRAIN}))
        for (int c = 0; c < C; c++)
          gacc[c] <= fx_add(first_d ? '0 : gacc[c], fx_mul(h_sel, d2_rd_data[0][c]));
      case (st)
        S_IDLE: begin
          i <= '0; k <= '0;
          if (clear)      st <= S_CLR;
          else if (start) st <= S_D1;
        end
        S_CLR: begin
          if (k == KW'(L - 1)) begin k <= '0; st <= S_IDLE; done <= 1'b1; end
          else k <= k + 1;
        end
        // phase 1: d1 = relu'(h1) * (d2 * W2^T)
        S_D1: begin
          if (k == KW'(L - 1)) begin
            k <= '0;
            if (i == BW'(B - 1)) begin i <= '0; st <= S_D1_DRAIN; end
            else i <= i + 1;
          end else k <= k + 1;
        end
        S_D1_DRAIN: st <= S_G;
        // phase 2: gradient row k, then Adam on row k
        S_G: begin
          if (i == BW'(B - 1)) begin i <= '0; st <= S_G_DRAIN; end
          else i <= i + 1;
        end
        S_G_DRAIN: st <= S_MREAD;
        S_MREAD:   st <= S_LSTART;
        S_LSTART:  st <= S_LWAIT;
        S_LWAIT:   if (ln_done[0]) st <= S_WB;
        default: begin                          // S_WB
          if (k == KW'(L - 1)) begin
            k <= '0; st <= S_IDLE; done <= 1'b1;
          end else begin
            k <= k + 1; st <= S_G;
          end
        end
      endcase
    end
  end
endmodule
