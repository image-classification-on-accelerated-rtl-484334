// adam_w1: backward pass of the fully connected layer ("ADAM on W1").
//
// For each tile of U = 4 weights W1[p][j0..j0+3] (W1 cyclically partitioned
// by 4 in dimension 2) the gradient g[u] = sum_i v[i][p] * d1[i][j0+u] is
// accumulated over the B images of the mini-batch by U multiply-accumulate
// units, one image per clock.  d1 is the hidden-layer error that adam_w2
// computed and passed on, as in the paper.  U Adam lanes then update the
// tile of mW1, vW1 and W1 in place, with the step-wise correction values
// k1, k2 that were computed once for the mini-batch.  The corrected Adam
// momentums mW1 and vW1 (vW1 scaled by 2^24, see adam_lane) are stored here
// in two cyclic_ram arrays (P x L, partition 4 in dimension 2).
//
// Interface: `clear` zeroes mW1 and vW1 (P*L/U clocks) and pulses `done`;
// `start` updates all of W1 and pulses `done`.  k1, k2 stable while busy.
// Memory reads have one clock of latency.  Timing: P*(L/U)*(B+155) + 1
// clocks from start to done (1,011,297 at the default sizes); the
// sequential square root and divider of the lanes dominate.  Loop order and
// the number of lanes (the paper's factor 4) are this design's choices.
module adam_w1
  import cnn_pkg::*;
#(
  parameter int unsigned B = BATCHSIZE,
  parameter int unsigned P = POOLMAPLENGTH,
  parameter int unsigned L = LAYERSIZE,
  parameter int unsigned U = UNROLL,
  localparam int unsigned IW = idx_w(B / U),
  localparam int unsigned BW = idx_w(B),
  localparam int unsigned KW = idx_w(P),
  localparam int unsigned JW = idx_w(L / U)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 clear,
  input  fx_t                  k1,
  input  fx_t                  k2,
  output logic                 busy,
  output logic                 done,
  // v[B][P], partition (U, 1)
  output logic                 v_rd_en,
  output logic [IW-1:0]        v_rd_trow,
  output logic [KW-1:0]        v_rd_tcol,
  input  fx_t  [U-1:0][0:0]    v_rd_data,
  // d1[B][L], partition (1, U)
  output logic                 d1_rd_en,
  output logic [BW-1:0]        d1_rd_trow,
  output logic [JW-1:0]        d1_rd_tcol,
  input  fx_t  [0:0][U-1:0]    d1_rd_data,
  // W1[P][L], partition (1, U)
  output logic                 w_rd_en,
  output logic [KW-1:0]        w_rd_trow,
  output logic [JW-1:0]        w_rd_tcol,
  input  fx_t  [0:0][U-1:0]    w_rd_data,
  output logic [0:0][U-1:0]    w_wr_en,
  output logic [KW-1:0]        w_wr_trow,
  output logic [JW-1:0]        w_wr_tcol,
  output fx_t  [0:0][U-1:0]    w_wr_data
);
  typedef enum logic [2:0] {
    S_IDLE, S_CLR, S_G, S_G_DRAIN, S_MREAD, S_LSTART, S_LWAIT, S_WB
  } state_e;
  state_e st;

  localparam int unsigned UW = idx_w(U);

  logic [BW-1:0] i, i_d;
  logic [KW-1:0] p;
  logic [JW-1:0] jt;
  logic          vld_d, first_d;
  fx_t  [U-1:0]  gacc;

  // ---- Adam moment memories
  logic              mv_rd_en;
  fx_t [0:0][U-1:0]  m_rd_data, vm_rd_data, m_wr_data, v_wr_data;
  logic [0:0][U-1:0] mv_wr_en;
  cyclic_ram #(.ROWS(P), .COLS(L), .PR(1), .PC(U)) u_mw1 (
    .clk, .rd_en(mv_rd_en), .rd_trow(p), .rd_tcol(jt), .rd_data(m_rd_data),
    .wr_en(mv_wr_en), .wr_trow(p), .wr_tcol(jt), .wr_data(m_wr_data));
  cyclic_ram #(.ROWS(P), .COLS(L), .PR(1), .PC(U)) u_vw1 (
    .clk, .rd_en(mv_rd_en), .rd_trow(p), .rd_tcol(jt), .rd_data(vm_rd_data),
    .wr_en(mv_wr_en), .wr_trow(p), .wr_tcol(jt), .wr_data(v_wr_data));

  // ---- Adam lanes
  logic [U-1:0] ln_done, ln_busy;
  fx_t  [U-1:0] ln_m, ln_v, ln_w;
  for (genvar u = 0; u < U; u++) begin : g_lane
    adam_lane u_lane (
      .clk, .rst_n, .start(st == S_LSTART), .g(gacc[u]),
      .m_in(m_rd_data[0][u]), .v_in(vm_rd_data[0][u]), .w_in(w_rd_data[0][u]),
      .k1, .k2, .busy(ln_busy[u]), .done(ln_done[u]),
      .m_out(ln_m[u]), .v_out(ln_v[u]), .w_out(ln_w[u]));
  end

  assign busy       = (st != S_IDLE);
  assign v_rd_en    = (st == S_G);
  assign v_rd_trow  = IW'(i / BW'(U));
  assign v_rd_tcol  = p;
  assign d1_rd_en   = (st == S_G);
  assign d1_rd_trow = i;
  assign d1_rd_tcol = jt;
  assign w_rd_en    = (st == S_MREAD);
  assign w_rd_trow  = p;
  assign w_rd_tcol  = jt;
  assign w_wr_trow  = p;
  assign w_wr_tcol  = jt;
  assign mv_rd_en   = (st == S_MREAD);

  fx_t v_sel;
  always_comb begin
    v_sel = v_rd_data[UW'(i_d % BW'(U))][0];
    for (int u = 0; u < U; u++) begin
      mv_wr_en[0][u]  = (st == S_CLR) || (st == S_WB);
      w_wr_en[0][u]   = (st == S_WB);
      m_wr_data[0][u] = (st == S_CLR) ? '0 : ln_m[u];
      v_wr_data[0][u] = (st == S_CLR) ? '0 : ln_v[u];
      w_wr_data[0][u] = ln_w[u];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; i_d <= '0; p <= '0; jt <= '0;
      vld_d <= 1'b0; first_d <= 1'b0; gacc <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      vld_d   <= (st == S_G);
      first_d <= (st == S_G) && (i == 0);
      i_d     <= i;
      if (vld_d)
        for (int u = 0; u < U; u++)
          gacc[u] <= fx_add(first_d ? '0 : gacc[u], fx_mul(v_sel, d1_rd_data[0][u]));
      case (st)
        S_IDLE: begin
          i <= '0; p <= '0; jt <= '0;
          if (clear)      st <= S_CLR;
          else if (start) st <= S_G;
        end
        S_CLR: begin
          if (jt == JW'(L / U - 1)) begin
            jt <= '0;
            if (p == KW'(P - 1)) begin p <= '0; st <= S_IDLE; done <= 1'b1; end
            else p <= p + 1;
          end else jt <= jt + 1;
        end
        S_G: begin
          if (i == BW'(B - 1)) begin i <= '0; st <= S_G_DRAIN; end
          else i <= i + 1;
        end
        S_G_DRAIN: st <= S_MREAD;
        S_MREAD:   st <= S_LSTART;
        S_LSTART:  st <= S_LWAIT;
        S_LWAIT:   if (ln_done[0]) st <= S_WB;
        default: begin                          // S_WB
          st <= S_G;
          if (jt == JW'(L / U - 1)) begin
            jt <= '0;
            if (p == KW'(P - 1)) begin p <= '0; st <= S_IDLE; done <= 1'b1; end
            else p <= p + 1;
          end else jt <= jt + 1;
        end
      endcase
    end
  end
endmodule
