// fc_relu: fully connected layer with ReLU, h1 = max(0, v * W1).
//
// This is the paper's Listing 2: the batch loop (i) and the neuron loop (j)
// are unrolled by U = 4 each, so a 4 x 4 tile of h1 is accumulated by 16
// multiply-accumulate units while k runs over the POOLMAPLENGTH inputs, one
// k per clock (the pipelined inner loop).  Each clock reads the column
// v[i0..i0+3][k] from the v memory (cyclic partition 4 in dimension 1) and
// the row W1[k][j0..j0+3] from the W1 memory (cyclic partition 4 in
// dimension 2).  As in the paper, ReLU is applied as the tile is finished,
// and the tile is written to h1 (partitioned 4 x 4) in one clock.
//
// Interface: pulse `start`; `done` pulses when all of h1 is written.
// Memory reads have one clock of latency.  Timing: (B/U)*(L/U)*(P+2)+1
// clocks from start to done (44,033 at the default sizes).  The tile order
// and the one-clock drain/write per tile are this design's own choices.
module fc_relu
  import cnn_pkg::*;
#(
  parameter int unsigned B = BATCHSIZE,
  parameter int unsigned P = POOLMAPLENGTH,
  parameter int unsigned L = LAYERSIZE,
  parameter int unsigned U = UNROLL,
  localparam int unsigned IW = idx_w(B / U),
  localparam int unsigned KW = idx_w(P),
  localparam int unsigned JW = idx_w(L / U)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // v[B][P], partition (U, 1)
  output logic                 v_rd_en,
  output logic [IW-1:0]        v_rd_trow,
  output logic [KW-1:0]        v_rd_tcol,
  input  fx_t  [U-1:0][0:0]    v_rd_data,
  // W1[P][L], partition (1, U)
  output logic                 w_rd_en,
  output logic [KW-1:0]        w_rd_trow,
  output logic [JW-1:0]        w_rd_tcol,
  input  fx_t  [0:0][U-1:0]    w_rd_data,
  // h1[B][L], partition (U, U)
  output logic [U-1:0][U-1:0]  h_wr_en,
  output logic [IW-1:0]        h_wr_trow,
  output logic [JW-1:0]        h_wr_tcol,
  output fx_t  [U-1:0][U-1:0]  h_wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_WRITE} state_e;
  state_e st;

  logic [IW-1:0] it;
  logic [JW-1:0] jt;
  logic [KW-1:0] k;
  logic          vld_d, first_d;
  fx_t [U-1:0][U-1:0] acc;

  assign busy      = (st != S_IDLE);
  assign v_rd_en   = (st == S_RUN);
  assign v_rd_trow = it;
  assign v_rd_tcol = k;
  assign w_rd_en   = (st == S_RUN);
  assign w_rd_trow = k;
  assign w_rd_tcol = jt;
  assign h_wr_trow = it;
  assign h_wr_tcol = jt;

  always_comb begin
    for (int a = 0; a < U; a++)
      for (int b = 0; b < U; b++) begin
        h_wr_en[a][b]   = (st == S_WRITE);
        h_wr_data[a][b] = (acc[a][b] > 0) ? acc[a][b] : '0;   // ReLU
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; it <= '0; jt <= '0; k <= '0;
      vld_d <= 1'b0; first_d <= 1'b0; acc <= '0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      vld_d <= (st == S_RUN);
      first_d <= (st == S_RUN) && (k == 0);
      // 16 MACs on the data read in the previous clock
      if (vld_d)
        for (int a = 0; a < U; a++)
          for (int b = 0; b < U; b++)
            acc[a][b] <= fx_add(first_d ? '0 : acc[a][b],
                                fx_mul(v_rd_data[a][0], w_rd_data[0][b]));
      case (st)
        S_IDLE: if (start) begin
          it <= '0; jt <= '0; k <= '0; st <= S_RUN;
        end
        S_RUN: begin
          if (k == KW'(P - 1)) begin k <= '0; st <= S_DRAIN; end
          else k <= k + 1;
        end
        S_DRAIN: st <= S_WRITE;
        default: begin                      // S_WRITE
          st <= S_RUN;
          if (jt == JW'(L / U - 1)) begin
            jt <= '0;
            if (it == IW'(B / U - 1)) begin
              it <= '0; st <= S_IDLE; done <= 1'b1;
            end else it <= it + 1;
          end else jt <= jt + 1;
        end
      endcase
    end
  end
endmodule
