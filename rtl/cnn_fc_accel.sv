// cnn_fc_accel: FPGA side of the CNN training accelerator (top level).
//
// The host convolves and pools each mini-batch of images and sends the
// flattened result v (B x P) and the target class vectors outActual (B x C)
// through the AXI4-Lite slave.  On `start` the accelerator runs the forward
// pass, fully connected layer with ReLU (fc_relu), output layer with the
// exponentials and their sum (output_layer), softmax and cross-entropy loss
// (softmax_loss), and leaves the class probabilities h2 for the host.  If
// isTraining was set with start it goes on with the backward pass: the
// step-wise Adam correction factors are computed once (adam_bias_corr), then
// "ADAM on W2" (adam_w2) updates W2 and hands the hidden-layer error d1 to
// "ADAM on W1" (adam_w1), which updates W1.  Weights and Adam moments stay on
// the chip between mini-batches; the host writes the initial weights.
//
// Every array is a cyclic_ram with the paper's cyclic partition (factor 4 in
// the batch, pooled-feature and hidden dimensions, complete in the class
// dimension).  This top owns v, outActual, h1, e (exponentials and sums),
// h2, d2, d1, W1 and W2 and gives each memory's ports to the engine of the
// current phase, or to the host when the accelerator is idle.
//
// Host address map (byte address, 64-bit words):
//   addr[22:19] region, addr[18:11] row, addr[10:3] column
//   region 0  registers, by column:
//             0 CTRL  write: bit0 start, bit1 isTraining, bit2 clear optimiser
//                     read:  bit0 busy, bit1 done, bit2 isTraining
//             1 STEP  read:  Adam step count t
//             2 LOSS  read:  mean cross-entropy of the last mini-batch (Q32.32)
//   region 1 v[B][P] (r/w)     2 outActual[B][C] (r/w)   3 h2[B][C] (read)
//   region 4 W1[P][L] (r/w)    5 W2[L][C] (r/w)
// Array accesses while busy, to unknown regions or outside an array, and
// writes with partial strobes get SLVERR.  All values are Q32.32.
// The address map, the register layout, the clear command and the
// phase-by-phase sequencing are this design's own; the paper gives the
// blocks, their order, the isTraining switch and the arrays.
//
// Timing: the phases run one after another, each engine started by a
// one-clock pulse on entry to its phase.  An operation takes the sum of the
// engine latencies plus a clock or two per phase change: at the default
// sizes 50,722 clocks of engine time for inference (fc_relu 43,777,
// output_layer 2,273, softmax_loss 4,672 with one-hot targets) and
// 1,090,253 for a training step (adding 200 for the correction factors,
// 28,034 for Adam on W2 and 1,011,297 for Adam on W1).  AXI4-Lite accesses
// take 3 clocks from handshake to response.
module cnn_fc_accel
  import cnn_pkg::*;
#(
  parameter int unsigned B = BATCHSIZE,
  parameter int unsigned P = POOLMAPLENGTH,
  parameter int unsigned L = LAYERSIZE,
  parameter int unsigned C = CLASSSIZE,
  parameter int unsigned U = UNROLL,
  parameter int unsigned ADDR_W = 23
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [63:0]       s_axil_wdata,
  input  logic [7:0]        s_axil_wstrb,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [63:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              done_irq        // one-clock pulse when an operation ends
);
  // ---------------------------------------------------------------- widths
  localparam int unsigned IW  = idx_w(B / U);   // batch tile
  localparam int unsigned BW  = idx_w(B);       // batch
  localparam int unsigned PW  = idx_w(P);       // pooled feature
  localparam int unsigned LW  = idx_w(L);       // hidden neuron
  localparam int unsigned LTW = idx_w(L / U);   // hidden tile
  localparam int unsigned UW  = idx_w(U);

  // ---------------------------------------------------------------- host bus
  logic              hreq, hwe, hrsp, herr;
  logic [ADDR_W-1:0] haddr;
  logic [63:0]       hwdata, hrdata;
  logic [7:0]        hwstrb;

  axil_slave #(.ADDR_W(ADDR_W), .DATA_W(64)) u_axil (
    .clk, .rst_n,
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready), .s_wdata(s_axil_wdata),
    .s_wstrb(s_axil_wstrb), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_bresp(s_axil_bresp), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_araddr(s_axil_araddr), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .req(hreq), .req_we(hwe), .req_addr(haddr), .req_wdata(hwdata), .req_wstrb(hwstrb),
    .rsp_valid(hrsp), .rsp_rdata(hrdata), .rsp_err(herr));

  logic [3:0] hreg;
  logic [7:0] hrow, hcol;
  assign hreg = haddr[22:19];
  assign hrow = haddr[18:11];
  assign hcol = haddr[10:3];

  localparam logic [3:0] R_REGS = 4'd0, R_V = 4'd1, R_Y = 4'd2, R_H2 = 4'd3,
                         R_W1 = 4'd4, R_W2 = 4'd5;

  // ---------------------------------------------------------------- control
  phase_e ph;
  logic   is_training, done_flag;
  logic   fc_start, ol_start, smx_start, corr_step, aw2_start, aw1_start, opt_clear;
  logic   fc_done, ol_done, smx_done, corr_done, aw2_done, aw1_done;
  logic   fc_busy, ol_busy, smx_busy, corr_busy, aw2_busy, aw1_busy;
  logic   clr_w1_seen, clr_w2_seen;
  fx_t    k1, k2, loss;
  logic [31:0] step_t;

  logic host_idle;
  assign host_idle = (ph == PH_IDLE);

  // host request decode
  logic in_range, wr_ok, rd_ok, h_wr, h_rd;
  always_comb begin
    case (hreg)
      R_REGS:     in_range = (hcol < 8'd3) && (hrow == 8'd0);
      R_V:        in_range = (hrow < 8'(B)) && (hcol < 8'(P));
      R_Y, R_H2:  in_range = (hrow < 8'(B)) && (hcol < 8'(C));
      R_W1:       in_range = (hrow < 8'(P)) && (hcol < 8'(L));
      R_W2:       in_range = (hrow < 8'(L)) && (hcol < 8'(C));
      default:    in_range = 1'b0;
    endcase
    wr_ok = in_range && (hwstrb == 8'hFF) && (hreg != R_H2) &&
            ((hreg == R_REGS) ? (hcol == 8'd0) : host_idle);
    rd_ok = in_range && ((hreg == R_REGS) || host_idle);
    h_wr  = hreq && hwe && wr_ok;
    h_rd  = hreq && !hwe && rd_ok;
  end

  logic ctrl_start, ctrl_clear;
  assign ctrl_start = h_wr && (hreg == R_REGS) && hwdata[0] && host_idle;
  assign ctrl_clear = h_wr && (hreg == R_REGS) && hwdata[2] && !hwdata[0] && host_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE; is_training <= 1'b0; done_flag <= 1'b0; done_irq <= 1'b0;
      clr_w1_seen <= 1'b0; clr_w2_seen <= 1'b0;
    end else begin
      done_irq <= 1'b0;
      case (ph)
        PH_IDLE: begin
          if (ctrl_start) begin
            is_training <= hwdata[1];
            done_flag   <= 1'b0;
            ph          <= PH_FC;
          end else if (ctrl_clear) begin
            done_flag   <= 1'b0;
            clr_w1_seen <= 1'b0;
            clr_w2_seen <= 1'b0;
            ph          <= PH_CLEAR;
          end
        end
        PH_CLEAR: begin
          if (aw1_done) clr_w1_seen <= 1'b1;
          if (aw2_done) clr_w2_seen <= 1'b1;
          if ((clr_w1_seen || aw1_done) && (clr_w2_seen || aw2_done)) begin
            ph <= PH_IDLE; done_flag <= 1'b1; done_irq <= 1'b1;
          end
        end
        PH_FC:  if (fc_done) ph <= PH_OUT;
        PH_OUT: if (ol_done) ph <= PH_SMX;
        PH_SMX: if (smx_done) begin
          if (is_training) ph <= PH_CORR;
          else begin ph <= PH_IDLE; done_flag <= 1'b1; done_irq <= 1'b1; end
        end
        PH_CORR: if (corr_done) ph <= PH_AW2;
        PH_AW2:  if (aw2_done)  ph <= PH_AW1;
        default: if (aw1_done) begin                // PH_AW1
          ph <= PH_IDLE; done_flag <= 1'b1; done_irq <= 1'b1;
        end
      endcase
    end
  end

  // one-clock start pulses on phase entry
  phase_e ph_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ph_q <= PH_IDLE; else ph_q <= ph;
  logic enter;
  assign enter     = (ph != ph_q);
  assign fc_start  = enter && (ph == PH_FC);
  assign ol_start  = enter && (ph == PH_OUT);
  assign smx_start = enter && (ph == PH_SMX);
  assign corr_step = enter && (ph == PH_CORR);
  assign aw2_start = enter && (ph == PH_AW2);
  assign aw1_start = enter && (ph == PH_AW1);
  assign opt_clear = enter && (ph == PH_CLEAR);

  // ---------------------------------------------------------------- memories
  // v[B][P], partition (U,1)
  logic v_re; logic [IW-1:0] v_rtr; logic [PW-1:0] v_rtc; fx_t [U-1:0][0:0] v_rd;
  logic [U-1:0][0:0] v_we; logic [IW-1:0] v_wtr; logic [PW-1:0] v_wtc; fx_t [U-1:0][0:0] v_wd;
  cyclic_ram #(.ROWS(B), .COLS(P), .PR(U), .PC(1)) u_v (
    .clk, .rd_en(v_re), .rd_trow(v_rtr), .rd_tcol(v_rtc), .rd_data(v_rd),
    .wr_en(v_we), .wr_trow(v_wtr), .wr_tcol(v_wtc), .wr_data(v_wd));
  // outActual[B][C], partition (1,C)
  logic y_re; logic [BW-1:0] y_rtr; fx_t [0:0][C-1:0] y_rd;
  logic [0:0][C-1:0] y_we; logic [BW-1:0] y_wtr; fx_t [0:0][C-1:0] y_wd;
  cyclic_ram #(.ROWS(B), .COLS(C), .PR(1), .PC(C)) u_y (
    .clk, .rd_en(y_re), .rd_trow(y_rtr), .rd_tcol(1'b0), .rd_data(y_rd),
    .wr_en(y_we), .wr_trow(y_wtr), .wr_tcol(1'b0), .wr_data(y_wd));
  // h1[B][L], partition (U,U)
  logic h1_re; logic [IW-1:0] h1_rtr; logic [LTW-1:0] h1_rtc; fx_t [U-1:0][U-1:0] h1_rd;
  logic [U-1:0][U-1:0] h1_we; logic [IW-1:0] h1_wtr; logic [LTW-1:0] h1_wtc; fx_t [U-1:0][U-1:0] h1_wd;
  cyclic_ram #(.ROWS(B), .COLS(L), .PR(U), .PC(U)) u_h1 (
    .clk, .rd_en(h1_re), .rd_trow(h1_rtr), .rd_tcol(h1_rtc), .rd_data(h1_rd),
    .wr_en(h1_we), .wr_trow(h1_wtr), .wr_tcol(h1_wtc), .wr_data(h1_wd));
  // e[B][C+1] (exponentials and their sum), partition (1,C+1)
  logic e_re; logic [BW-1:0] e_rtr; fx_t [0:0][C:0] e_rd;
  logic [0:0][C:0] e_we; logic [BW-1:0] e_wtr; fx_t [0:0][C:0] e_wd;
  cyclic_ram #(.ROWS(B), .COLS(C + 1), .PR(1), .PC(C + 1)) u_e (
    .clk, .rd_en(e_re), .rd_trow(e_rtr), .rd_tcol(1'b0), .rd_data(e_rd),
    .wr_en(e_we), .wr_trow(e_wtr), .wr_tcol(1'b0), .wr_data(e_wd));
  // h2[B][C], partition (1,C)
  logic h2_re; logic [BW-1:0] h2_rtr; fx_t [0:0][C-1:0] h2_rd;
  logic [0:0][C-1:0] h2_we; logic [BW-1:0] h2_wtr; fx_t [0:0][C-1:0] h2_wd;
  cyclic_ram #(.ROWS(B), .COLS(C), .PR(1), .PC(C)) u_h2 (
    .clk, .rd_en(h2_re), .rd_trow(h2_rtr), .rd_tcol(1'b0), .rd_data(h2_rd),
    .wr_en(h2_we), .wr_trow(h2_wtr), .wr_tcol(1'b0), .wr_data(h2_wd));
  // d2[B][C], partition (1,C)
  logic d2_re; logic [BW-1:0] d2_rtr; fx_t [0:0][C-1:0] d2_rd;
  logic [0:0][C-1:0] d2_we; logic [BW-1:0] d2_wtr; fx_t [0:0][C-1:0] d2_wd;
  cyclic_ram #(.ROWS(B), .COLS(C), .PR(1), .PC(C)) u_d2 (
    .clk, .rd_en(d2_re), .rd_trow(d2_rtr), .rd_tcol(1'b0), .rd_data(d2_rd),
    .wr_en(d2_we), .wr_trow(d2_wtr), .wr_tcol(1'b0), .wr_data(d2_wd));
  // d1[B][L], partition (1,U)
  logic d1_re; logic [BW-1:0] d1_rtr; logic [LTW-1:0] d1_rtc; fx_t [0:0][U-1:0] d1_rd;
  logic [0:0][U-1:0] d1_we; logic [BW-1:0] d1_wtr; logic [LTW-1:0] d1_wtc; fx_t [0:0][U-1:0] d1_wd;
  cyclic_ram #(.ROWS(B), .COLS(L), .PR(1), .PC(U)) u_d1 (
    .clk, .rd_en(d1_re), .rd_trow(d1_rtr), .rd_tcol(d1_rtc), .rd_data(d1_rd),
    .wr_en(d1_we), .wr_trow(d1_wtr), .wr_tcol(d1_wtc), .wr_data(d1_wd));
  // W1[P][L], partition (1,U)
  logic w1_re; logic [PW-1:0] w1_rtr; logic [LTW-1:0] w1_rtc; fx_t [0:0][U-1:0] w1_rd;
  logic [0:0][U-1:0] w1_we; logic [PW-1:0] w1_wtr; logic [LTW-1:0] w1_wtc; fx_t [0:0][U-1:0] w1_wd;
  cyclic_ram #(.ROWS(P), .COLS(L), .PR(1), .PC(U)) u_w1 (
    .clk, .rd_en(w1_re), .rd_trow(w1_rtr), .rd_tcol(w1_rtc), .rd_data(w1_rd),
    .wr_en(w1_we), .wr_trow(w1_wtr), .wr_tcol(w1_wtc), .wr_data(w1_wd));
  // W2[L][C], partition (1,C)
  logic w2_re; logic [LW-1:0] w2_rtr; fx_t [0:0][C-1:0] w2_rd;
  logic [0:0][C-1:0] w2_we; logic [LW-1:0] w2_wtr; fx_t [0:0][C-1:0] w2_wd;
  cyclic_ram #(.ROWS(L), .COLS(C), .PR(1), .PC(C)) u_w2 (
    .clk, .rd_en(w2_re), .rd_trow(w2_rtr), .rd_tcol(1'b0), .rd_data(w2_rd),
    .wr_en(w2_we), .wr_trow(w2_wtr), .wr_tcol(1'b0), .wr_data(w2_wd));

  // ---------------------------------------------------------------- engines
  logic fc_v_re, fc_w_re; logic [IW-1:0] fc_v_tr; logic [PW-1:0] fc_v_tc, fc_w_tr;
  logic [LTW-1:0] fc_w_tc; logic [U-1:0][U-1:0] fc_h_we; logic [IW-1:0] fc_h_tr;
  logic [LTW-1:0] fc_h_tc; fx_t [U-1:0][U-1:0] fc_h_wd;
  fc_relu #(.B(B), .P(P), .L(L), .U(U)) u_fc (
    .clk, .rst_n, .start(fc_start), .busy(fc_busy), .done(fc_done),
    .v_rd_en(fc_v_re), .v_rd_trow(fc_v_tr), .v_rd_tcol(fc_v_tc), .v_rd_data(v_rd),
    .w_rd_en(fc_w_re), .w_rd_trow(fc_w_tr), .w_rd_tcol(fc_w_tc), .w_rd_data(w1_rd),
    .h_wr_en(fc_h_we), .h_wr_trow(fc_h_tr), .h_wr_tcol(fc_h_tc), .h_wr_data(fc_h_wd));

  logic ol_h_re, ol_w_re; logic [IW-1:0] ol_h_tr; logic [LTW-1:0] ol_h_tc;
  logic [LW-1:0] ol_w_tr; logic [0:0] ol_w_tc, ol_e_tc; logic [0:0][C:0] ol_e_we;
  logic [BW-1:0] ol_e_tr; fx_t [0:0][C:0] ol_e_wd;
  output_layer #(.B(B), .L(L), .C(C), .U(U)) u_ol (
    .clk, .rst_n, .start(ol_start), .busy(ol_busy), .done(ol_done),
    .h_rd_en(ol_h_re), .h_rd_trow(ol_h_tr), .h_rd_tcol(ol_h_tc), .h_rd_data(h1_rd),
    .w_rd_en(ol_w_re), .w_rd_trow(ol_w_tr), .w_rd_tcol(ol_w_tc), .w_rd_data(w2_rd),
    .e_wr_en(ol_e_we), .e_wr_trow(ol_e_tr), .e_wr_tcol(ol_e_tc), .e_wr_data(ol_e_wd));

  logic sm_e_re, sm_y_re; logic [BW-1:0] sm_e_tr, sm_y_tr, sm_h2_tr, sm_d2_tr;
  logic [0:0] sm_e_tc, sm_y_tc, sm_h2_tc, sm_d2_tc;
  logic [0:0][C-1:0] sm_h2_we, sm_d2_we; fx_t [0:0][C-1:0] sm_h2_wd, sm_d2_wd;
  softmax_loss #(.B(B), .C(C)) u_smx (
    .clk, .rst_n, .start(smx_start), .busy(smx_busy), .done(smx_done),
    .e_rd_en(sm_e_re), .e_rd_trow(sm_e_tr), .e_rd_tcol(sm_e_tc), .e_rd_data(e_rd),
    .y_rd_en(sm_y_re), .y_rd_trow(sm_y_tr), .y_rd_tcol(sm_y_tc), .y_rd_data(y_rd),
    .h2_wr_en(sm_h2_we), .h2_wr_trow(sm_h2_tr), .h2_wr_tcol(sm_h2_tc), .h2_wr_data(sm_h2_wd),
    .d2_wr_en(sm_d2_we), .d2_wr_trow(sm_d2_tr), .d2_wr_tcol(sm_d2_tc), .d2_wr_data(sm_d2_wd),
    .loss(loss));

  adam_bias_corr u_corr (
    .clk, .rst_n, .clear(opt_clear), .step(corr_step), .busy(corr_busy),
    .done(corr_done), .k1, .k2, .t(step_t));

  logic a2_h_re, a2_d2_re, a2_w_re; logic [IW-1:0] a2_h_tr; logic [LTW-1:0] a2_h_tc, a2_d1_tc;
  logic [BW-1:0] a2_d2_tr, a2_d1_tr; logic [0:0] a2_d2_tc, a2_w_tc, a2_ww_tc;
  logic [LW-1:0] a2_w_tr, a2_ww_tr; logic [0:0][C-1:0] a2_w_we; fx_t [0:0][C-1:0] a2_w_wd;
  logic [0:0][U-1:0] a2_d1_we; fx_t [0:0][U-1:0] a2_d1_wd;
  adam_w2 #(.B(B), .L(L), .C(C), .U(U)) u_aw2 (
    .clk, .rst_n, .start(aw2_start), .clear(opt_clear), .k1, .k2,
    .busy(aw2_busy), .done(aw2_done),
    .h_rd_en(a2_h_re), .h_rd_trow(a2_h_tr), .h_rd_tcol(a2_h_tc), .h_rd_data(h1_rd),
    .d2_rd_en(a2_d2_re), .d2_rd_trow(a2_d2_tr), .d2_rd_tcol(a2_d2_tc), .d2_rd_data(d2_rd),
    .w_rd_en(a2_w_re), .w_rd_trow(a2_w_tr), .w_rd_tcol(a2_w_tc), .w_rd_data(w2_rd),
    .w_wr_en(a2_w_we), .w_wr_trow(a2_ww_tr), .w_wr_tcol(a2_ww_tc), .w_wr_data(a2_w_wd),
    .d1_wr_en(a2_d1_we), .d1_wr_trow(a2_d1_tr), .d1_wr_tcol(a2_d1_tc), .d1_wr_data(a2_d1_wd));

  logic a1_v_re, a1_d1_re, a1_w_re; logic [IW-1:0] a1_v_tr; logic [PW-1:0] a1_v_tc, a1_w_tr, a1_ww_tr;
  logic [BW-1:0] a1_d1_tr; logic [LTW-1:0] a1_d1_tc, a1_w_tc, a1_ww_tc;
  logic [0:0][U-1:0] a1_w_we; fx_t [0:0][U-1:0] a1_w_wd;
  adam_w1 #(.B(B), .P(P), .L(L), .U(U)) u_aw1 (
    .clk, .rst_n, .start(aw1_start), .clear(opt_clear), .k1, .k2,
    .busy(aw1_busy), .done(aw1_done),
    .v_rd_en(a1_v_re), .v_rd_trow(a1_v_tr), .v_rd_tcol(a1_v_tc), .v_rd_data(v_rd),
    .d1_rd_en(a1_d1_re), .d1_rd_trow(a1_d1_tr), .d1_rd_tcol(a1_d1_tc), .d1_rd_data(d1_rd),
    .w_rd_en(a1_w_re), .w_rd_trow(a1_w_tr), .w_rd_tcol(a1_w_tc), .w_rd_data(w1_rd),
    .w_wr_en(a1_w_we), .w_wr_trow(a1_ww_tr), .w_wr_tcol(a1_ww_tc), .w_wr_data(a1_w_wd));

  // ---------------------------------------------------------------- port muxes
  // host element -> tile coordinates and lane
  logic [UW-1:0] hr_mod, hc_mod;
  assign hr_mod = UW'(hrow % 8'(U));
  assign hc_mod = UW'(hcol % 8'(U));

  always_comb begin
    // v: fc / adam_w1 / host
    v_re = 1'b0; v_rtr = IW'(hrow / 8'(U)); v_rtc = PW'(hcol);
    if (ph == PH_FC) begin v_re = fc_v_re; v_rtr = fc_v_tr; v_rtc = fc_v_tc; end
    else if (ph == PH_AW1) begin v_re = a1_v_re; v_rtr = a1_v_tr; v_rtc = a1_v_tc; end
    else v_re = h_rd && (hreg == R_V);
    v_wtr = IW'(hrow / 8'(U)); v_wtc = PW'(hcol);
    for (int a = 0; a < U; a++) begin
      v_we[a][0] = h_wr && (hreg == R_V) && (hr_mod == UW'(a));
      v_wd[a][0] = hwdata;
    end

    // outActual: softmax / host
    y_re = (ph == PH_SMX) ? sm_y_re : (h_rd && (hreg == R_Y));
    y_rtr = (ph == PH_SMX) ? sm_y_tr : BW'(hrow);
    y_wtr = BW'(hrow);
    for (int c = 0; c < C; c++) begin
      y_we[0][c] = h_wr && (hreg == R_Y) && (hcol == 8'(c));
      y_wd[0][c] = hwdata;
    end

    // h1: written by fc, read by output layer / adam_w2
    h1_we = fc_h_we; h1_wtr = fc_h_tr; h1_wtc = fc_h_tc; h1_wd = fc_h_wd;
    if (ph == PH_AW2) begin h1_re = a2_h_re; h1_rtr = a2_h_tr; h1_rtc = a2_h_tc; end
    else begin h1_re = ol_h_re; h1_rtr = ol_h_tr; h1_rtc = ol_h_tc; end

    // e: written by output layer, read by softmax
    e_we = ol_e_we; e_wtr = ol_e_tr; e_wd = ol_e_wd;
    e_re = sm_e_re; e_rtr = sm_e_tr;

    // h2: written by softmax, read by host
    h2_we = sm_h2_we; h2_wtr = sm_h2_tr; h2_wd = sm_h2_wd;
    h2_re = h_rd && (hreg == R_H2); h2_rtr = BW'(hrow);

    // d2: written by softmax, read by adam_w2
    d2_we = sm_d2_we; d2_wtr = sm_d2_tr; d2_wd = sm_d2_wd;
    d2_re = a2_d2_re; d2_rtr = a2_d2_tr;

    // d1: written by adam_w2, read by adam_w1
    d1_we = a2_d1_we; d1_wtr = a2_d1_tr; d1_wtc = a2_d1_tc; d1_wd = a2_d1_wd;
    d1_re = a1_d1_re; d1_rtr = a1_d1_tr; d1_rtc = a1_d1_tc;

    // W1: fc / adam_w1 / host
    w1_re = 1'b0; w1_rtr = PW'(hrow); w1_rtc = LTW'(hcol / 8'(U));
    if (ph == PH_FC) begin w1_re = fc_w_re; w1_rtr = fc_w_tr; w1_rtc = fc_w_tc; end
    else if (ph == PH_AW1) begin w1_re = a1_w_re; w1_rtr = a1_w_tr; w1_rtc = a1_w_tc; end
    else w1_re = h_rd && (hreg == R_W1);
    if (ph == PH_AW1) begin
      w1_we = a1_w_we; w1_wtr = a1_ww_tr; w1_wtc = a1_ww_tc; w1_wd = a1_w_wd;
    end else begin
      w1_wtr = PW'(hrow); w1_wtc = LTW'(hcol / 8'(U));
      for (int u = 0; u < U; u++) begin
        w1_we[0][u] = h_wr && (hreg == R_W1) && (hc_mod == UW'(u));
        w1_wd[0][u] = hwdata;
      end
    end

    // W2: output layer / adam_w2 / host
    w2_re = 1'b0; w2_rtr = LW'(hrow);
    if (ph == PH_OUT) begin w2_re = ol_w_re; w2_rtr = ol_w_tr; end
    else if (ph == PH_AW2) begin w2_re = a2_w_re; w2_rtr = a2_w_tr; end
    else w2_re = h_rd && (hreg == R_W2);
    if (ph == PH_AW2) begin
      w2_we = a2_w_we; w2_wtr = a2_ww_tr; w2_wd = a2_w_wd;
    end else begin
      w2_wtr = LW'(hrow);
      for (int c = 0; c < C; c++) begin
        w2_we[0][c] = h_wr && (hreg == R_W2) && (hcol == 8'(c));
        w2_wd[0][c] = hwdata;
      end
    end
  end

  // ---------------------------------------------------------------- host read data
  logic [3:0] rreg_q; logic [7:0] rcol_q; logic [UW-1:0] rrmod_q, rcmod_q;
  logic rsp_q, err_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rreg_q <= '0; rcol_q <= '0; rrmod_q <= '0; rcmod_q <= '0; rsp_q <= 1'b0; err_q <= 1'b0;
    end else begin
      rsp_q <= hreq;
      err_q <= hreq && !(hwe ? wr_ok : rd_ok);
      if (hreq) begin
        rreg_q <= hreg; rcol_q <= hcol; rrmod_q <= hr_mod; rcmod_q <= hc_mod;
      end
    end
  end
  assign hrsp = rsp_q;
  assign herr = err_q;

  always_comb begin
    hrdata = '0;
    case (rreg_q)
      R_REGS: case (rcol_q)
        8'd0:    hrdata = {61'd0, is_training, done_flag, !host_idle};
        8'd1:    hrdata = {32'd0, step_t};
        default: hrdata = loss;
      endcase
      R_V:  hrdata = v_rd[rrmod_q][0];
      R_Y:  hrdata = y_rd[0][idx_w(C)'(rcol_q)];
      R_H2: hrdata = h2_rd[0][idx_w(C)'(rcol_q)];
      R_W1: hrdata = w1_rd[0][rcmod_q];
      R_W2: hrdata = w2_rd[0][idx_w(C)'(rcol_q)];
      default: hrdata = '0;
    endcase
  end

  // engines only work in their own phase
  a_fc_phase:  assert property (@(posedge clk) disable iff (!rst_n) fc_busy  |-> ph == PH_FC);
  a_ol_phase:  assert property (@(posedge clk) disable iff (!rst_n) ol_busy  |-> ph == PH_OUT);
  a_smx_phase: assert property (@(posedge clk) disable iff (!rst_n) smx_busy |-> ph == PH_SMX);
  a_aw1_phase: assert property (@(posedge clk) disable iff (!rst_n) aw1_busy |-> ph inside {PH_AW1, PH_CLEAR});
  a_aw2_phase: assert property (@(posedge clk) disable iff (!rst_n) aw2_busy |-> ph inside {PH_AW2, PH_CLEAR});
  a_corr_phase: assert property (@(posedge clk) disable iff (!rst_n) corr_busy |-> ph == PH_CORR);
endmodule
