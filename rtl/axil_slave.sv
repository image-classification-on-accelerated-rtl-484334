// axil_slave: AXI4-Lite slave that turns host transfers into single-word
// register-bus requests.
//
// The paper connects host and FPGA through one S_AXILITE interface: every
// array and scalar the host exchanges with the accelerator (v, outActual,
// h2, the weights, isTraining) moves one word per transfer, without bursts.
// This slave accepts one transfer at a time.  A write is taken when AWVALID
// and WVALID are both high (writes before reads); a read when ARVALID is
// high.  Either becomes a one-clock `req` to the register bus, which must
// answer with `rsp_valid` (plus read data and an error flag) exactly one
// clock later; the answer is returned on B or R with OKAY or SLVERR.
//
// Interface: 64-bit data (AXI4-Lite allows 32 or 64; 64 bits carry one
// Q32.32 word per transfer, this design's own choice), ADDR_W-bit byte
// address; AWPROT/ARPROT are not used and left out.  Timing: a write takes
// 3 clocks from handshake to BVALID, a read 3 clocks to RVALID.
module axil_slave #(
  parameter int unsigned ADDR_W = 23,
  parameter int unsigned DATA_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_wvalid,
  output logic                s_wready,
  input  logic [DATA_W-1:0]   s_wdata,
  input  logic [DATA_W/8-1:0] s_wstrb,
  output logic                s_bvalid,
  input  logic                s_bready,
  output logic [1:0]          s_bresp,
  input  logic                s_arvalid,
  output logic                s_arready,
  input  logic [ADDR_W-1:0]   s_araddr,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [DATA_W-1:0]   s_rdata,
  output logic [1:0]          s_rresp,
  // register bus
  output logic                req,
  output logic                req_we,
  output logic [ADDR_W-1:0]   req_addr,
  output logic [DATA_W-1:0]   req_wdata,
  output logic [DATA_W/8-1:0] req_wstrb,
  input  logic                rsp_valid,
  input  logic [DATA_W-1:0]   rsp_rdata,
  input  logic                rsp_err
);
  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10;

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_BRESP, S_RRESP} state_e;
  state_e st;

  logic take_w, take_r;
  assign take_w    = (st == S_IDLE) && s_awvalid && s_wvalid;
  assign take_r    = (st == S_IDLE) && !take_w && s_arvalid;
  assign s_awready = take_w;
  assign s_wready  = take_w;
  assign s_arready = take_r;
  assign req       = (st == S_REQ);
  assign s_bvalid  = (st == S_BRESP);
  assign s_rvalid  = (st == S_RRESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; req_we <= 1'b0; req_addr <= '0; req_wdata <= '0;
      req_wstrb <= '0; s_bresp <= RESP_OKAY; s_rresp <= RESP_OKAY; s_rdata <= '0;
    end else begin
      case (st)
        S_IDLE: begin
          if (take_w) begin
            req_we <= 1'b1; req_addr <= s_awaddr; req_wdata <= s_wdata;
            req_wstrb <= s_wstrb; st <= S_REQ;
          end else if (take_r) begin
            req_we <= 1'b0; req_addr <= s_araddr; st <= S_REQ;
          end
        end
        S_REQ: st <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          if (req_we) begin
            s_bresp <= rsp_err ? RESP_SLVERR : RESP_OKAY;
            st      <= S_BRESP;
          end else begin
            s_rresp <= rsp_err ? RESP_SLVERR : RESP_OKAY;
            s_rdata <= rsp_rdata;
            st      <= S_RRESP;
          end
        end
        S_BRESP: if (s_bready) st <= S_IDLE;
        default: if (s_rready) st <= S_IDLE;   // S_RRESP
      endcase
    end
  end

  // AXI rule: a response, once valid, stays valid and stable until accepted
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata) && $stable(s_rresp));
  // the register bus answers exactly one clock after each request
  a_rsp: assert property (@(posedge clk) disable iff (!rst_n) req |=> rsp_valid);
endmodule
