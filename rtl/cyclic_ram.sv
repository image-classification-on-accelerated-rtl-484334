// cyclic_ram: a ROWS x COLS array of Q32.32 words, cyclically partitioned
// by PR in dimension 1 and by PC in dimension 2.
//
// Element (r, c) lives in bank (r % PR, c % PC) at bank row
// (r / PR) * (COLS / PC) + c / PC, exactly the cyclic partition of the
// paper's Fig. 2: the elements of one "level", i.e. PR consecutive rows and
// PC consecutive columns starting at a multiple of the factors, sit in
// different banks at the same bank address, so a whole PR x PC tile is read
// or written in one clock.  PR = 1 or PC = 1 gives a one-dimensional
// partition (the figure shows dimension 1, factor 4).
//
// Each bank is a simple dual-port RAM (one write port, one read port), as the
// paper describes its dual-port BRAMs: one port for input, one for output.
// Interface: tile coordinates trow = r / PR, tcol = c / PC.  Read data appear
// on rd_data one clock after rd_en (registered output, BRAM style).  Writes
// take effect at the clock edge; wr_en selects which words of the tile are
// written.  A read and a write of the same word in one clock return the old
// value.  ROWS must be a multiple of PR and COLS of PC.  Contents are not
// reset (memories); users clear them explicitly.
module cyclic_ram
  import cnn_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8,
  parameter int unsigned PR   = 4,
  parameter int unsigned PC   = 1,
  localparam int unsigned TR  = ROWS / PR,
  localparam int unsigned TC  = COLS / PC,
  localparam int unsigned RW  = idx_w(TR),
  localparam int unsigned CW  = idx_w(TC)
) (
  input  logic                        clk,
  input  logic                        rd_en,
  input  logic [RW-1:0]               rd_trow,
  input  logic [CW-1:0]               rd_tcol,
  output fx_t  [PR-1:0][PC-1:0]       rd_data,
  input  logic [PR-1:0][PC-1:0]       wr_en,
  input  logic [RW-1:0]               wr_trow,
  input  logic [CW-1:0]               wr_tcol,
  input  fx_t  [PR-1:0][PC-1:0]       wr_data
);
  localparam int unsigned DEPTH = TR * TC;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  initial begin
    assert (ROWS % PR == 0 && COLS % PC == 0)
      else $error("cyclic_ram: ROWS/COLS must be multiples of PR/PC");
  end

  logic [AW-1:0] rd_addr, wr_addr;
  always_comb begin
    rd_addr = AW'(rd_trow) * AW'(TC) + AW'(rd_tcol);
    wr_addr = AW'(wr_trow) * AW'(TC) + AW'(wr_tcol);
  end

  for (genvar i = 0; i < PR; i++) begin : g_r
    for (genvar j = 0; j < PC; j++) begin : g_c
      fx_t bank [DEPTH];
      always_ff @(posedge clk) begin
        if (wr_en[i][j]) bank[wr_addr] <= wr_data[i][j];
        if (rd_en)       rd_data[i][j] <= bank[rd_addr];
      end
    end
  end
endmodule
