// cyclic_ram_harness: test harness for one cyclic_ram configuration, used by
// tb_cyclic_ram.  On a rising `go` it clears the memory tile by tile, writes
// 3 * ROWS * COLS / (PR * PC) random tiles with random per-word write enables
// (mirrored into a flat model array), then reads every tile back with one
// clock of read latency and compares each word with the model.  It raises
// `fin` when done and reports the number of comparisons and mismatches.
// The model is visible hierarchically so the caller can check bank mapping.
module cyclic_ram_harness #(
  parameter int ROWS = 12,
  parameter int COLS = 6,
  parameter int PR   = 4,
  parameter int PC   = 1
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   n_checks,
  output int   n_fail
);
  import cnn_pkg::*;
  localparam int TR = ROWS / PR;
  localparam int TC = COLS / PC;

  logic re;
  logic [idx_w(TR)-1:0] rtr, wtr;
  logic [idx_w(TC)-1:0] rtc, wtc;
  fx_t  [PR-1:0][PC-1:0] rd, wd;
  logic [PR-1:0][PC-1:0] we;
  fx_t  model [ROWS][COLS];

  cyclic_ram #(.ROWS(ROWS), .COLS(COLS), .PR(PR), .PC(PC)) dut (
    .clk, .rd_en(re), .rd_trow(rtr), .rd_tcol(rtc), .rd_data(rd),
    .wr_en(we), .wr_trow(wtr), .wr_tcol(wtc), .wr_data(wd));

  initial begin
    fin = 0; n_checks = 0; n_fail = 0;
    re = 0; we = '0; rtr = '0; rtc = '0; wtr = '0; wtc = '0; wd = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) model[r][c] = '0;
    wait (go);
    for (int tr = 0; tr < TR; tr++)
      for (int tc = 0; tc < TC; tc++) begin
        @(negedge clk);
        wtr = tr[idx_w(TR)-1:0]; wtc = tc[idx_w(TC)-1:0];
        we = '1; wd = '0;
      end
    for (int n = 0; n < 3 * TR * TC; n++) begin
      int tr, tc;
      tr = $urandom_range(0, TR - 1);
      tc = $urandom_range(0, TC - 1);
      @(negedge clk);
      wtr = tr[idx_w(TR)-1:0]; wtc = tc[idx_w(TC)-1:0];
      for (int a = 0; a < PR; a++)
        for (int b = 0; b < PC; b++) begin
          we[a][b] = 1'($urandom_range(0, 1));
          wd[a][b] = fx_t'({$urandom, $urandom});
          if (we[a][b]) model[tr * PR + a][tc * PC + b] = wd[a][b];
        end
    end
    @(negedge clk);
    we = '0;
    for (int tr = 0; tr < TR; tr++)
      for (int tc = 0; tc < TC; tc++) begin
        re = 1; rtr = tr[idx_w(TR)-1:0]; rtc = tc[idx_w(TC)-1:0];
        @(negedge clk);
        re = 0;
        for (int a = 0; a < PR; a++)
          for (int b = 0; b < PC; b++) begin
            n_checks++;
            if (rd[a][b] !== model[tr * PR + a][tc * PC + b]) begin
              n_fail++;
              $display("FAIL %0dx%0d/%0dx%0d element (%0d,%0d)", ROWS, COLS, PR, PC,
                       tr * PR + a, tc * PC + b);
            end
          end
      end
    // read enable low: output must hold the last tile
    begin
      fx_t [PR-1:0][PC-1:0] held;
      held = rd;
      rtr = '0; rtc = '0;
      @(negedge clk);
      n_checks++;
      if (rd !== held) begin
        n_fail++;
        $display("FAIL read data changed without rd_en");
      end
    end
    fin = 1;
  end
endmodule
