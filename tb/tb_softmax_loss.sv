// tb_softmax_loss: self-checking test of softmax, cross-entropy loss and
// the output error at reduced batch size (B = 4, C = 10).  The e memory
// (exponentials and their sum in column C) and the outActual memory are
// modelled with one clock of read latency.  Exponentials are formed from
// random logits in the testbench; targets are one-hot except for image 2,
// whose target is split 0.25 / 0.75 between two classes (two logarithms).
// Every h2 and d2 word is compared with e/sum and (h2 - y)/B in double
// precision and the loss with -(1/B) sum y ln(h2); the number of clocks
// must equal the sum over images of 101 + 36 per non-zero target + (C - nz).
module tb_softmax_loss;
  import cnn_pkg::*;
  localparam int B = 4, C = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic e_rd_en, y_rd_en;
  logic [idx_w(B)-1:0] e_rd_trow, y_rd_trow, h2_wr_trow, d2_wr_trow;
  logic [0:0] e_rd_tcol, y_rd_tcol, h2_wr_tcol, d2_wr_tcol;
  fx_t [0:0][C:0] e_rd_data;
  fx_t [0:0][C-1:0] y_rd_data, h2_wr_data, d2_wr_data;
  logic [0:0][C-1:0] h2_wr_en, d2_wr_en;
  fx_t loss;

  softmax_loss #(.B(B), .C(C)) dut (.*);

  fx_t e[B][C+1], y[B][C], h2[B][C], d2[B][C];
  always_ff @(posedge clk) begin
    if (e_rd_en) for (int c = 0; c <= C; c++) e_rd_data[0][c] <= e[e_rd_trow][c];
    if (y_rd_en) for (int c = 0; c < C; c++)  y_rd_data[0][c] <= y[y_rd_trow][c];
    for (int c = 0; c < C; c++) begin
      if (h2_wr_en[0][c]) h2[h2_wr_trow][c] <= h2_wr_data[0][c];
      if (d2_wr_en[0][c]) d2[d2_wr_trow][c] <= d2_wr_data[0][c];
    end
  end

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction
  task automatic check_close(string what, real got, real exp_v, real tol);
    real err = got - exp_v;
    if (err < 0) err = -err;
    checks++;
    if (err > tol) begin failures++; $display("FAIL %s: got %f expected %f", what, got, exp_v); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, exp_cyc, nz;
    real s, p, lref;
    for (int i = 0; i < B; i++) begin
      int lbl = $urandom_range(0, C - 1);
      s = 0;
      for (int c = 0; c < C; c++) begin
        e[i][c] = to_fx($exp((real'($urandom_range(0, 1000)) - 500.0) / 150.0));
        s += to_r(e[i][c]);
        y[i][c] = (c == lbl) ? FX_ONE : '0;
        h2[i][c] = '0; d2[i][c] = '0;
      end
      e[i][C] = to_fx(s);
    end
    for (int c = 0; c < C; c++) y[2][c] = '0;
    y[2][1] = FX_ONE / 4; y[2][7] = 3 * (FX_ONE / 4);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = 0; lref = 0;
    for (int i = 0; i < B; i++) begin
      nz = 0;
      for (int c = 0; c < C; c++) begin
        p = to_r(e[i][c]) / to_r(e[i][C]);
        check_close($sformatf("h2[%0d][%0d]", i, c), to_r(h2[i][c]), p, 1e-8);
        check_close($sformatf("d2[%0d][%0d]", i, c), to_r(d2[i][c]), (p - to_r(y[i][c])) / B, 1e-8);
        if (y[i][c] != 0) begin nz++; lref -= to_r(y[i][c]) * $ln(p); end
      end
      exp_cyc += 101 + 36 * nz + (C - nz);
    end
    check_close("loss", to_r(loss), lref / B, 1e-7);
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
