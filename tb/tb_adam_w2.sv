// tb_adam_w2: self-checking test of "ADAM on W2" at reduced sizes
// (B = 8, L = 8, C = 10, U = 4).  h1 (post-ReLU, about a third of it zero),
// d2 and W2 are modelled as memories with one clock of read latency.  After
// a clear, two training steps are run (t = 1 and t = 2, the correction
// values k1, k2 given by the testbench).  After each step the hidden-layer
// error d1 = relu'(h1) * d2 W2^T (with W2 before the update) and the updated
// W2 are compared with a double-precision textbook Adam model.  The clear
// must take L + 1 clocks and each step B*L + L*(B + 155) + 2 clocks.
module tb_adam_w2;
  import cnn_pkg::*;
  localparam int B = 8, L = 8, C = 10, U = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, clear = 0, busy, done;
  fx_t k1, k2;
  logic h_rd_en, d2_rd_en, w_rd_en;
  logic [idx_w(B/U)-1:0] h_rd_trow;
  logic [idx_w(L/U)-1:0] h_rd_tcol, d1_wr_tcol;
  fx_t [U-1:0][U-1:0] h_rd_data;
  logic [idx_w(B)-1:0] d2_rd_trow, d1_wr_trow;
  logic [0:0] d2_rd_tcol, w_rd_tcol, w_wr_tcol;
  fx_t [0:0][C-1:0] d2_rd_data, w_rd_data, w_wr_data;
  logic [idx_w(L)-1:0] w_rd_trow, w_wr_trow;
  logic [0:0][C-1:0] w_wr_en;
  logic [0:0][U-1:0] d1_wr_en;
  fx_t [0:0][U-1:0] d1_wr_data;

  adam_w2 #(.B(B), .L(L), .C(C), .U(U)) dut (.*);

  fx_t h1[B][L], d2[B][C], w2[L][C], d1[B][L];
  always_ff @(posedge clk) begin
    if (h_rd_en) for (int a = 0; a < U; a++) for (int b = 0; b < U; b++)
      h_rd_data[a][b] <= h1[int'(h_rd_trow) * U + a][int'(h_rd_tcol) * U + b];
    if (d2_rd_en) for (int c = 0; c < C; c++) d2_rd_data[0][c] <= d2[d2_rd_trow][c];
    if (w_rd_en)  for (int c = 0; c < C; c++) w_rd_data[0][c]  <= w2[w_rd_trow][c];
    for (int c = 0; c < C; c++) if (w_wr_en[0][c]) w2[w_wr_trow][c] <= w_wr_data[0][c];
    for (int u = 0; u < U; u++) if (d1_wr_en[0][u]) d1[d1_wr_trow][int'(d1_wr_tcol) * U + u] <= d1_wr_data[0][u];
  end

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction
  function automatic real absr(real x); return (x < 0) ? -x : x; endfunction
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100001.0;
  endfunction

  real rw[L][C], rm[L][C], rv[L][C];

  task automatic run(input logic clr, output int cyc);
    @(negedge clk); if (clr) clear = 1; else start = 1;
    @(negedge clk); clear = 0; start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nzero;
    real s, g, mh, vh;
    for (int k = 0; k < L; k++) for (int c = 0; c < C; c++) begin
      w2[k][c] = to_fx(urand(-0.5, 0.5)); rw[k][c] = to_r(w2[k][c]); rm[k][c] = 0; rv[k][c] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, cyc);
    checks++; if (cyc != L + 1) begin failures++; $display("FAIL clear cycles %0d", cyc); end
    for (int t = 1; t <= 2; t++) begin
      nzero = 0;
      for (int i = 0; i < B; i++) begin
        for (int k = 0; k < L; k++) begin
          h1[i][k] = ($urandom_range(0, 2) == 0) ? '0 : to_fx(urand(0.0, 2.0));
          d1[i][k] = 64'sd777;
        end
        for (int c = 0; c < C; c++) d2[i][c] = to_fx(urand(-1.0, 1.0) / B);
      end
      k1 = to_fx(0.1 / (1.0 - $pow(0.9, t)));
      k2 = to_fx(0.001 / (1.0 - $pow(0.999, t)));
      run(0, cyc);
      checks++;
      if (cyc != B * L + L * (B + 155) + 2) begin
        failures++; $display("FAIL step cycles %0d expected %0d", cyc, B * L + L * (B + 155) + 2);
      end
      // d1 with the old W2
      for (int i = 0; i < B; i++)
        for (int k = 0; k < L; k++) begin
          s = 0;
          for (int c = 0; c < C; c++) s += to_r(d2[i][c]) * rw[k][c];
          if (h1[i][k] == 0) begin s = 0; nzero++; end
          checks++;
          if (absr(to_r(d1[i][k]) - s) > 1e-8) begin
            failures++; $display("FAIL d1[%0d][%0d] %g expected %g", i, k, to_r(d1[i][k]), s);
          end
        end
      // Adam on W2
      for (int k = 0; k < L; k++)
        for (int c = 0; c < C; c++) begin
          g = 0;
          for (int i = 0; i < B; i++) g += to_r(h1[i][k]) * to_r(d2[i][c]);
          rm[k][c] = 0.9 * rm[k][c] + 0.1 * g;
          rv[k][c] = 0.999 * rv[k][c] + 0.001 * g * g;
          mh = rm[k][c] / (1.0 - $pow(0.9, t));
          vh = rv[k][c] / (1.0 - $pow(0.999, t));
          rw[k][c] = rw[k][c] - 0.01 * mh / ($sqrt(vh) + 1e-7);
          checks++;
          if (absr(to_r(w2[k][c]) - rw[k][c]) > 1e-5) begin
            failures++; $display("FAIL t=%0d W2[%0d][%0d] %f expected %f", t, k, c, to_r(w2[k][c]), rw[k][c]);
          end
        end
      checks++;
      if (nzero == 0) begin failures++; $display("FAIL no zero h1"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
