// tb_adam_w1: self-checking test of "ADAM on W1" at reduced sizes
// (B = 8, P = 5, L = 8, U = 4).  v (partition 4 in dimension 1), d1 and W1
// (partition 4 in dimension 2) are modelled as memories with one clock of
// read latency.  After a clear, two training steps (t = 1, 2) are run with
// new random v and d1 each; after each, every weight of W1 is compared with
// a double-precision textbook Adam update on the gradient
// g[p][j] = sum_i v[i][p] * d1[i][j].  The clear must take P*L/U + 1 clocks
// and each step P*(L/U)*(B + 155) + 1 clocks.
module tb_adam_w1;
  import cnn_pkg::*;
  localparam int B = 8, P = 5, L = 8, U = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, clear = 0, busy, done;
  fx_t k1, k2;
  logic v_rd_en, d1_rd_en, w_rd_en;
  logic [idx_w(B/U)-1:0] v_rd_trow;
  logic [idx_w(P)-1:0] v_rd_tcol, w_rd_trow, w_wr_trow;
  fx_t [U-1:0][0:0] v_rd_data;
  logic [idx_w(B)-1:0] d1_rd_trow;
  logic [idx_w(L/U)-1:0] d1_rd_tcol, w_rd_tcol, w_wr_tcol;
  fx_t [0:0][U-1:0] d1_rd_data, w_rd_data, w_wr_data;
  logic [0:0][U-1:0] w_wr_en;

  adam_w1 #(.B(B), .P(P), .L(L), .U(U)) dut (.*);

  fx_t v[B][P], d1[B][L], w1[P][L];
  always_ff @(posedge clk) begin
    if (v_rd_en) for (int a = 0; a < U; a++) v_rd_data[a][0] <= v[int'(v_rd_trow) * U + a][v_rd_tcol];
    if (d1_rd_en) for (int u = 0; u < U; u++) d1_rd_data[0][u] <= d1[d1_rd_trow][int'(d1_rd_tcol) * U + u];
    if (w_rd_en) for (int u = 0; u < U; u++) w_rd_data[0][u] <= w1[w_rd_trow][int'(w_rd_tcol) * U + u];
    for (int u = 0; u < U; u++) if (w_wr_en[0][u]) w1[w_wr_trow][int'(w_wr_tcol) * U + u] <= w_wr_data[0][u];
  end

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real x); return fx_t'(longint'(x * 4294967296.0)); endfunction
  function automatic real absr(real x); return (x < 0) ? -x : x; endfunction
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100001.0;
  endfunction

  real rw[P][L], rm[P][L], rv[P][L];

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
    int cyc;
    real g, mh, vh;
    for (int p = 0; p < P; p++) for (int j = 0; j < L; j++) begin
      w1[p][j] = to_fx(urand(-0.3, 0.3)); rw[p][j] = to_r(w1[p][j]); rm[p][j] = 0; rv[p][j] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, cyc);
    checks++; if (cyc != P * L / U + 1) begin failures++; $display("FAIL clear cycles %0d", cyc); end
    for (int t = 1; t <= 2; t++) begin
      for (int i = 0; i < B; i++) begin
        for (int p = 0; p < P; p++) v[i][p] = to_fx(urand(0.0, 1.0));
        for (int j = 0; j < L; j++) d1[i][j] = to_fx(urand(-0.05, 0.05));
      end
      k1 = to_fx(0.1 / (1.0 - $pow(0.9, t)));
      k2 = to_fx(0.001 / (1.0 - $pow(0.999, t)));
      run(0, cyc);
      checks++;
      if (cyc != P * (L / U) * (B + 155) + 1) begin
        failures++; $display("FAIL step cycles %0d expected %0d", cyc, P * (L / U) * (B + 155) + 1);
      end
      for (int p = 0; p < P; p++)
        for (int j = 0; j < L; j++) begin
          g = 0;
          for (int i = 0; i < B; i++) g += to_r(v[i][p]) * to_r(d1[i][j]);
          rm[p][j] = 0.9 * rm[p][j] + 0.1 * g;
          rv[p][j] = 0.999 * rv[p][j] + 0.001 * g * g;
          mh = rm[p][j] / (1.0 - $pow(0.9, t));
          vh = rv[p][j] / (1.0 - $pow(0.999, t));
          rw[p][j] = rw[p][j] - 0.01 * mh / ($sqrt(vh) + 1e-7);
          checks++;
          if (absr(to_r(w1[p][j]) - rw[p][j]) > 1e-5) begin
            failures++; $display("FAIL t=%0d W1[%0d][%0d] %f expected %f", t, p, j, to_r(w1[p][j]), rw[p][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
