// tb_output_layer: self-checking test of the output layer at reduced sizes
// (B = 8, L = 8, C = 10, U = 4).  h1 (4 x 4 partitioned) and W2 (complete
// partition) are modelled with one clock of read latency and random
// contents; every row {e[0..C-1], sum} the block writes is compared with
// exp(z - max z), z = sum_k h1*W2, and the sum of these exponentials,
// computed in double precision (relative tolerance 1e-6).  Two classes get
// large logits (about 24 and 96, far above the exponential's input range),
// which the subtraction of the maximum must absorb.  The cycle count
// start -> done is checked against (B/U) * (L + 2 + 15*C + U) + 1.
module tb_output_layer;
  import cnn_pkg::*;
  localparam int B = 8, L = 8, C = 10, U = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic h_rd_en, w_rd_en;
  logic [idx_w(B/U)-1:0] h_rd_trow;
  logic [idx_w(L/U)-1:0] h_rd_tcol;
  logic [idx_w(L)-1:0]   w_rd_trow;
  logic [0:0] w_rd_tcol, e_wr_tcol;
  fx_t [U-1:0][U-1:0] h_rd_data;
  fx_t [0:0][C-1:0] w_rd_data;
  logic [0:0][C:0] e_wr_en;
  logic [idx_w(B)-1:0] e_wr_trow;
  fx_t  [0:0][C:0] e_wr_data;

  output_layer #(.B(B), .L(L), .C(C), .U(U)) dut (.*);

  fx_t h[B][L], w[L][C], e[B][C+1];
  int  nwr[B];
  always_ff @(posedge clk) begin
    if (h_rd_en) for (int a = 0; a < U; a++) for (int b = 0; b < U; b++)
      h_rd_data[a][b] <= h[int'(h_rd_trow) * U + a][int'(h_rd_tcol) * U + b];
    if (w_rd_en) for (int c = 0; c < C; c++) w_rd_data[0][c] <= w[w_rd_trow][c];
    if (e_wr_en[0][0]) nwr[e_wr_trow] <= nwr[e_wr_trow] + 1;
    for (int c = 0; c <= C; c++) if (e_wr_en[0][c]) e[e_wr_trow][c] <= e_wr_data[0][c];
  end

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t rnd(real lo, real hi);
    return fx_t'(longint'((lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100001.0) * 4294967296.0));
  endfunction
  function automatic bit close(real got, real exp_v);
    real err = got - exp_v;
    if (err < 0) err = -err;
    return err <= 1e-6 * (exp_v < 0 ? -exp_v : exp_v) + 1e-8;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, exp_cyc;
    real z, s, ex;
    for (int i = 0; i < B; i++) begin
      nwr[i] = 0;
      for (int k = 0; k < L; k++) h[i][k] = rnd(0.0, 1.0);
    end
    for (int k = 0; k < L; k++) for (int c = 0; c < C; c++) w[k][c] = rnd(-1.0, 1.0);
    // features 0 and 1 reach only images 5 and 6: logit about 24 for image 5
    // in class 3 and about 96 for image 6 in class 7
    for (int i = 0; i < B; i++) begin h[i][0] = '0; h[i][1] = '0; end
    h[5][1] = FX_ONE; w[1][3] = 24 * FX_ONE;
    h[6][0] = 8 * FX_ONE; w[0][7] = 12 * FX_ONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = (B / U) * (L + 2 + 15 * C + U) + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cyc); end
    for (int i = 0; i < B; i++) begin
      real zmax;
      zmax = -1.0e30;
      for (int c = 0; c < C; c++) begin
        z = 0;
        for (int k = 0; k < L; k++) z += to_r(h[i][k]) * to_r(w[k][c]);
        if (z > zmax) zmax = z;
      end
      s = 0;
      checks++;
      if (nwr[i] != 1) begin failures++; $display("FAIL row %0d written %0d times", i, nwr[i]); end
      for (int c = 0; c < C; c++) begin
        z = 0;
        for (int k = 0; k < L; k++) z += to_r(h[i][k]) * to_r(w[k][c]);
        z = z - zmax;
        if (z < -23.0) z = -23.0;
        ex = $exp(z); s += ex;
        checks++;
        if (!close(to_r(e[i][c]), ex)) begin
          failures++; $display("FAIL e[%0d][%0d] = %f expected %f", i, c, to_r(e[i][c]), ex);
        end
      end
      checks++;
      if (!close(to_r(e[i][C]), s)) begin
        failures++; $display("FAIL sum[%0d] = %f expected %f", i, to_r(e[i][C]), s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
