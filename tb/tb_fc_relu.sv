// tb_fc_relu: self-checking test of the fully connected layer with ReLU at
// reduced sizes (B = 8, P = 5, L = 8, U = 4).  The v and W1 memories are
// modelled in the testbench with one clock of read latency; random inputs
// (v in [0,1), W1 in +-0.5, so that ReLU cuts about half of the neurons)
// are preloaded, every h1 word the block writes is captured, and each is
// compared with max(0, sum_k v*W1) computed in double precision.  The cycle
// count start -> done is checked against (B/U)*(L/U)*(P+2)+1, and the test
// requires that ReLU zeroed at least one neuron.
module tb_fc_relu;
  import cnn_pkg::*;
  localparam int B = 8, P = 5, L = 8, U = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic v_rd_en, w_rd_en;
  logic [idx_w(B/U)-1:0] v_rd_trow, h_wr_trow;
  logic [idx_w(P)-1:0]   v_rd_tcol, w_rd_trow;
  logic [idx_w(L/U)-1:0] w_rd_tcol, h_wr_tcol;
  fx_t [U-1:0][0:0] v_rd_data;
  fx_t [0:0][U-1:0] w_rd_data;
  logic [U-1:0][U-1:0] h_wr_en;
  fx_t  [U-1:0][U-1:0] h_wr_data;

  fc_relu #(.B(B), .P(P), .L(L), .U(U)) dut (.*);

  fx_t v[B][P], w[P][L], h[B][L];
  bit  hw[B][L];
  always_ff @(posedge clk) begin
    if (v_rd_en) for (int a = 0; a < U; a++) v_rd_data[a][0] <= v[int'(v_rd_trow) * U + a][v_rd_tcol];
    if (w_rd_en) for (int b = 0; b < U; b++) w_rd_data[0][b] <= w[w_rd_trow][int'(w_rd_tcol) * U + b];
    for (int a = 0; a < U; a++)
      for (int b = 0; b < U; b++)
        if (h_wr_en[a][b]) begin
          h[int'(h_wr_trow) * U + a][int'(h_wr_tcol) * U + b] <= h_wr_data[a][b];
          hw[int'(h_wr_trow) * U + a][int'(h_wr_tcol) * U + b] <= 1'b1;
        end
  end

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t rnd(real lo, real hi);
    return fx_t'(longint'((lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100001.0) * 4294967296.0));
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nzero;
    real ref_v, err;
    for (int i = 0; i < B; i++) for (int k = 0; k < P; k++) v[i][k] = rnd(0.0, 1.0);
    for (int k = 0; k < P; k++) for (int j = 0; j < L; j++) w[k][j] = rnd(-0.5, 0.5);
    for (int i = 0; i < B; i++) for (int j = 0; j < L; j++) begin h[i][j] = 64'sd12345; hw[i][j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != (B / U) * (L / U) * (P + 2) + 1) begin
        failures++; $display("FAIL cycles %0d expected %0d", cyc, (B / U) * (L / U) * (P + 2) + 1);
      end
      nzero = 0;
      for (int i = 0; i < B; i++)
        for (int j = 0; j < L; j++) begin
          ref_v = 0;
          for (int k = 0; k < P; k++) ref_v += to_r(v[i][k]) * to_r(w[k][j]);
          if (ref_v < 0) begin ref_v = 0; nzero++; end
          err = to_r(h[i][j]) - ref_v; if (err < 0) err = -err;
          checks++;
          if (!hw[i][j] || err > 1e-8) begin
            failures++; $display("FAIL h1[%0d][%0d] = %f expected %f", i, j, to_r(h[i][j]), ref_v);
          end
        end
      checks++;
      if (nzero == 0) begin failures++; $display("FAIL ReLU never active"); end
      // second run with new weights
      for (int k = 0; k < P; k++) for (int j = 0; j < L; j++) w[k][j] = rnd(-0.5, 0.5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
