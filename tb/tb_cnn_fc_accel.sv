// tb_cnn_fc_accel: end-to-end test of the accelerator through its AXI4-Lite
// port, at reduced sizes (B = 8 images, P = 9 pooled features, L = 8 hidden
// neurons, C = 10 classes, unroll 4).
//
// The host side is modelled by tasks: it writes random weights W1, W2
// (uniform in +-0.2), clears the optimiser, writes a mini-batch v (uniform
// in [0, 1)) with one-hot targets, and then runs
//   1. an inference pass (isTraining = 0): h2 and the loss are read back and
//      compared with a double-precision model of the network;
//   2. two training passes (isTraining = 1): W1 and W2 are read back after
//      each and compared with a double-precision model of the Adam update
//      (t = 1, then t = 2), and the step count is checked.
// It also makes an array access while the accelerator is busy and expects
// SLVERR, and checks that the inference pass leaves the weights unchanged.
// The clocks of each pass, from the start command to the done pulse, are checked
// against the sum of the engines' latencies.
// Mechanisms counted (each must occur): inference pass, training pass,
// ReLU cutting a neuron to zero, SLVERR on a busy access, optimiser clear.
module tb_cnn_fc_accel;
  import cnn_pkg::*;
  localparam int B = 8, P = 9, L = 8, C = 10, U = 4, AW = 23;
  localparam int TRAIN_STEPS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_infer = 0, n_train = 0, n_relu0 = 0, n_busy_err = 0, n_clear = 0;

  logic awvalid = 0, wvalid = 0, arvalid = 0, bready = 1, rready = 1;
  logic awready, wready, arready, bvalid, rvalid, irq;
  logic [AW-1:0] awaddr = '0, araddr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [7:0]  wstrb = 8'hFF;
  logic [1:0]  bresp, rresp;

  cnn_fc_accel #(.B(B), .P(P), .L(L), .C(C), .U(U), .ADDR_W(AW)) dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata), .s_axil_wstrb(wstrb),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .done_irq(irq));

  // ------------------------------------------------------------ helpers
  function automatic real to_r(fx_t v); return real'(v) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction
  function automatic logic [AW-1:0] adr(int region, int row, int col);
    return {4'(region), 8'(row), 8'(col), 3'b000};
  endfunction
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000001.0;
  endfunction
  function automatic real absr(real x); return (x < 0) ? -x : x; endfunction

  task automatic axi_write(input logic [AW-1:0] a, input logic [63:0] d, output logic [1:0] resp);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    resp = bresp;
  endtask

  task automatic axi_read(input logic [AW-1:0] a, output logic [63:0] d, output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata; resp = rresp;
  endtask

  task automatic wr_ok(input logic [AW-1:0] a, input logic [63:0] d);
    logic [1:0] r;
    axi_write(a, d, r);
    checks++;
    if (r != 2'b00) begin failures++; $display("FAIL write %h resp %0d", a, r); end
  endtask

  task automatic rd_ok(input logic [AW-1:0] a, output logic [63:0] d);
    logic [1:0] r;
    axi_read(a, d, r);
    checks++;
    if (r != 2'b00) begin failures++; $display("FAIL read %h resp %0d", a, r); end
  endtask

  task automatic check_close(string what, real got, real exp_v, real tol);
    checks++;
    if (absr(got - exp_v) > tol) begin
      failures++;
      $display("FAIL %s: got %.9f expected %.9f", what, got, exp_v);
    end
  endtask

  // ------------------------------------------------------------ reference model
  real v[B][P], y[B][C], w1[P][L], w2[L][C];
  real mw1[P][L], vw1[P][L], mw2[L][C], vw2[L][C];
  real h1[B][L], h2[B][C], d2[B][C], d1[B][L], ref_loss;
  real p1 = 1.0, p2 = 1.0;
  int  t_ref = 0;

  task automatic ref_forward();
    real z, s, e[C];
    n_relu0 = 0;
    for (int i = 0; i < B; i++)
      for (int j = 0; j < L; j++) begin
        z = 0; for (int k = 0; k < P; k++) z += v[i][k] * w1[k][j];
        h1[i][j] = (z > 0) ? z : 0;
        if (z <= 0) n_relu0++;
      end
    ref_loss = 0;
    for (int i = 0; i < B; i++) begin
      s = 0;
      for (int c = 0; c < C; c++) begin
        z = 0; for (int j = 0; j < L; j++) z += h1[i][j] * w2[j][c];
        if (z > 21.0) z = 21.0;
        e[c] = $exp(z); s += e[c];
      end
      for (int c = 0; c < C; c++) begin
        h2[i][c] = e[c] / s;
        d2[i][c] = (h2[i][c] - y[i][c]) / B;
        if (y[i][c] != 0) ref_loss -= y[i][c] * $ln(h2[i][c]);
      end
    end
    ref_loss = ref_loss / B;
  endtask

  function automatic real adam(input real g, inout real m, inout real vv, input real w);
    real mh, vh;
    m  = 0.9 * m + 0.1 * g;
    vv = 0.999 * vv + 0.001 * g * g;
    mh = m / (1.0 - p1);
    vh = vv / (1.0 - p2);
    return w - 0.01 * mh / ($sqrt(vh) + 1e-7);
  endfunction

  task automatic ref_backward();
    real g, s;
    t_ref++; p1 *= 0.9; p2 *= 0.999;
    for (int i = 0; i < B; i++)
      for (int j = 0; j < L; j++) begin
        s = 0; for (int c = 0; c < C; c++) s += d2[i][c] * w2[j][c];
        d1[i][j] = (h1[i][j] > 0) ? s : 0;
      end
    for (int j = 0; j < L; j++)
      for (int c = 0; c < C; c++) begin
        g = 0; for (int i = 0; i < B; i++) g += h1[i][j] * d2[i][c];
        w2[j][c] = adam(g, mw2[j][c], vw2[j][c], w2[j][c]);
      end
    for (int k = 0; k < P; k++)
      for (int j = 0; j < L; j++) begin
        g = 0; for (int i = 0; i < B; i++) g += v[i][k] * d1[i][j];
        w1[k][j] = adam(g, mw1[k][j], vw1[k][j], w1[k][j]);
      end
  endtask

  // ------------------------------------------------------------ cycle count
  // Clocks from the AXI handshake of a CTRL write with the start bit to the
  // done pulse.
  longint cyc_now = 0, cyc_begin = 0, cyc_end = 0;
  always @(posedge clk) begin
    cyc_now <= cyc_now + 1;
    if (awvalid && awready && wvalid && wready && awaddr == '0 && wdata[0]) cyc_begin <= cyc_now;
    if (irq) cyc_end <= cyc_now;
  end
  // Expected clocks per engine (each engine's own latency, see its header):
  // the sum must match the measured count up to a few clocks for the bus
  // and the hand-over between phases.
  localparam longint FC_CYC   = (B / U) * (L / U) * (P + 2) + 1;
  localparam longint OUT_CYC  = (B / U) * (L + 2 + 15 * C + U) + 1;
  localparam longint SMX_CYC  = B * (101 + 36 + (C - 1));         // one-hot targets
  localparam longint AW2_CYC  = B * L + L * (B + 155) + 2;
  localparam longint AW1_CYC  = P * (L / U) * (B + 155) + 1;
  localparam longint INF_CYC  = FC_CYC + OUT_CYC + SMX_CYC;
  localparam longint TRN_CYC  = INF_CYC + 200 + AW2_CYC + AW1_CYC;
  task automatic check_cycles(input longint expect_c, input int phases, input string what);
    longint got;
    got = cyc_end - cyc_begin;
    $display("%s: %0d clocks (engine latencies add up to %0d)", what, got, expect_c);
    checks++;
    if (got < expect_c || got > expect_c + 4 * phases + 4) begin
      failures++;
      $display("FAIL %s took %0d clocks, expected %0d..%0d", what, got, expect_c, expect_c + 4 * phases + 4);
    end
  endtask

  // ------------------------------------------------------------ operations
  task automatic run_op(input logic [63:0] ctrl, output int cycles);
    logic [63:0] st; logic [1:0] r;
    wr_ok(adr(0, 0, 0), ctrl);
    cycles = 0;
    // an array access while busy must be refused
    if (ctrl[0]) begin
      axi_read(adr(4, 0, 0), st, r);
      checks++;
      if (r == 2'b10) n_busy_err++;
      else begin failures++; $display("FAIL busy read not refused"); end
    end
    do begin
      repeat (20) @(negedge clk);
      cycles += 20;
      rd_ok(adr(0, 0, 0), st);
    end while (st[0]);
    checks++;
    if (!st[1]) begin failures++; $display("FAIL done flag not set"); end
  endtask

  task automatic compare_outputs();
    logic [63:0] d;
    for (int i = 0; i < B; i++)
      for (int c = 0; c < C; c++) begin
        rd_ok(adr(3, i, c), d);
        check_close($sformatf("h2[%0d][%0d]", i, c), to_r(d), h2[i][c], 1e-6);
      end
    rd_ok(adr(0, 0, 2), d);
    check_close("loss", to_r(d), ref_loss, 1e-5);
  endtask

  task automatic compare_weights();
    logic [63:0] d;
    for (int k = 0; k < P; k++)
      for (int j = 0; j < L; j++) begin
        rd_ok(adr(4, k, j), d);
        check_close($sformatf("W1[%0d][%0d]", k, j), to_r(d), w1[k][j], 2e-4);
      end
    for (int j = 0; j < L; j++)
      for (int c = 0; c < C; c++) begin
        rd_ok(adr(5, j, c), d);
        check_close($sformatf("W2[%0d][%0d]", j, c), to_r(d), w2[j][c], 2e-4);
      end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t q; int cyc; logic [63:0] d; logic [1:0] r;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // weights (host initialisation) and moments
    for (int k = 0; k < P; k++)
      for (int j = 0; j < L; j++) begin
        q = to_fx(urand(-0.2, 0.2)); w1[k][j] = to_r(q); mw1[k][j] = 0; vw1[k][j] = 0;
        wr_ok(adr(4, k, j), q);
      end
    for (int j = 0; j < L; j++)
      for (int c = 0; c < C; c++) begin
        q = to_fx(urand(-0.6, 0.6)); w2[j][c] = to_r(q); mw2[j][c] = 0; vw2[j][c] = 0;
        wr_ok(adr(5, j, c), q);
      end
    run_op(64'h4, cyc);   // clear optimiser
    n_clear++;
    // mini-batch
    for (int i = 0; i < B; i++) begin
      int lbl = $urandom_range(0, C - 1);
      for (int k = 0; k < P; k++) begin
        q = to_fx(urand(0.0, 1.0)); v[i][k] = to_r(q);
        wr_ok(adr(1, i, k), q);
      end
      for (int c = 0; c < C; c++) begin
        y[i][c] = (c == lbl) ? 1.0 : 0.0;
        wr_ok(adr(2, i, c), (c == lbl) ? FX_ONE : '0);
      end
    end
    // bad accesses
    axi_write(adr(3, 0, 0), 64'd1, r);               // h2 is read-only
    checks++; if (r != 2'b10) begin failures++; $display("FAIL h2 write accepted"); end
    axi_read(adr(1, B, 0), d, r);                    // outside v
    checks++; if (r != 2'b10) begin failures++; $display("FAIL out-of-range read accepted"); end

    // 1. inference
    ref_forward();
    run_op(64'h1, cyc);
    n_infer++;
    check_cycles(INF_CYC, 3, "inference pass");
    compare_outputs();
    compare_weights();                               // unchanged
    rd_ok(adr(0, 0, 1), d);
    checks++; if (d != 0) begin failures++; $display("FAIL step count after inference"); end

    // 2. training
    for (int s = 0; s < TRAIN_STEPS; s++) begin
      ref_forward();
      run_op(64'h3, cyc);
      n_train++;
      check_cycles(TRN_CYC, 6, $sformatf("training pass %0d", s + 1));
      compare_outputs();
      ref_backward();
      compare_weights();
      rd_ok(adr(0, 0, 1), d);
      checks++; if (d != 64'(t_ref)) begin failures++; $display("FAIL step count %0d", d); end
    end

    // mechanisms
    $display("mechanisms: inference=%0d training=%0d relu_zero=%0d busy_slverr=%0d clear=%0d",
             n_infer, n_train, n_relu0, n_busy_err, n_clear);
    checks += 5;
    if (n_infer == 0)    begin failures++; $display("FAIL no inference pass"); end
    if (n_train == 0)    begin failures++; $display("FAIL no training pass"); end
    if (n_relu0 == 0)    begin failures++; $display("FAIL ReLU never cut a neuron"); end
    if (n_busy_err == 0) begin failures++; $display("FAIL no busy access"); end
    if (n_clear == 0)    begin failures++; $display("FAIL no optimiser clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
