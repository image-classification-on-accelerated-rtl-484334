// tb_cnn_fc_accel_train: training run over many mini-batches, the part of
// the accuracy evaluation (train for a number of steps, then classify unseen
// images) that can be simulated in reasonable time.
//
// Reduced sizes: B = 8 images per mini-batch, P = 16 input features, L = 16
// hidden neurons, C = 10 classes, unroll 4.  The data set is synthetic: each
// class has a random prototype vector in [0, 1)^P and every image is its
// prototype plus uniform noise of +-0.15, with a one-hot target.  Weights are
// initialised with Gaussian noise of mean 0 and standard deviation 0.1, the
// optimiser is cleared, and NSTEP training mini-batches are run through the
// AXI4-Lite port, reading the loss register after each.  Then TEST_BATCHES
// unseen mini-batches are classified by inference (argmax of h2).
// Checked: every transfer answers OKAY, the step counter equals NSTEP, the
// mean loss of the last 5 steps is below half that of the first 5, the test
// accuracy after training is at least 80 % and above the accuracy of the
// untrained network, and each training step takes the engines' clock count.
module tb_cnn_fc_accel_train;
  import cnn_pkg::*;
  localparam int B = 8, P = 16, L = 16, C = 10, U = 4, AW = 23;
  localparam int NSTEP = 150, TEST_BATCHES = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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

  function automatic real to_r(fx_t v); return real'(v) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction
  function automatic logic [AW-1:0] adr(int region, int row, int col);
    return {4'(region), 8'(row), 8'(col), 3'b000};
  endfunction
  function automatic real urand01();
    return (real'($urandom_range(0, 1000000)) + 0.5) / 1000001.0;
  endfunction
  function automatic real gauss(real sd);   // Box-Muller
    return sd * $sqrt(-2.0 * $ln(urand01())) * $cos(6.283185307179586 * urand01());
  endfunction

  task automatic axi_write(input logic [AW-1:0] a, input logic [63:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) begin failures++; $display("FAIL write %h resp %0d", a, bresp); end
  endtask

  task automatic axi_read(input logic [AW-1:0] a, output logic [63:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    checks++;
    if (rresp != 2'b00) begin failures++; $display("FAIL read %h resp %0d", a, rresp); end
  endtask

  // clocks from the start command's handshake to the done pulse
  longint cyc_now = 0, cyc_begin = 0, cyc_end = 0;
  always @(posedge clk) begin
    cyc_now <= cyc_now + 1;
    if (awvalid && awready && wvalid && wready && awaddr == '0 && wdata[0]) cyc_begin <= cyc_now;
    if (irq) cyc_end <= cyc_now;
  end
  localparam longint TRN_CYC = (B / U) * (L / U) * (P + 2) + 1 + (B / U) * (L + 2 + 15 * C + U) + 1
                             + B * (101 + 36 + (C - 1)) + 200 + B * L + L * (B + 155) + 2
                             + P * (L / U) * (B + 155) + 1;

  task automatic run_op(input logic [63:0] ctrl);
    logic [63:0] st;
    axi_write(adr(0, 0, 0), ctrl);
    do begin
      repeat (50) @(negedge clk);
      axi_read(adr(0, 0, 0), st);
    end while (st[0]);
  endtask

  real proto[C][P];
  int  label[B];

  task automatic send_batch();
    for (int i = 0; i < B; i++) begin
      label[i] = $urandom_range(0, C - 1);
      for (int k = 0; k < P; k++)
        axi_write(adr(1, i, k), to_fx(proto[label[i]][k] + 0.3 * urand01() - 0.15));
      for (int c = 0; c < C; c++)
        axi_write(adr(2, i, c), (c == label[i]) ? FX_ONE : '0);
    end
  endtask

  task automatic test_accuracy(output real acc);
    int correct = 0;
    logic [63:0] d;
    for (int t = 0; t < TEST_BATCHES; t++) begin
      send_batch();
      run_op(64'h1);
      for (int i = 0; i < B; i++) begin
        int best = 0; real bv = -1.0;
        for (int c = 0; c < C; c++) begin
          axi_read(adr(3, i, c), d);
          if (to_r(d) > bv) begin bv = to_r(d); best = c; end
        end
        if (best == label[i]) correct++;
      end
    end
    acc = real'(correct) / real'(TEST_BATCHES * B);
  endtask

  initial begin : watchdog
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real loss[NSTEP];
    real acc0, acc1, first, last;
    logic [63:0] d;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++)
      for (int k = 0; k < P; k++) proto[c][k] = urand01();
    for (int k = 0; k < P; k++)
      for (int j = 0; j < L; j++) axi_write(adr(4, k, j), to_fx(gauss(0.1)));
    for (int j = 0; j < L; j++)
      for (int c = 0; c < C; c++) axi_write(adr(5, j, c), to_fx(gauss(0.1)));
    run_op(64'h4);                                   // clear optimiser
    test_accuracy(acc0);
    for (int s = 0; s < NSTEP; s++) begin
      send_batch();
      run_op(64'h3);
      checks++;
      if (cyc_end - cyc_begin < TRN_CYC || cyc_end - cyc_begin > TRN_CYC + 30) begin
        failures++;
        $display("FAIL training step took %0d clocks, expected about %0d", cyc_end - cyc_begin, TRN_CYC);
      end
      axi_read(adr(0, 0, 2), d);
      loss[s] = to_r(d);
    end
    axi_read(adr(0, 0, 1), d);
    checks++;
    if (d != 64'(NSTEP)) begin failures++; $display("FAIL step count %0d", d); end
    test_accuracy(acc1);
    first = 0; last = 0;
    for (int s = 0; s < 5; s++) begin first += loss[s] / 5.0; last += loss[NSTEP - 1 - s] / 5.0; end
    $display("loss: first 5 steps %.4f, last 5 steps %.4f", first, last);
    $display("test accuracy: %.1f %% untrained, %.1f %% after %0d steps", 100.0 * acc0, 100.0 * acc1, NSTEP);
    checks++;
    if (!(last < 0.5 * first)) begin failures++; $display("FAIL loss did not fall enough"); end
    checks++;
    if (acc1 < 0.8 || acc1 <= acc0) begin failures++; $display("FAIL accuracy after training"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
