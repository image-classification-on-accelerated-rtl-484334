// tb_axil_slave: self-checking test of the AXI4-Lite slave.
// A small register bus model sits behind the slave: 64 words of storage,
// answering one clock after each request; addresses with the top bit set,
// and writes with a partial byte strobe, answer with an error.  A host model
// issues a random mix of writes and reads with random valid and ready delays
// (write address and data may arrive in different clocks), and also presents
// a write and a read in the same clock to check that the write goes first.
// Checked: read data against a reference copy, OKAY/SLVERR responses,
// exactly one bus request per transfer, and the 3-clock latency from
// handshake to BVALID/RVALID.
module tb_axil_slave;
  localparam int AW = 23, DW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [AW-1:0] awaddr = '0, araddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [7:0]    wstrb = '0;
  logic [1:0]    bresp, rresp;
  logic req, req_we, rsp_valid = 0, rsp_err = 0;
  logic [AW-1:0] req_addr;
  logic [DW-1:0] req_wdata, rsp_rdata = '0;
  logic [7:0]    req_wstrb;

  axil_slave #(.ADDR_W(AW), .DATA_W(DW)) dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp),
    .req, .req_we, .req_addr, .req_wdata, .req_wstrb,
    .rsp_valid, .rsp_rdata, .rsp_err);

  // register bus model
  logic [DW-1:0] regs [64];
  logic [DW-1:0] ref_regs [64];
  int n_req = 0;
  logic last_we;
  always_ff @(posedge clk) begin
    rsp_valid <= req;
    if (req) begin
      n_req   <= n_req + 1;
      last_we <= req_we;
      rsp_err <= req_addr[AW-1] || (req_we && req_wstrb != 8'hFF);
      rsp_rdata <= regs[req_addr[8:3]];
      if (req_we && !req_addr[AW-1] && req_wstrb == 8'hFF) regs[req_addr[8:3]] <= req_wdata;
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic do_write(input logic [AW-1:0] a, input logic [DW-1:0] d,
                          input logic [7:0] s, input logic split);
    int t0, t1, r0;
    logic exp_err;
    exp_err = a[AW-1] || s != 8'hFF;
    r0 = n_req;
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s;
    awvalid = 1;
    if (split) begin
      repeat ($urandom_range(1, 3)) begin
        @(negedge clk);
        check(!awready && !wready, "slave took a write address without data");
      end
    end
    wvalid = 1;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    t0 = $time / 10;
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    t1 = $time / 10;
    // BVALID appears in the 3rd clock after the handshake clock
    check(t1 - t0 == 3, $sformatf("write latency %0d", t1 - t0));
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      check(bvalid, "BVALID dropped before BREADY");
    end
    check(bresp == (exp_err ? 2'b10 : 2'b00), $sformatf("bresp %b for addr %h", bresp, a));
    bready = 1;
    @(negedge clk);
    bready = 0;
    check(!bvalid, "BVALID stayed after BREADY");
    check(n_req == r0 + 1, "write did not make exactly one request");
    if (!exp_err) ref_regs[a[8:3]] = d;
  endtask

  task automatic do_read(input logic [AW-1:0] a);
    int t0, t1, r0;
    logic exp_err;
    exp_err = a[AW-1];
    r0 = n_req;
    @(negedge clk);
    araddr = a; arvalid = 1;
    @(posedge clk);
    while (!arready) @(posedge clk);
    t0 = $time / 10;
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    t1 = $time / 10;
    check(t1 - t0 == 3, $sformatf("read latency %0d", t1 - t0));
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      check(rvalid, "RVALID dropped before RREADY");
    end
    check(rresp == (exp_err ? 2'b10 : 2'b00), $sformatf("rresp %b for addr %h", rresp, a));
    if (!exp_err)
      check(rdata == ref_regs[a[8:3]], $sformatf("read %h got %h want %h", a, rdata, ref_regs[a[8:3]]));
    rready = 1;
    @(negedge clk);
    rready = 0;
    check(!rvalid, "RVALID stayed after RREADY");
    check(n_req == r0 + 1, "read did not make exactly one request");
  endtask

  initial begin
    for (int i = 0; i < 64; i++) begin
      regs[i] = '0; ref_regs[i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every register, then random traffic
    for (int i = 0; i < 64; i++)
      do_write(AW'(i * 8), {$urandom, $urandom}, 8'hFF, 1'($urandom_range(0, 1)));
    for (int n = 0; n < 400; n++) begin
      logic [AW-1:0] a;
      a = AW'($urandom_range(0, 63) * 8);
      if ($urandom_range(0, 9) == 0) a[AW-1] = 1'b1;
      if ($urandom_range(0, 1)) begin
        logic [7:0] s;
        s = ($urandom_range(0, 9) == 0) ? 8'($urandom_range(0, 254)) : 8'hFF;
        do_write(a, {$urandom, $urandom}, s, 1'($urandom_range(0, 1)));
      end else begin
        do_read(a);
      end
    end
    // write and read presented together: the write is taken first
    @(negedge clk);
    awaddr = AW'(5 * 8); wdata = 64'h1234_5678_9ABC_DEF0; wstrb = 8'hFF;
    awvalid = 1; wvalid = 1;
    araddr = AW'(5 * 8); arvalid = 1;
    @(posedge clk);
    check(awready && wready && !arready, "write not given priority over read");
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    ref_regs[5] = 64'h1234_5678_9ABC_DEF0;
    bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0; rready = 1;
    while (!rvalid) @(negedge clk);
    check(rdata == 64'h1234_5678_9ABC_DEF0, "read after simultaneous write saw old data");
    @(negedge clk);
    rready = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
