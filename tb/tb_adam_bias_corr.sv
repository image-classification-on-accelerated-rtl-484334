// tb_adam_bias_corr: self-checking test of the Adam step-wise correction
// unit.  After a clear it is stepped 40 times; after each step t, k1 =
// 0.1/(1 - 0.9^t) and k2 = 0.001/(1 - 0.999^t) are compared with the values
// computed in double precision with $pow, and the latency step -> done must
// be 200 clocks.  A second clear must restart the sequence at t = 1.
module tb_adam_bias_corr;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, step = 0, busy, done;
  fx_t  k1, k2;
  logic [31:0] t;
  adam_bias_corr dut (.*);

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  task automatic check_close(string what, real got, real exp_v, real tol);
    real err = got - exp_v;
    if (err < 0) err = -err;
    checks++;
    if (err > tol) begin failures++; $display("FAIL %s: got %.10f expected %.10f", what, got, exp_v); end
  endtask

  task automatic do_step(output int cyc);
    @(negedge clk); step = 1;
    @(negedge clk); step = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int s = 1; s <= ((pass == 0) ? 40 : 2); s++) begin
        do_step(cyc);
        checks++;
        if (cyc != 200) begin failures++; $display("FAIL latency %0d", cyc); end
        checks++;
        if (t != 32'(s)) begin failures++; $display("FAIL t = %0d expected %0d", t, s); end
        check_close($sformatf("k1 t=%0d", s), to_r(k1), 0.1 / (1.0 - $pow(0.9, s)), 2e-7);
        check_close($sformatf("k2 t=%0d", s), to_r(k2), 0.001 / (1.0 - $pow(0.999, s)), 2e-6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
