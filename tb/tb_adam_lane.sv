// tb_adam_lane: self-checking test of one Adam lane.  Eight independent
// weights are each trained for 25 steps with random gradients whose size
// ranges from 1e-7 to 5 (the small ones probe the fixed-point precision of
// the second moment).  The lane's corrected momentums are fed back step by
// step, as the Adam modules do through their memories, with k1, k2 computed
// in the testbench.  The weight after each step is compared with textbook
// Adam (Eqs. 2-4, raw moments, double precision, Table 1 constants) within
// 1 % of the distance the weight has travelled plus 2e-6; the
// corrected first moment with m / (1 - beta1^t).  Latency start -> done must
// be 151 clocks.
module tb_adam_lane;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  fx_t g, m_in, v_in, w_in, k1, k2, m_out, v_out, w_out;
  adam_lane dut (.*);

  function automatic real to_r(fx_t x); return real'(x) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction
  function automatic real absr(real x); return (x < 0) ? -x : x; endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    real m, v, w, gr, mh, vh, scale, wsum, wprev;
    fx_t ms, vs;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      scale = $pow(10.0, -7.0 + real'(n));           // 1e-7 .. 1e-1
      if (n == 7) scale = 5.0;
      m = 0; v = 0; ms = '0; vs = '0; wsum = 0;
      w = real'($urandom_range(0, 1000)) / 1000.0 - 0.5;
      w_in = to_fx(w); w = to_r(w_in);
      for (int t = 1; t <= 25; t++) begin
        gr = scale * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
        g  = to_fx(gr); gr = to_r(g);
        k1 = to_fx(0.1 / (1.0 - $pow(0.9, t)));
        k2 = to_fx(0.001 / (1.0 - $pow(0.999, t)));
        m_in = ms; v_in = vs;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 151) begin failures++; $display("FAIL latency %0d", cyc); end
        // reference
        m = 0.9 * m + 0.1 * gr;
        v = 0.999 * v + 0.001 * gr * gr;
        mh = m / (1.0 - $pow(0.9, t));
        vh = v / (1.0 - $pow(0.999, t));
        wprev = w;
        w = w - 0.01 * mh / ($sqrt(vh) + 1e-7);
        wsum += absr(w - wprev);
        checks++;
        if (absr(to_r(m_out) - mh) > 1e-6 * absr(mh) + 2e-9) begin
          failures++; $display("FAIL n=%0d t=%0d m_hat %g expected %g", n, t, to_r(m_out), mh);
        end
        checks++;
        if (absr(to_r(w_out) - w) > 2e-6 + 0.01 * wsum) begin
          failures++; $display("FAIL n=%0d t=%0d w %.8f expected %.8f", n, t, to_r(w_out), w);
        end
        ms = m_out; vs = v_out; w_in = w_out;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
