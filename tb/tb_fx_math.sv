// tb_fx_math: self-checking test of the sequential Q32.32 arithmetic units
// fx_div, fx_sqrt, fx_exp and fx_log.  Random and corner operands are fed
// to each unit; results are compared with the simulator's double-precision
// $sqrt / $exp / $ln and real division, within a tolerance of a few LSBs
// (relative 1e-6 for the larger results).  The latency of each unit is
// checked against the cycle count its header states.
module tb_fx_math;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic st_div, st_sqrt, st_exp, st_log;
  fx_t  a, b, q_div, q_sqrt, q_exp, q_log;
  logic bz_div, bz_sqrt, bz_exp, bz_log, d_div, d_sqrt, d_exp, d_log;

  fx_div  u_div (.clk, .rst_n, .start(st_div), .num(a), .den(b), .busy(bz_div), .done(d_div), .quo(q_div));
  fx_sqrt u_sqrt(.clk, .rst_n, .start(st_sqrt), .x(a), .busy(bz_sqrt), .done(d_sqrt), .root(q_sqrt));
  fx_exp  u_exp (.clk, .rst_n, .start(st_exp), .x(a), .busy(bz_exp), .done(d_exp), .y(q_exp));
  fx_log  u_log (.clk, .rst_n, .start(st_log), .x(a), .busy(bz_log), .done(d_log), .y(q_log));

  function automatic real to_r(fx_t v); return real'(v) / 4294967296.0; endfunction
  function automatic fx_t to_fx(real v); return fx_t'(longint'(v * 4294967296.0)); endfunction

  task automatic check(string what, real got, real exp_v, real tol);
    real err;
    checks++;
    err = got - exp_v; if (err < 0) err = -err;
    if (err > tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp_v);
    end
  endtask

  // run one unit, return latency
  task automatic run(input int which, output int lat);
    lat = 0;
    @(negedge clk);
    case (which) 0: st_div = 1; 1: st_sqrt = 1; 2: st_exp = 1; default: st_log = 1; endcase
    @(negedge clk);
    st_div = 0; st_sqrt = 0; st_exp = 0; st_log = 0;
    lat = 1;
    while (!((which == 0 && d_div) || (which == 1 && d_sqrt) ||
             (which == 2 && d_exp) || (which == 3 && d_log))) begin
      @(negedge clk); lat++;
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, tol;
    int lat;
    st_div = 0; st_sqrt = 0; st_exp = 0; st_log = 0; a = '0; b = FX_ONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      ra = (real'($urandom_range(0, 2000000)) - 1000000.0) / 10000.0;   // +-100
      rb = (real'($urandom_range(1, 2000000)) - 1000000.0) / 20000.0;   // +-50
      if (rb == 0.0) rb = 0.5;
      a = to_fx(ra); b = to_fx(rb);
      ra = to_r(a); rb = to_r(b);
      run(0, lat);
      check("div", to_r(q_div), ra / rb, 1e-6 + 1e-8 * (ra / rb < 0 ? -ra / rb : ra / rb));
      checks++; if (lat != 98) begin failures++; $display("FAIL div latency %0d", lat); end
      if (ra < 0) ra = -ra;
      a = to_fx(ra); ra = to_r(a);
      run(1, lat);
      check("sqrt", to_r(q_sqrt), $sqrt(ra), 1e-8);
      checks++; if (lat != 50) begin failures++; $display("FAIL sqrt latency %0d", lat); end
      run(3, lat);
      check("log", to_r(q_log), $ln(ra), 1e-7);
      checks++; if (lat != 34) begin failures++; $display("FAIL log latency %0d", lat); end
      ra = (real'($urandom_range(0, 400000)) - 250000.0) / 10000.0;     // -25 .. 15
      a = to_fx(ra); ra = to_r(a);
      run(2, lat);
      tol = 1e-8 + 1e-7 * $exp(ra);
      check("exp", to_r(q_exp), (ra < -23.0) ? $exp(-23.0) : $exp(ra), tol);
      checks++; if (lat != 14) begin failures++; $display("FAIL exp latency %0d", lat); end
    end
    // corner cases
    a = FX_ONE; b = '0; run(0, lat);
    checks++; if (q_div != FX_MAX) begin failures++; $display("FAIL div by zero"); end
    a = to_fx(1e-6); run(1, lat); check("sqrt small", to_r(q_sqrt), 1e-3, 1e-6);
    a = to_fx(40.0); run(2, lat); check("exp clamp", to_r(q_exp), $exp(21.0), 4.0);
    a = '0; run(3, lat); check("log zero", to_r(q_log), -22.18070977791825, 1e-6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
