// tb_cyclic_ram: self-checking test of the cyclically partitioned memory.
// Three configurations are run through cyclic_ram_harness, which compares
// every word read back against a flat model after random tile writes with
// random word enables: a 12 x 6 array partitioned by 4 in dimension 1 (the
// arrangement of the cyclic-partition figure), an 8 x 8 array partitioned
// 4 x 4, and a 5 x 10 array partitioned completely in dimension 2.  Word
// [a][b] of tile (trow, tcol) must be element (trow*PR + a, tcol*PC + b),
// i.e. rows k, k+1, .. k+PR-1 come from different banks at one level, as the
// cyclic partition requires.  Read latency is one clock.
module tb_cyclic_ram;
  import cnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic go = 0;
  logic fin_a, fin_b, fin_c;
  int ca, cb, cc, fa, fb, fc;

  cyclic_ram_harness #(.ROWS(12), .COLS(6),  .PR(4), .PC(1))  h_a (.clk, .go, .fin(fin_a), .n_checks(ca), .n_fail(fa));
  cyclic_ram_harness #(.ROWS(8),  .COLS(8),  .PR(4), .PC(4))  h_b (.clk, .go, .fin(fin_b), .n_checks(cb), .n_fail(fb));
  cyclic_ram_harness #(.ROWS(5),  .COLS(10), .PR(1), .PC(10)) h_c (.clk, .go, .fin(fin_c), .n_checks(cc), .n_fail(fc));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    go = 1;
    wait (fin_a && fin_b && fin_c);
    checks = ca + cb + cc;
    failures += fa + fb + fc;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
