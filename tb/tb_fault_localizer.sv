// tb_fault_localizer: exhaustive single-fault test of the signature decoder.
//
// Three configurations: a 4 x 4 array with the optimal 7 monitors (every
// fault must be named exactly), a 10 x 10 array with 6 monitors (split 2 right
// / 5 bottom by the heuristic, worst-case isolation area 10) and an 8 x 8
// array with 11 monitors (split 4 / 8, worst case 2). Each checker applies
// the signature of every possible faulty PE and compares the reported
// rectangle with one computed independently, then tries impossible
// signatures, which must be flagged inconsistent.
module tb_fault_localizer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c0, f0, e0, a0, i0, c1, f1, e1, a1, i1, c2, f2, e2, a2, i2;
  bit d0, d1, d2;

  loc_checker #(.N(4),  .M(7),  .R(4), .B(4)) u0 (.clk, .rst_n, .checks(c0), .failures(f0),
    .n_exact(e0), .n_area(a0), .n_incons(i0), .worst_area(), .finished(d0));
  loc_checker #(.N(10), .M(6),  .R(2), .B(5)) u1 (.clk, .rst_n, .checks(c1), .failures(f1),
    .n_exact(e1), .n_area(a1), .n_incons(i1), .worst_area(), .finished(d1));
  loc_checker #(.N(8),  .M(11), .R(4), .B(8)) u2 (.clk, .rst_n, .checks(c2), .failures(f2),
    .n_exact(e2), .n_area(a2), .n_incons(i2), .worst_area(), .finished(d2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2 + 3;
    failures = f0 + f1 + f2;
    // the exact-localization configuration names every PE exactly
    if (e0 != 16) failures++;
    // the reduced ones report areas larger than one PE
    if (a1 == 0) failures++;
    if (i0 + i1 + i2 == 0) failures++;
    $display("exact=%0d/%0d/%0d  areas>1=%0d/%0d/%0d  inconsistent=%0d",
             e0, e1, e2, a0, a1, a2, i0 + i1 + i2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
