// tb_mpop_pkg: checks the monitor-placement heuristic against published numbers.
//
// The worst-case isolation areas returned by mpop_pkg::heuristic are compared
// with the heuristic columns of the placement study for 4 x 4 (m = 1..7) and
// 8 x 8 (m = 1..15) arrays, with the N = 10, m = 3..9 values, and with the
// 2N-1, 3N/2-1 and N-1 monitor counts of the TPU-sized arrays (areas 1, 2, 4).
// It also checks that the split always uses m monitors (corner shared), and
// that evenly spaced positions end on the corner with no gap above
// ceil(N/count).
module tb_mpop_pkg;
  import mpop_pkg::*;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk_area(input int n, input int m, input int exp);
    split_t s;
    s = heuristic(n, m);
    checks++;
    if (s.area != exp) begin
      failures++;
      $display("FAIL N=%0d m=%0d area=%0d expected %0d (right=%0d bottom=%0d)",
               n, m, s.area, exp, s.right, s.bottom);
    end
    checks++;
    if (s.right + s.bottom - 1 != m || s.right > n || s.bottom > n) begin
      failures++;
      $display("FAIL N=%0d m=%0d split %0d+%0d", n, m, s.right, s.bottom);
    end
  endtask

  int n4 [7]  = '{16, 8, 4, 4, 2, 2, 1};
  int n8 [15] = '{64, 32, 16, 12, 8, 6, 4, 4, 4, 3, 2, 2, 2, 2, 1};
  int n10[7]  = '{25, 20, 15, 10, 8, 6, 4};   // m = 3..9

  initial begin
    @(posedge clk);
    for (int m = 1; m <= 7; m++)  chk_area(4, m, n4[m-1]);
    for (int m = 1; m <= 15; m++) chk_area(8, m, n8[m-1]);
    for (int m = 3; m <= 9; m++)  chk_area(10, m, n10[m-3]);
    // TPU-sized arrays: 2N-1 -> 1, 3N/2-1 -> 2, N-1 -> 4
    chk_area(256, 511, 1); chk_area(256, 383, 2); chk_area(256, 255, 4);
    chk_area(128, 255, 1); chk_area(128, 191, 2); chk_area(128, 127, 4);
    chk_area(64, 127, 1);  chk_area(64, 95, 2);   chk_area(64, 63, 4);
    chk_area(32, 63, 1);   chk_area(32, 47, 2);   chk_area(32, 31, 4);
    // positions
    for (int n = 2; n <= 40; n += 3) begin
      for (int c = 1; c <= n; c++) begin
        int prev, gap, maxgap;
        prev = 0; maxgap = 0;
        for (int k = 1; k <= c; k++) begin
          gap = mon_pos(n, c, k) - prev;
          if (gap > maxgap) maxgap = gap;
          if (gap < 1) maxgap = n + 100;
          prev = mon_pos(n, c, k);
        end
        checks++;
        if (prev != n || maxgap > (n + c - 1) / c) begin
          failures++;
          $display("FAIL positions n=%0d c=%0d last=%0d maxgap=%0d", n, c, prev, maxgap);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
