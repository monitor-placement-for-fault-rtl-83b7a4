// tb_table3_placements: isolation areas of the published area-overhead
// configurations, checked on the signature decoder at full array size.
//
// For each (N, m) pair of the overhead study (N = 256, 128, 64, 32 with
// m = 2N-1, 3N/2-1 and N-1, plus the m = N/2-1 rows the study also lists), a
// fault_localizer of that size is driven with the signature of every one of
// the N*N possible faulty PEs. Each result is checked against the expected
// rectangle, and the worst case over all PEs is compared with the isolation
// area expected for that m: 1 for 2N-1, 2 for 3N/2-1, 4 for N-1. The m = N/2-1
// rows are checked against the heuristic's own bound (16), since an area of 4
// cannot be reached with so few border monitors. The split of m between the
// borders is entered here by hand from the split rule.
module tb_table3_placements;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NC = 16;
  localparam int CN [NC] = '{256, 256, 256, 128, 128, 128, 128, 64, 64, 64, 64, 32, 32, 32, 32, 4};
  localparam int CM [NC] = '{511, 383, 255, 255, 191, 127,  63, 127, 95, 63, 31, 63, 47, 31, 15, 7};
  localparam int CR [NC] = '{256, 128, 128, 128,  64,  64,  32,  64, 32, 32, 16, 32, 16, 16,  8, 4};
  localparam int CB [NC] = '{256, 256, 128, 128, 128,  64,  32,  64, 64, 32, 16, 32, 32, 16,  8, 4};
  localparam int CA [NC] = '{  1,   2,   4,   1,   2,   4,  16,   1,  2,  4, 16,  1,  2,  4, 16, 1};

  int  c [NC], f [NC], e [NC], a [NC], inc [NC], wa [NC];
  bit  d [NC];

  for (genvar i = 0; i < NC; i++) begin : g_cfg
    loc_checker #(.N(CN[i]), .M(CM[i]), .R(CR[i]), .B(CB[i])) u (
      .clk, .rst_n, .checks(c[i]), .failures(f[i]), .n_exact(e[i]), .n_area(a[i]),
      .n_incons(inc[i]), .worst_area(wa[i]), .finished(d[i]));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NC; i++) wait (d[i]);
    for (int i = 0; i < NC; i++) begin
      checks += c[i] + 1;
      failures += f[i];
      if (wa[i] != CA[i]) begin
        failures++;
        $display("FAIL N=%0d m=%0d worst isolation area %0d, expected %0d", CN[i], CM[i], wa[i], CA[i]);
      end
      $display("N=%3d m=%3d  right/bottom=%3d/%3d  worst isolation area=%0d  PEs named exactly=%0d",
               CN[i], CM[i], CR[i], CB[i], wa[i], e[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
