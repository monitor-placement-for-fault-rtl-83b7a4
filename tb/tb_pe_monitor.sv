// tb_pe_monitor: self-checking test of the MISR-based PE monitor.
//
// Each run writes a golden value computed with the reference MISR model, pulses
// start with a random K and feeds K valid partial sums with random gaps. It
// checks that done rises exactly two cycles after the K-th valid word, that
// busy is high in between, and that fail is low for a clean stream and high
// when one word of the stream (or the golden value) is wrong. Words presented
// after the window closes must not change the verdict.
module tb_pe_monitor;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_pass = 0, n_fail = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        start, golden_we, psum_valid, busy, done, fail;
  logic [15:0] k_cycles;
  logic [23:0] golden_data, psum, sig;

  pe_monitor dut (.*);

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    start = 0; golden_we = 0; psum_valid = 0; k_cycles = 0; golden_data = 0; psum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      int k, corrupt_at, wait_cyc;
      logic [63:0] s;
      logic [23:0] words [];
      k = $urandom_range(1, 40);
      corrupt_at = (run % 3 == 1) ? $urandom_range(0, k - 1) : -1;
      words = new[k];
      s = '0;
      foreach (words[i]) begin
        words[i] = 24'($urandom);
        s = misr_ref(s, 64'(words[i]), 24);
      end
      // golden
      @(negedge clk);
      golden_we = 1; golden_data = s[23:0];
      if (run % 3 == 2) golden_data[$urandom_range(0, 23)] ^= 1'b1;
      @(negedge clk); golden_we = 0;
      start = 1; k_cycles = 16'(k);
      @(negedge clk); start = 0; k_cycles = 16'($urandom);
      check("busy after start", busy, 1);
      for (int i = 0; i < k; i++) begin
        while ($urandom_range(0, 2) == 0) begin
          psum_valid = 0; psum = 24'($urandom);
          @(negedge clk);
          check("not done early", done, 0);
        end
        psum_valid = 1;
        psum = (i == corrupt_at) ? (words[i] ^ 24'h000100) : words[i];
        @(negedge clk);
      end
      // extra valid words after the window must be ignored
      psum_valid = 1; psum = 24'($urandom);
      check("not done 1 after", done, 0);
      @(negedge clk);
      psum_valid = 0;
      check("done 2 after", done, 1);
      check("fail", fail, (run % 3 != 0) ? 1 : 0);
      if (fail) n_fail++; else n_pass++;
      wait_cyc = $urandom_range(0, 5);
      repeat (wait_cyc) @(negedge clk);
      check("done held", done, 1);
      check("busy low", busy, 0);
    end
    check("saw passes", n_pass > 0, 1);
    check("saw fails", n_fail > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
