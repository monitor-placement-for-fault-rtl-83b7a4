// tb_pe: self-checking test of one weight-stationary PE.
//
// Loads a weight through the shift chain, then drives random signed
// activations and partial sums and checks, one cycle later, the registered
// partial sum (psum_in + w * act, 24-bit wrap), the forwarded activation and
// the valid bits. With fault injection on it checks that the XOR-ed activation
// is both used and forwarded. The one-cycle latency is checked on every step.
module tb_pe;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               w_load, act_valid_in, act_valid_out, psum_valid_out, fi_en;
  logic signed [7:0]  w_in, w_out, act_in, act_out;
  logic        [7:0]  fi_mask;
  logic signed [23:0] psum_in, psum_out;

  pe dut (.*);

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    logic signed [7:0]  w, a, a_eff;
    logic signed [23:0] p;
    logic               v;
    longint             expv;
    w_load = 0; w_in = 0; act_valid_in = 0; act_in = 0; psum_in = 0; fi_en = 0; fi_mask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      w = 8'($urandom);
      if (round == 0) w = -8'sd128;
      if (round == 1) w = 8'sd127;
      @(negedge clk); w_load = 1; w_in = w;
      @(negedge clk); w_load = 0; w_in = 8'($urandom);
      check("w_out", w_out, w);
      for (int t = 0; t < 50; t++) begin
        a = 8'($urandom); p = 24'($urandom); v = 1'($urandom);
        if (t == 0) a = -8'sd128;
        fi_en   = (round >= 10) && ($urandom_range(0, 1) == 1);
        fi_mask = 8'($urandom);
        act_in = a; psum_in = p; act_valid_in = v;
        a_eff = fi_en ? (a ^ fi_mask) : a;
        @(negedge clk);
        expv = longint'(p) + longint'(w) * longint'(a_eff);
        check("psum", psum_out, 64'(signed'(24'(expv))));
        check("act", act_out, a_eff);
        check("act_valid", act_valid_out, v);
        check("psum_valid", psum_valid_out, v);
        check("w hold", w_out, w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
