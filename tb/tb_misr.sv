// tb_misr: self-checking test of the signature register at 24 and 4 bits.
//
// Random words are folded in with random enables and occasional clears; after
// every cycle the register is compared with the bit-level reference model. It
// then checks that one flipped word in a 64-word stream changes the signature.
module tb_misr;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic clear, en, clear4, en4;
  logic [23:0] d, sig;
  logic [3:0]  d4, sig4;
  logic [63:0] ref24, ref4;

  misr #(.W(24)) dut   (.clk, .rst_n, .clear, .en, .data_in(d), .sig);
  misr #(.W(4))  dut4  (.clk, .rst_n, .clear(clear4), .en(en4), .data_in(d4), .sig(sig4));

  function automatic logic [23:0] stream_sig(input int flip_at);
    logic [63:0] s;
    s = '0;
    for (int i = 0; i < 64; i++) begin
      logic [63:0] w;
      w = 64'(i * 32'h9E3779B1) & 64'hFFFFFF;
      if (i == flip_at) w[5] = ~w[5];
      s = misr_ref(s, w, 24);
    end
    return s[23:0];
  endfunction

  initial begin
    clear = 0; en = 0; d = '0; clear4 = 0; en4 = 0; d4 = '0;
    ref24 = '0; ref4 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      clear  = ($urandom_range(0, 49) == 0);
      en     = ($urandom_range(0, 3) != 0);
      d      = 24'($urandom);
      clear4 = ($urandom_range(0, 49) == 0);
      en4    = ($urandom_range(0, 3) != 0);
      d4     = 4'($urandom);
      if (clear)   ref24 = '0;
      else if (en) ref24 = misr_ref(ref24, 64'(d), 24);
      if (clear4)   ref4 = '0;
      else if (en4) ref4 = misr_ref(ref4, 64'(d4), 4);
      @(posedge clk); #1;
      checks++;
      if (sig !== ref24[23:0]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d sig=%h ref=%h", t, sig, ref24[23:0]);
      end
      checks++;
      if (sig4 !== ref4[3:0]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d sig4=%h ref=%h", t, sig4, ref4[3:0]);
      end
    end
    // one corrupted word changes the signature (model-level property, then DUT)
    @(negedge clk); clear = 1; en = 0;
    @(negedge clk); clear = 0; en = 1;
    for (int i = 0; i < 64; i++) begin
      d = 24'(i * 32'h9E3779B1);
      if (i == 17) d[5] = ~d[5];
      @(negedge clk);
    end
    en = 0;
    checks++;
    if (sig !== stream_sig(17) || sig === stream_sig(-1)) begin
      failures++;
      $display("FAIL corrupted stream sig=%h exp=%h clean=%h", sig, stream_sig(17), stream_sig(-1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
