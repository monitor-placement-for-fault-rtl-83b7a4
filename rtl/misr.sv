// misr: multiple-input signature register.
//
// A W-bit shift register with XOR feedback (Galois form) into which a W-bit
// data word is XORed every enabled cycle:
//   sig' = {sig[W-2:0], 0} ^ (sig[W-1] ? POLY : 0) ^ data_in
// After a run of K words the register holds a signature of the whole stream;
// a single changed word changes the signature (errors can only cancel when
// several words differ). clear loads the all-zero seed and takes priority over
// en. The signature is registered: sig shows the effect of a word one cycle
// after it was presented.
//
// Follows the paper: flip-flops in a shift arrangement, XOR feedback, new data
// XORed in each cycle, width equal to the partial-sum width (24 bits). This
// design's own choices: the Galois form, the primitive feedback polynomial
// (x^24 + x^23 + x^22 + x^17 + 1 at the default width), the zero seed and the
// enable/clear controls.
module misr
  import sa_pkg::*;
#(
  parameter int unsigned    W    = ACC_W,
  parameter logic [W-1:0]   POLY = W'(misr_poly(W))
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [W-1:0] data_in,
  output logic [W-1:0] sig
);

  logic [W-1:0] nxt;

  always_comb begin
    nxt = {sig[W-2:0], 1'b0};
    if (sig[W-1]) nxt = nxt ^ POLY;
    nxt = nxt ^ data_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sig <= '0;
    else if (clear) sig <= '0;
    else if (en)    sig <= nxt;
  end

endmodule
