// tb_ref_pkg: reference models shared by the testbenches.
//
// misr_ref is a bit-by-bit model of the signature register written from the
// feedback polynomial's tap list rather than a mask: bit i of the next state is
// the previous bit i-1, plus the old top bit if x^i is a term of the polynomial,
// plus data bit i (all sums modulo 2). Taps are given for the 4-bit and 24-bit
// widths used in the tests.
package tb_ref_pkg;

  function automatic bit has_tap(input int w, input int i);
    case (w)
      4:  return (i == 3) || (i == 0);
      24: return (i == 23) || (i == 22) || (i == 17) || (i == 0);
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic [63:0] misr_ref(input logic [63:0] s, input logic [63:0] d,
                                           input int w);
    logic [63:0] n;
    n = '0;
    for (int i = 0; i < w; i++) begin
      n[i] = ((i > 0) ? s[i-1] : 1'b0) ^ (has_tap(w, i) ? s[w-1] : 1'b0) ^ d[i];
    end
    return n;
  endfunction

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

endpackage
