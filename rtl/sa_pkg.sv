// sa_pkg: widths and helper functions shared by the monitored systolic array.
//
// The default data widths follow the first PE design the area study is built on:
// 8-bit signed weights and activations, a 16-bit product and a 24-bit partial-sum
// accumulator, with a monitor MISR as wide as the partial sum (24 bits). The
// default array is 256 x 256, the TPU-sized array used as the headline case.
// The MISR feedback polynomials are this design's own choice: the paper does not
// give one, so a maximal-length (primitive) polynomial is picked per width.
package sa_pkg;

  parameter int unsigned N_DEFAULT   = 256; // array rows = columns
  parameter int unsigned DATA_W      = 8;   // weight / activation width
  parameter int unsigned ACC_W       = 24;  // partial-sum / MISR width
  parameter int unsigned CNT_W       = 16;  // monitor cycle-counter width (K)

  // Feedback mask of a Galois-form MISR of width w: bit t set means x^t appears
  // in the characteristic polynomial (the x^w term is implicit). Primitive
  // polynomials from the usual maximal-length LFSR tap tables.
  function automatic logic [63:0] misr_poly(input int unsigned w);
    logic [63:0] p;
    p = '0;
    case (w)
      4:       begin p[3] = 1'b1; p[0] = 1'b1; end                      // x^4+x^3+1
      8:       begin p[6] = 1'b1; p[5] = 1'b1; p[4] = 1'b1; p[0] = 1'b1; end // x^8+x^6+x^5+x^4+1
      16:      begin p[15] = 1'b1; p[13] = 1'b1; p[4] = 1'b1; p[0] = 1'b1; end
      24:      begin p[23] = 1'b1; p[22] = 1'b1; p[17] = 1'b1; p[0] = 1'b1; end
      32:      begin p[22] = 1'b1; p[2] = 1'b1; p[1] = 1'b1; p[0] = 1'b1; end
      default: begin p[w-1] = 1'b1; p[0] = 1'b1; end                    // fallback, not guaranteed primitive
    endcase
    return p;
  endfunction

  // Number of bits needed to index n items (at least 1).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
