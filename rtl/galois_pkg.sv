// galois_pkg: constants and elaboration-time helpers shared by the GaloisCache RTL.
//
// A GaloisCache with 2^N sets and 2^N ways indexes both sets and ways by
// elements of GF(2^N). An element is held as an N-bit vector whose bit i is
// the coefficient of x^i (so set index 42 = 0b101010 is x^5 + x^3 + x).
// Addition is XOR; multiplication is carry-less polynomial multiplication
// reduced modulo an irreducible polynomial R of degree N.
//
// gf_poly() returns R (all N+1 coefficients, bit N set) for the field sizes
// tabulated for this cache: x^3+x+1, x^4+x+1, x^5+x^2+1, x^6+x+1 and
// x^7+x+1. Degree 2 (x^2+x+1, the only irreducible quadratic over GF(2)) is
// added for the 4x4 example layout; it is not in the table. Other degrees
// return 0 and must be given explicitly.
//
// gf_mul() is a plain shift-and-add field multiply. The RTL uses it only to
// compute constants at elaboration time; the datapath uses gf_const_mul.
package galois_pkg;

  // Degree used by the top level by default: a 64-set x 64-way cache.
  localparam int unsigned DEFAULT_N = 6;

  // Cache line size (bytes) and the CPU-side word width.
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned WORD_BITS  = 64;

  function automatic int unsigned gf_poly(input int unsigned n);
    case (n)
      2:       return 32'b111;        // x^2 + x + 1
      3:       return 32'b1011;       // x^3 + x + 1
      4:       return 32'b10011;      // x^4 + x + 1
      5:       return 32'b100101;     // x^5 + x^2 + 1
      6:       return 32'b1000011;    // x^6 + x + 1
      7:       return 32'b10000011;   // x^7 + x + 1
      default: return 32'd0;
    endcase
  endfunction

  // Product of a and b in GF(2^n) modulo poly (both operands below 2^n).
  function automatic int unsigned gf_mul(input int unsigned a, input int unsigned b,
                                         input int unsigned n, input int unsigned poly);
    int unsigned acc;
    int unsigned aa;
    acc = 0;
    aa  = a;
    for (int i = 0; i < 16; i++) begin
      if (i < int'(n)) begin
        if (b[i]) acc = acc ^ aa;
        aa = aa << 1;
        if (aa[n]) aa = aa ^ poly;
      end
    end
    return acc;
  endfunction

endpackage
