// gf_const_mul: y = K * x mod R in GF(2^N), for a constant K fixed at
// elaboration time.
//
// Because K is known when the circuit is built, the product needs no AND
// gates: the carry-less product is the XOR of copies of x shifted left by
// every position j where K has a one (at most N-1 XOR levels). The 2N-1 bit
// product is then reduced from its top bit down: whenever bit i >= N is set,
// R shifted left by i-N is XORed in, which clears bit i. Each reduction step
// is again only XORs gated by a product bit, so the whole unit is an XOR
// network with no clock.
//
// The shift-and-XOR multiply and the subsequent reduction by shifted copies
// of R follow the paper's implementation section; writing the reduction as a
// top-down loop is this design's choice.
//
// Interface: x (N bits) in, y (N bits) out, purely combinational. The
// default K = 2 (multiplication by x) only sets a stand-alone default; every
// instance in the cache passes its own constant, and K = 1 reduces to wires.
module gf_const_mul #(
  parameter int unsigned N    = 6,
  parameter int unsigned POLY = galois_pkg::gf_poly(N),  // R with bit N set
  parameter int unsigned K    = 2                        // constant factor, < 2^N
) (
  input  logic [N-1:0] x,
  output logic [N-1:0] y
);

  localparam int unsigned PW = 2 * N - 1;                // product width
  localparam logic [PW-1:0] R_VEC = PW'(POLY);
  localparam logic [N-1:0]  K_VEC = N'(K);

  logic [PW-1:0] prod;

  always_comb begin
    prod = '0;
    // carry-less multiply: XOR of shifted copies of x
    for (int j = 0; j < int'(N); j++) begin
      if (K_VEC[j]) prod = prod ^ (PW'(x) << j);
    end
    // reduction modulo R, highest degree first
    for (int i = PW - 1; i >= int'(N); i--) begin
      if (prod[i]) prod = prod ^ (R_VEC << (i - int'(N)));
    end
    y = prod[N-1:0];
  end

  initial begin
    assert (POLY[N] == 1'b1 && POLY < (2 ** (N + 1)))
      else $error("gf_const_mul: POLY must have degree N");
    assert (K < 2 ** N) else $error("gf_const_mul: K must be below 2^N");
  end

endmodule
