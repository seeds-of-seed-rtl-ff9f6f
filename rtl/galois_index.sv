// galois_index: the skewing permutation Pi(t, s, w) = a*s + b*t*w + c (mod R)
// evaluated for all 2^N ways at once.
//
// The set index s, the domain product bt = b*t and every way number w are
// elements of GF(2^N). For each way w the constant multiplier bt*w is an XOR
// network (w is fixed per way), a*s is formed by one more constant
// multiplier in parallel with them, and the final sum is an XOR with the
// constant c. The result idx[w] is the row that way w must read for set s
// of domain t. For two different domains t, t' and any sets s, s' there is
// exactly one way in which both rows coincide; within one domain and one way
// the map s -> idx[w] is a bijection.
//
// The formula, a, b, c as design-time constants and taking b*t precomputed
// (so the critical path holds only the multiplications by w) follow the
// paper. Packing the result as an unpacked array indexed by way is this
// design's choice.
//
// Interface: s and bt (N bits each) in, idx[0..2^N-1] (N bits each) out,
// purely combinational. Way 0 multiplies bt by zero, so idx[0] = a*s + c for
// every domain; with the default a = 1, c = 0 it is s itself.
module galois_index #(
  parameter int unsigned N    = 6,
  parameter int unsigned POLY = galois_pkg::gf_poly(N),
  parameter int unsigned A    = 1,   // non-zero
  parameter int unsigned C    = 0
) (
  input  logic [N-1:0] s,
  input  logic [N-1:0] bt,
  output logic [N-1:0] idx [2**N]
);

  localparam int unsigned WAYS = 2 ** N;

  logic [N-1:0] as_term;
  logic [N-1:0] btw [WAYS];

  gf_const_mul #(.N(N), .POLY(POLY), .K(A)) u_mul_a (.x(s), .y(as_term));

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    gf_const_mul #(.N(N), .POLY(POLY), .K(w)) u_mul_w (.x(bt), .y(btw[w]));
    assign idx[w] = as_term ^ btw[w] ^ N'(C);
  end

  initial begin
    assert (A != 0 && A < WAYS) else $error("galois_index: A must be a non-zero field element");
    assert (C < WAYS) else $error("galois_index: C must be a field element");
  end

endmodule
