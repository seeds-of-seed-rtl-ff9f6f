// sdid_ctx: security-domain context register.
//
// Holds the identifier t of the security domain whose requests the cache is
// currently serving, together with the product b*t in GF(2^N). The product is
// formed once, when the domain is written (a context switch), by a
// constant-by-variable XOR network, and is then kept in a register so that
// the per-request path of the skewing function only multiplies by the way
// numbers. Precomputing b*t into dedicated registers follows the paper;
// holding a single current domain with a write port (rather than one
// register per domain selected by a per-request ID) is this design's choice.
//
// Interface: set_valid/set_sdid write a new domain; sdid and bt show the
// current domain and its product. Timing: the new values appear one clock
// after the write. Reset selects domain 0 (bt = 0).
module sdid_ctx #(
  parameter int unsigned N    = 6,
  parameter int unsigned POLY = galois_pkg::gf_poly(N),
  parameter int unsigned B    = 1    // non-zero
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         set_valid,
  input  logic [N-1:0] set_sdid,
  output logic [N-1:0] sdid,
  output logic [N-1:0] bt
);

  logic [N-1:0] bt_next;

  gf_const_mul #(.N(N), .POLY(POLY), .K(B)) u_mul_b (.x(set_sdid), .y(bt_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sdid <= '0;
      bt   <= '0;
    end else if (set_valid) begin
      sdid <= set_sdid;
      bt   <= bt_next;
    end
  end

  initial assert (B != 0 && B < 2 ** N) else $error("sdid_ctx: B must be a non-zero field element");

endmodule
