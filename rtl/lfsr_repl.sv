// lfsr_repl: pseudo-random replacement way selector.
//
// A 16-bit Galois LFSR with the maximal-length polynomial
// x^16 + x^14 + x^13 + x^11 + 1 steps once per clock while en is high and
// its low N bits name the way to evict. The sequence has period 65535, so
// over a period every way value appears 2^(16-N) times, except way 0 which
// appears once less. The cache's security argument relies on random or
// pseudo-random replacement; the choice of an LFSR, its polynomial, its width
// and its seed are this design's own.
//
// Interface: en advances the register; way is the current victim way,
// valid from the clock after reset. Reset loads SEED (must be non-zero).
module lfsr_repl #(
  parameter int unsigned N    = 6,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [N-1:0] way
);

  localparam logic [15:0] TAPS = 16'hB400;

  logic [15:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= state[0] ? ((state >> 1) ^ TAPS) : (state >> 1);
  end

  assign way = state[N-1:0];

  initial assert (SEED != 16'h0 && N <= 16) else $error("lfsr_repl: SEED must be non-zero, N at most 16");

endmodule
