// lfsr: configurable linear feedback shift register, the random source of
// the stochastic number generators.
//
// Structure: a chain of WIDTH D flip-flops q[0] -> q[1] -> ... -> q[WIDTH-1]
// with run-time polynomial and seed inputs and a seed load `ld`, as in the
// paper's configurable LFSR figure. The feedback is the standard Fibonacci
// form (this design's reading): stage i's output is ANDed with polynomial
// bit poly[WIDTH-1-i] and all these products are XORed into the new value
// of q[0]. The figure labels a polynomial bit on every tap but the one of
// the last stage, and prints P0 on the tap before it; this design gates
// every stage, including the last, with one polynomial bit (poly[0] gates
// q[WIDTH-1]),
// so all WIDTH bits of poly are used. `en` (this design's addition) lets
// the register advance only when a random number is consumed.
//
// Timing: one step per clock while en=1; ld has priority over en. The
// output `q` is the register itself. A maximal-length 8-bit polynomial in
// this convention is 8'h1D (period 255); the all-zero seed locks up.
module lfsr #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ld,      // load seed
  input  logic             en,      // advance one step
  input  logic [WIDTH-1:0] poly,    // (P_{n-1} .. P_0)
  input  logic [WIDTH-1:0] seed,    // (S_{n-1} .. S_0)
  output logic [WIDTH-1:0] q
);

  logic fb;

  always_comb begin
    fb = 1'b0;
    for (int i = 0; i < int'(WIDTH); i++)
      fb ^= q[i] & poly[WIDTH-1-i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= {{(WIDTH-1){1'b0}}, 1'b1};
    else if (ld)     q <= seed;
    else if (en)     q <= {q[WIDTH-2:0], fb};
  end

endmodule
