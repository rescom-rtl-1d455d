// sng: stochastic number generator, the "CMP* + SR" pair of the paper's
// stochastic multiplier figure.
//
// Each `sht` clock the unsigned operand `op` is compared with the random
// number `rnd` and the result bit is shifted into the shift register `sr`
// (new bit at sr[0]). With rnd uniformly distributed over 1..2^RND_W-1 (a
// maximal-length LFSR) the bit is 1 with probability op/(2^RND_W-1), so
// after N shifts sr[N-1:0] is a unipolar bit-stream of length N for op.
// The comparison is op >= rnd (direction is this design's choice: it maps
// op=0 to an all-zero and op=2^RND_W-1 to an all-one stream). `clr` empties
// the register before a new stream, so positions above the stream length
// stay 0. Operand and random number are read in the cycle of the shift.
module sng #(
  parameter int unsigned RND_W   = 8,
  parameter int unsigned MAX_LEN = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,    // empty the shift register
  input  logic               sht,    // shift in one new stochastic bit
  input  logic [RND_W-1:0]   op,     // value to encode, op/(2^RND_W-1)
  input  logic [RND_W-1:0]   rnd,    // random number
  output logic [MAX_LEN-1:0] sr      // bit-stream, newest bit in sr[0]
);

  logic bit_s;
  assign bit_s = (op >= rnd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sr <= '0;
    else if (clr)  sr <= '0;
    else if (sht)  sr <= {sr[MAX_LEN-2:0], bit_s};
  end

endmodule
