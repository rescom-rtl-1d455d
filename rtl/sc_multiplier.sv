// sc_multiplier: stochastic multiplier of a signed neuron state by an
// unsigned factor in [0,1] (the decay alpha or beta).
//
// Following the paper's stochastic multiplier figure: the state is turned
// into a bit-stream by an LFSR number and a comparator feeding a shift
// register (sng), the stream is ANDed bit by bit with the factor's stream
// (`other_sr`, produced once per layer and shared by all neurons), and a
// ones counter counts the result. The count divided by the stream length
// 2^len_log2 is the product; the division is a shift.
//
// Encoding choices of this design (the paper gives none): the state is
// sign-magnitude; the magnitude, saturated to below 2.0, is encoded as a
// unipolar stream of value |x|/2 using its 8 bits below the 2.0 weight, and
// the sign is applied to the decoded product. The product is therefore
// exact to within the stream's resolution of 2/2^len_log2, and states of
// magnitude 2.0 or more are multiplied as if they were just below 2.0.
//
// Timing: `clr` one cycle, then 2^len_log2 cycles of `sht` with `x` held
// stable and a new `rnd` each cycle; `prod` is combinational from the
// shift registers and valid after the last shift. len_log2 must not exceed
// log2(MAX_LEN); MAX_LEN is a power of two.
module sc_multiplier
  import rescom_pkg::*;
#(
  parameter int unsigned MAX_LEN = 16,
  parameter int unsigned LEN_LW  = $clog2(MAX_LEN) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               sht,
  input  fix_t               x,          // signed state operand
  input  rnd_t               rnd,        // random number for x's stream
  input  logic [MAX_LEN-1:0] other_sr,   // factor's bit-stream
  input  logic [LEN_LW-1:0]  len_log2,   // stream length = 2^len_log2
  output fix_t               prod
);

  localparam int unsigned CNT_W = $clog2(MAX_LEN + 1);
  localparam int unsigned MAG_W = FRAC_W + 1;   // magnitude bits below 2.0

  logic [DATA_W-1:0]  mag;
  logic [MAG_W-1:0]   mag_sat;
  rnd_t               op;
  logic [MAX_LEN-1:0] x_sr;
  logic [MAX_LEN-1:0] and_sr;
  logic [CNT_W-1:0]   ones;
  logic [31:0]        pwide;
  logic [DATA_W-1:0]  pmag;

  assign mag     = x[DATA_W-1] ? DATA_W'(-x) : DATA_W'(x);
  assign mag_sat = (mag >= DATA_W'(1 << MAG_W)) ? '1 : mag[MAG_W-1:0];
  assign op      = mag_sat[MAG_W-1 -: RND_W];

  sng #(.RND_W(RND_W), .MAX_LEN(MAX_LEN)) u_sng (
    .clk, .rst_n, .clr, .sht, .op, .rnd, .sr(x_sr)
  );

  // multiplication: bitwise AND of the two streams
  assign and_sr = x_sr & other_sr;

  // 1's counter
  always_comb begin
    ones = '0;
    for (int i = 0; i < int'(MAX_LEN); i++)
      ones += CNT_W'(and_sr[i]);
  end

  // destochasticise: ones / 2^len_log2 * 2.0, as a shift
  assign pwide = (32'(ones) << MAG_W) >> len_log2;
  assign pmag  = pwide[DATA_W-1:0];   // at most 2^MAG_W, fits
  assign prod = x[DATA_W-1] ? fix_t'(-pmag) : fix_t'(pmag);

endmodule
