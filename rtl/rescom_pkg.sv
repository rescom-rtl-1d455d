// rescom_pkg: types and constants shared by the ReSCom spiking accelerator.
//
// Numbers inside the accelerator are 16-bit two's-complement fixed point
// (16-bit fixed data is the format the design reports). The split into
// integer and fraction bits is this design's choice: 12 fraction bits
// (Q3.12, range -8 .. +8), so the firing threshold 1.0 is 4096.
// Decay factors (alpha, beta) are unsigned 8-bit fractions, value/255, which
// is the resolution of the 8-bit comparators that turn them into
// stochastic bit-streams.
// The neuron model is chosen by a 2-bit mode word (the width is the
// paper's; the code points are this design's own).
package rescom_pkg;

  localparam int unsigned DATA_W  = 16;  // neuron state and weight width
  localparam int unsigned FRAC_W  = 12;  // fraction bits of DATA_W words
  localparam int unsigned RND_W   = 8;   // LFSR / comparator width
  localparam int unsigned PIXEL_W = 8;   // input pixels are 0..255

  typedef logic signed [DATA_W-1:0] fix_t;
  typedef logic        [RND_W-1:0]  rnd_t;

  // 2-bit neuron mode select
  typedef enum logic [1:0] {
    MODE_IF  = 2'd0,   // integrate-and-fire
    MODE_LIF = 2'd1,   // leaky integrate-and-fire
    MODE_SYN = 2'd2,   // synaptic (second order) neuron
    MODE_RSV = 2'd3    // reserved: state is held
  } mode_e;

  // 1.0 in the fix_t format
  localparam fix_t FIX_ONE = fix_t'(1 << FRAC_W);

  // Saturate a wide signed value into fix_t.
  function automatic fix_t sat_fix(input logic signed [31:0] v);
    if (v > 32'sd32767)       return fix_t'(16'sh7fff);
    else if (v < -32'sd32768) return fix_t'(16'sh8000);
    else                      return fix_t'(v[DATA_W-1:0]);
  endfunction

endpackage
