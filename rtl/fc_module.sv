// fc_module: the shared fully connected module of a layer, reused by all
// of the layer's neurons in turn (time multiplexing).
//
// One weight register per input (the register column of the paper's
// layer figure) holds the weights of the neuron being evaluated; they are
// written one per cycle from the weight BRAM through `we`/`widx`/`wdata`.
// Each register feeds a 2:1 multiplexer selected by that input's spike
// (weight or zero), and an exact adder tree sums the multiplexer outputs:
//   syn_weight = sum over i of spike[i] ? w[i] : 0.
// The sum is formed at full width and saturated to 16 bits (saturation is
// this design's choice). The sum is combinational from the registers and
// the spike vector, so it is valid the cycle after the last weight write
// and stays valid while the registers are not written.
module fc_module
  import rescom_pkg::*;
#(
  parameter int unsigned N_IN = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [$clog2(N_IN)-1:0] widx,
  input  fix_t                    wdata,
  input  logic [N_IN-1:0]         spikes,
  output fix_t                    syn_weight
);

  fix_t w [N_IN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_IN); i++) w[i] <= '0;
    end else if (we) begin
      w[widx] <= wdata;
    end
  end

  // spike-gated adder tree
  logic signed [31:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < int'(N_IN); i++)
      acc += spikes[i] ? 32'(w[i]) : 32'sd0;
  end

  assign syn_weight = sat_fix(acc);

endmodule
