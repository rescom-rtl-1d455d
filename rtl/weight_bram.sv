// weight_bram: synaptic weight memory of one layer (block RAM on the
// FPGA the paper targets).
//
// The address is the concatenation {neuron index, weight index}, each
// field 8 bits for 256-input layers, which follows the paper's BRAM
// addressing figure: neuron indices give the offset of a contiguous region
// holding that neuron's weights, and a layer of 256 neurons fills
// 0x0000-0xFFFF. One read port (synchronous, one cycle latency, as a block
// RAM) serves the layer controllers; one write port (this design's
// addition) lets the host load trained weights. Words are 16-bit signed
// fixed point. Contents are not reset.
module weight_bram
  import rescom_pkg::*;
#(
  parameter int unsigned DEPTH  = 65536,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  // host write port
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  fix_t              wr_data,
  // read port
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output fix_t              rd_data
);

  fix_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
