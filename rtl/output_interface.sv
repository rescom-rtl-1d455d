// output_interface: spike-count decoder. It counts, over all time steps of
// an image, the spikes of each output neuron and reports the neuron with
// the highest count as the class (rate decoding, as the paper describes).
//
// `clear` zeroes the counters (start of an image); each cycle with `acc`
// adds the output spike vector `spikes` to them. Counters are COUNT_W bits
// and saturate (this design's choice). `class_id` is combinational from
// the counters: the index of the largest count, the lowest index on a tie
// (tie rule is this design's choice).
module output_interface #(
  parameter int unsigned N_OUT   = 10,
  parameter int unsigned COUNT_W = 8,
  parameter int unsigned CLS_W   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    acc,
  input  logic [N_OUT-1:0]        spikes,
  output logic [COUNT_W-1:0]      counts [N_OUT],
  output logic [CLS_W-1:0]        class_id
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_OUT); i++) counts[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < int'(N_OUT); i++) counts[i] <= '0;
    end else if (acc) begin
      for (int i = 0; i < int'(N_OUT); i++)
        if (spikes[i] && counts[i] != '1) counts[i] <= counts[i] + COUNT_W'(1);
    end
  end

  always_comb begin
    logic [COUNT_W-1:0] best;
    best     = counts[0];
    class_id = '0;
    for (int i = 1; i < int'(N_OUT); i++) begin
      if (counts[i] > best) begin
        best     = counts[i];
        class_id = CLS_W'(i);
      end
    end
  end

endmodule
