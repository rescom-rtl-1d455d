// rom_controller: keeps the neuron index and the weight index of a layer,
// forms the BRAM address from them, and times the stochastic bit-stream.
//
// Address: rom_address = {neuron index, weight index}, so each neuron owns
// a contiguous region of N_IN words (the paper's BRAM addressing figure).
// ld_weight clears both indices. Each cycle with ld_valid a read is issued
// and, with inc_weight_addr, the weight index advances; ld_w flags the
// last address of the neuron. The data come back one cycle later and are
// written into weight register reg_idx (reg_we).
//
// Bit-stream timing (the Counter / num_bit / CMP group of the paper's
// stochastic multiplier figure): ld_complete clears the counter (init_cnt)
// and starts the stream. Every streaming cycle asserts sht (one bit into
// every shift register, one LFSR step) and increments the counter
// (inc_cnt); the comparator raises co on the last of num_bit = 2^len_log2
// cycles. The next cycle is the update cycle: upd strobes the neuron
// ld_w_neuron_out, co_neuron pulses, and the neuron index advances; at the
// last neuron process_completed pulses with it and the index wraps to 0.
// mul_clr empties the selected neuron's shift registers in the first load
// cycle of that neuron.
module rom_controller #(
  parameter int unsigned N_IN    = 256,
  parameter int unsigned N_NEUR  = 256,
  parameter int unsigned MAX_LEN = 16,
  parameter int unsigned WIDX_W  = $clog2(N_IN),
  parameter int unsigned NIDX_W  = (N_NEUR > 1) ? $clog2(N_NEUR) : 1,
  parameter int unsigned LEN_LW  = $clog2(MAX_LEN) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ld_weight,        // clear indices
  input  logic                     ld_valid,         // read a weight
  input  logic                     inc_weight_addr,  // advance weight index
  input  logic                     ld_complete,      // start bit-stream
  input  logic [LEN_LW-1:0]        len_log2,
  output logic [NIDX_W+WIDX_W-1:0] rom_address,
  output logic                     rom_rd,
  output logic                     reg_we,
  output logic [WIDX_W-1:0]        reg_idx,
  output logic                     ld_w,
  output logic                     mul_clr,
  output logic                     sht,
  output logic                     co,
  output logic                     upd,
  output logic [NIDX_W-1:0]        ld_w_neuron_out,
  output logic                     co_neuron,
  output logic                     process_completed
);

  localparam int unsigned CNT_W = $clog2(MAX_LEN) + 1;

  logic [WIDX_W-1:0] w_idx;
  logic [NIDX_W-1:0] n_idx;
  logic [CNT_W-1:0]  cnt, cur_cnt, num_bit;
  logic              streaming;
  logic              init_cnt, inc_cnt;

  assign rom_address     = {n_idx, w_idx};
  assign rom_rd          = ld_valid;
  assign ld_w            = ld_valid && inc_weight_addr && (w_idx == WIDX_W'(N_IN - 1));
  assign mul_clr         = ld_valid && (w_idx == '0);
  assign ld_w_neuron_out = n_idx;

  // bit-stream counter and comparator
  assign num_bit  = CNT_W'(1) << len_log2;
  assign init_cnt = ld_complete;
  assign sht      = ld_complete || streaming;
  assign inc_cnt  = sht;
  assign cur_cnt  = init_cnt ? '0 : cnt;
  assign co       = sht && (cur_cnt == num_bit - CNT_W'(1));

  assign co_neuron         = upd;
  assign process_completed = upd && (n_idx == NIDX_W'(N_NEUR - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_idx     <= '0;
      n_idx     <= '0;
      cnt       <= '0;
      streaming <= 1'b0;
      upd       <= 1'b0;
      reg_we    <= 1'b0;
      reg_idx   <= '0;
    end else begin
      reg_we  <= ld_valid;
      reg_idx <= w_idx;
      upd     <= co;

      if (ld_weight) begin
        w_idx <= '0;
        n_idx <= '0;
      end else begin
        if (ld_valid && inc_weight_addr)
          w_idx <= (w_idx == WIDX_W'(N_IN - 1)) ? '0 : w_idx + WIDX_W'(1);
        if (upd)
          n_idx <= (n_idx == NIDX_W'(N_NEUR - 1)) ? '0 : n_idx + NIDX_W'(1);
      end

      if (co) begin
        streaming <= 1'b0;
        cnt       <= '0;
      end else if (inc_cnt) begin
        streaming <= 1'b1;
        cnt       <= cur_cnt + CNT_W'(1);
      end
    end
  end

  // a new stream must not start while one is running
  assert property (@(posedge clk) disable iff (!rst_n) ld_complete |-> !streaming);

endmodule
