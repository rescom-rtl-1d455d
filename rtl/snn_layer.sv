// snn_layer: one fully connected spiking layer, time multiplexed: a single
// shared FC module evaluates the layer's N_NEUR neurons one after another.
//
// Per time step (`start`, with the input spike vector) and per neuron j:
//   1. N_IN cycles: the weights of neuron j are read from the layer's
//      weight BRAM at {j, i} and written into the FC module's registers;
//   2. 2^len_log2 cycles: with the weight registers stable, neuron j's
//      stochastic multipliers and the layer's two factor generators (alpha
//      and beta streams, shared by all neurons) build their bit-streams;
//   3. one cycle: neuron j takes the FC sum as syn_weight and updates.
// A neuron thus takes N_IN + 2^len_log2 + 1 cycles. `done` pulses
// N_NEUR * (N_IN + 2^len_log2 + 1) + 1 cycles after the `start` cycle; then
// out_spikes holds each neuron's spike of this time step.
//
// `start_param` latches the run-time parameters (mode, threshold, alpha,
// beta, stream length) and clears every neuron's state (the load
// controller's ld_param). Only the neuron being evaluated receives
// clr/sht/valid; the others hold their state. The input spikes are
// latched at `start`. rnd_state (one random number per stream bit, for the
// neuron states) and rnd_const (for the alpha/beta streams) come from two
// LFSRs outside the layer; rnd_en asks them to advance.
module snn_layer
  import rescom_pkg::*;
#(
  parameter int unsigned N_IN    = 256,
  parameter int unsigned N_NEUR  = 256,
  parameter int unsigned MAX_LEN = 16,
  parameter int unsigned WIDX_W  = $clog2(N_IN),
  parameter int unsigned NIDX_W  = (N_NEUR > 1) ? $clog2(N_NEUR) : 1,
  parameter int unsigned ADDR_W  = NIDX_W + WIDX_W,
  parameter int unsigned LEN_LW  = $clog2(MAX_LEN) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // run-time parameters, latched on start_param
  input  mode_e              mode,
  input  fix_t               thr,
  input  rnd_t               alpha,      // factor on v_mem, value/255
  input  rnd_t               beta,       // factor on I_t, value/255
  input  logic [LEN_LW-1:0]  len_log2,
  input  logic               start_param,
  // one time step
  input  logic               start,
  input  logic [N_IN-1:0]    in_spikes,
  output logic [N_NEUR-1:0]  out_spikes,
  output logic               busy,
  output logic               done,
  // random numbers
  input  rnd_t               rnd_state,
  input  rnd_t               rnd_const,
  output logic               rnd_en,
  // host write port of the weight BRAM
  input  logic               w_wr_en,
  input  logic [ADDR_W-1:0]  w_wr_addr,
  input  fix_t               w_wr_data
);

  // latched parameters
  mode_e             mode_q;
  fix_t              thr_q;
  rnd_t              alpha_q, beta_q;
  logic [LEN_LW-1:0] len_q;
  logic [N_IN-1:0]   spikes_q;

  logic ld_param, ld_valid, inc_weight_addr, ld_completed, ld_w;
  logic co_neuron, process_completed, ld_weight;
  logic [ADDR_W-1:0] rom_address;
  logic              rom_rd, reg_we, mul_clr, sht, co, upd;
  logic [WIDX_W-1:0] reg_idx;
  logic [NIDX_W-1:0] ld_w_neuron_out;
  fix_t              bram_q, syn_weight;
  logic [MAX_LEN-1:0] alpha_sr, beta_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q   <= MODE_IF;
      thr_q    <= FIX_ONE;
      alpha_q  <= '0;
      beta_q   <= '0;
      len_q    <= '0;
      spikes_q <= '0;
    end else begin
      if (start_param && !busy) begin
        mode_q  <= mode;
        thr_q   <= thr;
        alpha_q <= alpha;
        beta_q  <= beta;
        len_q   <= len_log2;
      end
      if (start && !busy) spikes_q <= in_spikes;
    end
  end

  load_controller u_load (
    .clk, .rst_n, .start_param, .start, .ld_w, .co_neuron, .process_completed,
    .ld_param, .ld_valid, .inc_weight_addr, .ld_completed, .busy, .done
  );

  // ld_weight: either initialisation or a new time step clears the indices
  assign ld_weight = ld_param | (start & !busy);

  rom_controller #(.N_IN(N_IN), .N_NEUR(N_NEUR), .MAX_LEN(MAX_LEN),
                   .WIDX_W(WIDX_W), .NIDX_W(NIDX_W), .LEN_LW(LEN_LW)) u_rom (
    .clk, .rst_n, .ld_weight, .ld_valid, .inc_weight_addr,
    .ld_complete(ld_completed), .len_log2(len_q), .rom_address, .rom_rd,
    .reg_we, .reg_idx, .ld_w, .mul_clr, .sht, .co, .upd, .ld_w_neuron_out,
    .co_neuron, .process_completed
  );

  weight_bram #(.DEPTH(1 << ADDR_W), .ADDR_W(ADDR_W)) u_bram (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(rom_rd), .rd_addr(rom_address), .rd_data(bram_q)
  );

  fc_module #(.N_IN(N_IN)) u_fc (
    .clk, .rst_n, .we(reg_we), .widx(reg_idx), .wdata(bram_q),
    .spikes(spikes_q), .syn_weight
  );

  // shared factor streams
  sng #(.RND_W(RND_W), .MAX_LEN(MAX_LEN)) u_alpha_sng (
    .clk, .rst_n, .clr(mul_clr), .sht, .op(alpha_q), .rnd(rnd_const), .sr(alpha_sr)
  );
  sng #(.RND_W(RND_W), .MAX_LEN(MAX_LEN)) u_beta_sng (
    .clk, .rst_n, .clr(mul_clr), .sht, .op(beta_q), .rnd(rnd_const), .sr(beta_sr)
  );

  assign rnd_en = sht;

  // the neuron update follows the last stream bit, and no stream bit is
  // taken while weights are still being written
  assert property (@(posedge clk) disable iff (!rst_n) co |=> upd && !sht);
  assert property (@(posedge clk) disable iff (!rst_n) sht |-> !reg_we || ld_completed);

  for (genvar j = 0; j < int'(N_NEUR); j++) begin : g_neuron
    logic sel;
    assign sel = (ld_w_neuron_out == NIDX_W'(j));
    neuron #(.MAX_LEN(MAX_LEN), .LEN_LW(LEN_LW)) u_neuron (
      .clk, .rst_n, .init(ld_param), .mode(mode_q), .thr(thr_q), .len_log2(len_q),
      .clr(mul_clr & sel), .sht(sht & sel), .rnd(rnd_state),
      .alpha_sr, .beta_sr, .valid(upd & sel), .syn_weight,
      .spike(out_spikes[j]), .v_mem(), .i_t()
    );
  end

endmodule
