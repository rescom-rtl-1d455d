// rescom_top: the ReSCom spiking neural network accelerator, configured
// as the paper's MNIST network: 256 input pixels, a hidden layer of 256
// neurons and an output layer of 10, run for a number of time steps per
// image (10 in the paper).
//
// Chain: input_interface (stochastic rate encoder) -> hidden snn_layer ->
// output snn_layer -> output_interface (spike counts, argmax). Both layers
// share two LFSRs, one for the neuron-state bit-streams and one for the
// alpha/beta streams; the encoder has its own. For each time step the
// sequencer below runs the encoder, then the hidden layer on the new
// input spikes, then the output layer on the hidden spikes, then adds the
// output spikes to the counters. The layers and the encoder run one after
// another (this design's choice; the paper does not say whether they
// overlap).
//
// Use: write the pixels (pix_*) and, once, the weights (w_*: w_layer 0 =
// hidden, 1 = output; address {neuron, input}); load the LFSRs with
// lfsr_ld (poly/seed index 0 = encoder, 1 = state, 2 = factors); set the
// run-time parameters (mode, threshold, alpha, beta, stream length
// 2^len_log2, num_steps >= 1) and pulse `start`. The neuron states are
// cleared at the start of each image. `done` pulses when the last time
// step has been counted; class_id and counts are then valid until the
// next start.
// Latency per image, from the start cycle to the done cycle, with
// L = 2^len_log2:
//   2 + num_steps * (N_IN + N_HID*(N_IN+L+1) + N_OUT*(N_HID+L+1) + 7)
// clocks; 728,812 (7.29 ms at 100 MHz) for the paper's sizes, L = 16 and
// 10 time steps, against the 7.24 ms per image the paper reports.
module rescom_top
  import rescom_pkg::*;
#(
  parameter int unsigned N_IN    = 256,
  parameter int unsigned N_HID   = 256,
  parameter int unsigned N_OUT   = 10,
  parameter int unsigned MAX_LEN = 16,
  parameter int unsigned COUNT_W = 8,
  parameter int unsigned LEN_LW  = $clog2(MAX_LEN) + 1,
  parameter int unsigned IN_W    = $clog2(N_IN),
  parameter int unsigned HID_W   = (N_HID > 1) ? $clog2(N_HID) : 1,
  parameter int unsigned OUT_W   = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  parameter int unsigned WADDR_W = HID_W + IN_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // host: pixels and weights
  input  logic               pix_we,
  input  logic [IN_W-1:0]    pix_addr,
  input  logic [PIXEL_W-1:0] pix_data,
  input  logic               w_we,
  input  logic               w_layer,
  input  logic [WADDR_W-1:0] w_addr,
  input  fix_t               w_data,
  // random sources
  input  logic               lfsr_ld,
  input  rnd_t               lfsr_poly [3],
  input  rnd_t               lfsr_seed [3],
  // run-time parameters
  input  mode_e              mode,
  input  fix_t               thr,
  input  rnd_t               alpha,
  input  rnd_t               beta,
  input  logic [LEN_LW-1:0]  len_log2,
  input  logic [7:0]         num_steps,
  // control and result
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [OUT_W-1:0]   class_id,
  output logic [COUNT_W-1:0] counts [N_OUT]
);

  typedef enum logic [2:0] {T_IDLE, T_INIT, T_ENC, T_HID, T_OUT, T_ACC, T_DONE} tstate_e;
  tstate_e state;
  logic [7:0] step;

  logic enc_start, enc_busy, enc_done;
  logic hid_start, hid_busy, hid_done, out_start, out_busy, out_done;
  logic start_param, acc, clear;
  logic [N_IN-1:0]  in_spikes;
  logic [N_HID-1:0] hid_spikes;
  logic [N_OUT-1:0] out_spikes;
  rnd_t rnd_state, rnd_const;
  logic hid_rnd_en, out_rnd_en;

  input_interface #(.N_IN(N_IN), .IDX_W(IN_W)) u_in (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data,
    .lfsr_ld, .lfsr_poly(lfsr_poly[0]), .lfsr_seed(lfsr_seed[0]),
    .start(enc_start), .busy(enc_busy), .done(enc_done), .spikes(in_spikes)
  );

  lfsr #(.WIDTH(RND_W)) u_lfsr_state (
    .clk, .rst_n, .ld(lfsr_ld), .en(hid_rnd_en | out_rnd_en),
    .poly(lfsr_poly[1]), .seed(lfsr_seed[1]), .q(rnd_state)
  );
  lfsr #(.WIDTH(RND_W)) u_lfsr_const (
    .clk, .rst_n, .ld(lfsr_ld), .en(hid_rnd_en | out_rnd_en),
    .poly(lfsr_poly[2]), .seed(lfsr_seed[2]), .q(rnd_const)
  );

  snn_layer #(.N_IN(N_IN), .N_NEUR(N_HID), .MAX_LEN(MAX_LEN), .LEN_LW(LEN_LW)) u_hidden (
    .clk, .rst_n, .mode, .thr, .alpha, .beta, .len_log2, .start_param,
    .start(hid_start), .in_spikes, .out_spikes(hid_spikes),
    .busy(hid_busy), .done(hid_done),
    .rnd_state, .rnd_const, .rnd_en(hid_rnd_en),
    .w_wr_en(w_we && !w_layer), .w_wr_addr(w_addr), .w_wr_data(w_data)
  );

  snn_layer #(.N_IN(N_HID), .N_NEUR(N_OUT), .MAX_LEN(MAX_LEN), .LEN_LW(LEN_LW)) u_output (
    .clk, .rst_n, .mode, .thr, .alpha, .beta, .len_log2, .start_param,
    .start(out_start), .in_spikes(hid_spikes), .out_spikes,
    .busy(out_busy), .done(out_done),
    .rnd_state, .rnd_const, .rnd_en(out_rnd_en),
    .w_wr_en(w_we && w_layer), .w_wr_addr(w_addr[OUT_W+HID_W-1:0]), .w_wr_data(w_data)
  );

  output_interface #(.N_OUT(N_OUT), .COUNT_W(COUNT_W), .CLS_W(OUT_W)) u_out (
    .clk, .rst_n, .clear, .acc, .spikes(out_spikes), .counts, .class_id
  );

  // a layer is started only when every stage is idle; the encoder may
  // start while the layers take their parameters
  always_ff @(posedge clk) begin
    if (rst_n && enc_start)
      assert (!enc_busy) else $error("encoder started while busy");
    if (rst_n && (hid_start || out_start))
      assert (!enc_busy && !hid_busy && !out_busy)
        else $error("layer started while a stage is busy (enc %0b hid %0b out %0b)", enc_busy, hid_busy, out_busy);
  end

  // time-step sequencer
  assign start_param = (state == T_INIT);
  assign clear       = (state == T_INIT);
  assign acc         = (state == T_ACC);
  assign busy        = (state != T_IDLE);
  assign done        = (state == T_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      step      <= '0;
      enc_start <= 1'b0;
      hid_start <= 1'b0;
      out_start <= 1'b0;
    end else begin
      enc_start <= 1'b0;
      hid_start <= 1'b0;
      out_start <= 1'b0;
      unique case (state)
        T_IDLE: if (start) state <= T_INIT;
        T_INIT: begin
          step      <= '0;
          enc_start <= 1'b1;
          state     <= T_ENC;
        end
        T_ENC: if (enc_done) begin
          hid_start <= 1'b1;
          state     <= T_HID;
        end
        T_HID: if (hid_done) begin
          out_start <= 1'b1;
          state     <= T_OUT;
        end
        T_OUT: if (out_done) state <= T_ACC;
        T_ACC: begin
          step <= step + 8'd1;
          if (step + 8'd1 >= num_steps) state <= T_DONE;
          else begin
            enc_start <= 1'b1;
            state     <= T_ENC;
          end
        end
        T_DONE:  state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
