// input_interface: turns a stored image (N_IN pixels of 0..255, already
// down-sampled and flattened by the host) into one time step of input
// spikes by stochastic rate encoding.
//
// For every pixel a random number from an LFSR is drawn and the pixel
// spikes when pixel >= rnd. With a maximal-length 8-bit LFSR (values
// 1..255) a pixel p spikes with probability p/255, i.e. a Bernoulli trial
// on the normalised intensity; over many time steps the firing rate
// approximates the intensity. The paper also mentions Normal and Poisson
// random sources; only the uniform (Bernoulli) one is built here.
//
// Pixels are written by the host through pix_we/pix_addr/pix_data. After
// `start` the encoder walks through the pixels one per clock (N_IN cycles,
// one LFSR step each) and pulses `done` in the cycle after the last; then
// `spikes` holds the new vector until the next start. The LFSR's
// polynomial and seed are inputs, loaded with lfsr_ld.
module input_interface
  import rescom_pkg::*;
#(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned IDX_W = $clog2(N_IN)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pix_we,
  input  logic [IDX_W-1:0]   pix_addr,
  input  logic [PIXEL_W-1:0] pix_data,
  input  logic               lfsr_ld,
  input  rnd_t               lfsr_poly,
  input  rnd_t               lfsr_seed,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [N_IN-1:0]    spikes
);

  logic [PIXEL_W-1:0] pix [N_IN];
  logic [IDX_W-1:0]   idx;
  rnd_t               rnd;

  lfsr #(.WIDTH(RND_W)) u_lfsr (
    .clk, .rst_n, .ld(lfsr_ld), .en(busy), .poly(lfsr_poly), .seed(lfsr_seed), .q(rnd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_IN); i++) pix[i] <= '0;
    end else if (pix_we) begin
      pix[pix_addr] <= pix_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      idx    <= '0;
      spikes <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          idx  <= '0;
        end
      end else begin
        spikes[idx] <= (pix[idx] >= rnd);
        if (idx == IDX_W'(N_IN - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + IDX_W'(1);
        end
      end
    end
  end

endmodule
