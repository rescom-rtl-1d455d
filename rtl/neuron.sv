// neuron: reconfigurable spiking neuron supporting the IF, LIF and
// Synaptic models with one shared datapath, selected by a 2-bit mode.
//
// Datapath (the paper's neuron micro-architecture figure): registers
// v_mem (membrane potential) and I_t (synaptic current); two stochastic
// multipliers compute alpha*v_mem and beta*I_t; exact fixed-point adders
// form the three candidate next states and a mode multiplexer picks one:
//   IF : v_mem_next_if  = v_mem + syn_weight
//   LIF: v_leaky_next   = alpha*v_mem + syn_weight
//   SYN: I_next         = beta*I_t + syn_weight
//        v_mem_next_syn = alpha*v_mem + I_next
// (the figure names the factor on v_mem `alpha` and the one on I_t `beta`;
// this module keeps those names). In other modes I_t is loaded with 0.
// If the chosen next value is above the threshold the neuron spikes and
// the threshold is subtracted from it (reset by subtraction, which is this
// design's reading of "the membrane potential is reset"). All additions
// saturate to 16 bits (this design's choice).
//
// Event-driven update: the state changes only in a cycle with `valid`
// (the layer's strobe for this neuron); otherwise v_mem, I_t and spike hold.
// Before the update the multipliers must have received `clr` and
// 2^len_log2 `sht` cycles with v_mem and I_t unchanged. `init` clears the
// state (register initialisation at the start of an image). `spike` is
// registered and holds the result of the last update.
module neuron
  import rescom_pkg::*;
#(
  parameter int unsigned MAX_LEN = 16,
  parameter int unsigned LEN_LW  = $clog2(MAX_LEN) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init,        // clear state
  input  mode_e              mode,
  input  fix_t               thr,         // firing threshold
  input  logic [LEN_LW-1:0]  len_log2,    // bit-stream length = 2^len_log2
  // stochastic multipliers
  input  logic               clr,
  input  logic               sht,
  input  rnd_t               rnd,
  input  logic [MAX_LEN-1:0] alpha_sr,    // stream of the v_mem factor
  input  logic [MAX_LEN-1:0] beta_sr,     // stream of the I_t factor
  // synaptic input
  input  logic               valid,
  input  fix_t               syn_weight,
  output logic               spike,
  output fix_t               v_mem,
  output fix_t               i_t
);

  fix_t av, bi;                // alpha*v_mem, beta*I_t
  fix_t v_mem_next_if, v_leaky_next, i_next, v_mem_next_syn, v_sel;
  logic fire;

  sc_multiplier #(.MAX_LEN(MAX_LEN), .LEN_LW(LEN_LW)) u_mul_v (
    .clk, .rst_n, .clr, .sht, .x(v_mem), .rnd, .other_sr(alpha_sr),
    .len_log2, .prod(av)
  );

  sc_multiplier #(.MAX_LEN(MAX_LEN), .LEN_LW(LEN_LW)) u_mul_i (
    .clk, .rst_n, .clr, .sht, .x(i_t), .rnd, .other_sr(beta_sr),
    .len_log2, .prod(bi)
  );

  always_comb begin
    v_mem_next_if  = sat_fix(32'(v_mem) + 32'(syn_weight));
    v_leaky_next   = sat_fix(32'(av)    + 32'(syn_weight));
    i_next         = sat_fix(32'(bi)    + 32'(syn_weight));
    v_mem_next_syn = sat_fix(32'(av)    + 32'(i_next));
    unique case (mode)
      MODE_IF:  v_sel = v_mem_next_if;
      MODE_LIF: v_sel = v_leaky_next;
      MODE_SYN: v_sel = v_mem_next_syn;
      default:  v_sel = v_mem;
    endcase
    fire = (mode != MODE_RSV) && (v_sel > thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_mem <= '0;
      i_t   <= '0;
      spike <= 1'b0;
    end else if (init) begin
      v_mem <= '0;
      i_t   <= '0;
      spike <= 1'b0;
    end else if (valid) begin
      v_mem <= fire ? sat_fix(32'(v_sel) - 32'(thr)) : v_sel;
      i_t   <= (mode == MODE_SYN) ? i_next : (mode == MODE_RSV) ? i_t : '0;
      spike <= fire;
    end
  end

endmodule
