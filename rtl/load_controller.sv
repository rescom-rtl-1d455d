// load_controller: sequences one pass of a layer (all its neurons for one
// time step): parameter/register initialisation, weight loading and the
// wait for each neuron's evaluation.
//
// The paper gives this controller's role ("weight loading and register
// initialization") and its signal names in the layer figure; the state
// machine below is this design's own:
//   start_param    -> one-cycle ld_param: the layer latches its run-time
//                     parameters and clears its neuron states.
//   start          -> LOAD: ld_valid and inc_weight_addr every cycle, one
//                     BRAM read per weight, until the ROM controller reports
//                     the last address with ld_w;
//   WAIT (1 cycle) -> ld_completed: the last weight is being written and the
//                     bit-stream generation may begin;
//   EVAL           -> wait for co_neuron (the neuron has been updated); then
//                     LOAD for the next neuron, or, with process_completed,
//                     raise done for one cycle and return to IDLE.
// start and start_param are ignored while busy.
module load_controller (
  input  logic clk,
  input  logic rst_n,
  input  logic start_param,
  input  logic start,
  input  logic ld_w,               // last weight address issued
  input  logic co_neuron,          // current neuron updated
  input  logic process_completed,  // last neuron of the layer updated
  output logic ld_param,
  output logic ld_valid,
  output logic inc_weight_addr,
  output logic ld_completed,
  output logic busy,
  output logic done
);

  typedef enum logic [2:0] {S_IDLE, S_PARAM, S_LOAD, S_WAIT, S_EVAL, S_DONE} state_e;
  state_e state, state_n;

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:  if (start_param) state_n = S_PARAM;
               else if (start)  state_n = S_LOAD;
      S_PARAM: state_n = S_IDLE;
      S_LOAD:  if (ld_w) state_n = S_WAIT;
      S_WAIT:  state_n = S_EVAL;
      S_EVAL:  if (co_neuron) state_n = process_completed ? S_DONE : S_LOAD;
      S_DONE:  state_n = S_IDLE;
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_n;
  end

  assign ld_param        = (state == S_PARAM);
  assign ld_valid        = (state == S_LOAD);
  assign inc_weight_addr = (state == S_LOAD);
  assign ld_completed    = (state == S_WAIT);
  assign busy            = (state != S_IDLE);
  assign done            = (state == S_DONE);

endmodule
