// etlp_ctrl -- control unit of the ETLP gradient module.
//
// A three-state sequencer: INIT waits for step_i; READ is the cycle in which
// the stored trace of the addressed pre-synaptic neuron is on the memory
// output; WRITE stores the updated trace back; then the unit returns to INIT
// and raises step_o for one cycle to tell the upper module that the gradient
// is ready. The state names and their order follow the original module.
//
// Timing (cycle = rising edge to rising edge):
//   edge 0: step_i high in INIT -> mem_re pulses now (memory read is issued
//           on this edge), state becomes READ
//   edge 1: grad_load high in READ -> gradient register loads, state WRITE
//   edge 2: mem_we high in WRITE -> trace written, state INIT, step_o high
// step_o is high for the cycle after WRITE; a step_i accepted in that cycle
// starts the next update, so updates issue every three cycles, the latency
// the original module reports. mem_re, mem_we and grad_load are
// combinational decodes of the state. Reset (asynchronous, active low) is
// this design's choice.
module etlp_ctrl
  import etlp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   step_i,
  output logic   mem_re,
  output logic   mem_we,
  output logic   grad_load,
  output logic   step_o,
  output state_e state
);

  state_e state_n;

  always_comb begin
    state_n = state;
    unique case (state)
      ST_INIT:  if (step_i) state_n = ST_READ;
      ST_READ:  state_n = ST_WRITE;
      ST_WRITE: state_n = ST_INIT;
      default:  state_n = ST_INIT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_INIT;
      step_o <= 1'b0;
    end else begin
      state  <= state_n;
      step_o <= (state == ST_WRITE);
    end
  end

  assign mem_re    = (state == ST_INIT) && step_i;
  assign grad_load = (state == ST_READ);
  assign mem_we    = (state == ST_WRITE);

endmodule
