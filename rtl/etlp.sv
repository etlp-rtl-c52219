// etlp -- Event-based Three-factor Local Plasticity gradient module.
//
// For one synapse at a time, the module keeps the low-pass-filtered spike
// trace of every pre-synaptic neuron in a block RAM and turns three local
// factors into a weight gradient:
//   gradient = trace(addr) x surrogate(voltage) x teaching
// where trace(addr) is first advanced by one time step with the spike of
// that pre-synaptic neuron and written back. surrogate() is the triangle
// max(0, 1 - |v|). The upper module (neurons, time multiplexing, weight
// memory) adds the gradient, scaled by its learning rate, to the weight.
//
// Structure: control unit (etlp_ctrl), trace memory (etlp_trace_mem),
// trace update (etlp_trace), surrogate (etlp_surrogate) and the two
// multipliers (etlp_grad_mul), connected as in the original block diagram:
// memory -> trace update -> multiplier and back to memory; voltage ->
// surrogate -> multiplier; teaching -> multiplier.
//
// Timing: a step_i seen at a rising edge while idle starts an update; the
// trace is read in the next cycle (READ), written back in the one after
// (WRITE), and step_o is high for one cycle after that. gradient is valid
// from the start of WRITE and held until the next update loads it. A step_i
// in the step_o cycle is accepted, so updates run back to back at one per
// three cycles. addr, spike, voltage and teaching must be held from the
// step_i cycle to the step_o cycle (checked by assertions).
//
// Follows the original: the port names, the block structure, the three
// states and the three-cycle update. This design's choices: 16-bit signed
// fixed point with 8 fraction bits, a 2048-entry trace memory, the decay
// alpha = 0.875 (a shift by 3) and trace increment 1.0, saturating
// arithmetic, and the asynchronous active-low reset.
module etlp
  import etlp_pkg::*;
#(
  parameter int unsigned ADDR_W      = ADDR_W_DEF,
  parameter int unsigned DATA_W      = DATA_W_DEF,
  parameter int unsigned FRAC_W      = FRAC_W_DEF,
  parameter int unsigned DECAY_SHIFT = DECAY_SHIFT_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     step_i,
  input  logic [ADDR_W-1:0]        addr,
  input  logic                     spike,
  input  logic signed [DATA_W-1:0] voltage,
  input  logic signed [DATA_W-1:0] teaching,
  output logic signed [DATA_W-1:0] gradient,
  output logic                     step_o
);

  logic   mem_re, mem_we, grad_load;
  state_e state;

  logic signed [DATA_W-1:0] trace_old, trace_new, surr, pre_post, grad_comb;

  etlp_ctrl u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .step_i    (step_i),
    .mem_re    (mem_re),
    .mem_we    (mem_we),
    .grad_load (grad_load),
    .step_o    (step_o),
    .state     (state)
  );

  etlp_trace_mem #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_mem (
    .clk   (clk),
    .re    (mem_re),
    .we    (mem_we),
    .addr  (addr),
    .wdata (trace_new),
    .rdata (trace_old)
  );

  etlp_trace #(.DATA_W(DATA_W), .FRAC_W(FRAC_W), .DECAY_SHIFT(DECAY_SHIFT)) u_trace (
    .spike     (spike),
    .trace_in  (trace_old),
    .trace_out (trace_new)
  );

  etlp_surrogate #(.DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_surr (
    .voltage (voltage),
    .grad    (surr)
  );

  etlp_grad_mul #(.DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_mul (
    .trace    (trace_new),
    .surr     (surr),
    .teaching (teaching),
    .pre_post (pre_post),
    .gradient (grad_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         gradient <= '0;
    else if (grad_load) gradient <= grad_comb;
  end

  // The operands of an update must not change while it is in flight.
  a_hold_operands: assert property (@(posedge clk) disable iff (!rst_n)
      (state != ST_INIT) |-> ($stable(addr) && $stable(spike)
                              && $stable(voltage) && $stable(teaching)))
    else $error("etlp: operands changed during an update");

  // No request may arrive while an update is in flight.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      (state != ST_INIT) |-> !step_i)
    else $error("etlp: step_i while busy");

endmodule
