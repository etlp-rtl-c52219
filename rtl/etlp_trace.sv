// etlp_trace -- one update of a pre-synaptic spike trace.
//
// Computes trace_out = trace_in - (trace_in >>> DECAY_SHIFT) + (spike ? INC : 0),
// i.e. eps(t) = alpha * eps(t-1) + I(t) with alpha = 1 - 2^-DECAY_SHIFT, so the
// leak costs a shift and a subtract instead of a multiplier. The subtract of
// a shifted copy and the spike-selected constant INC follow the original
// module's trace diagram. Combinational.
//
// Interface: trace_in/trace_out are signed fixed point (DATA_W bits, FRAC_W
// fraction bits) and never negative in use; spike is the pre-synaptic
// neuron's output for the current time step.
// Design choices: DECAY_SHIFT = 3 and INC = 1.0 are the values that reproduce
// the published example (trace 1 becomes 1.875 on a spike); the sum
// saturates at the largest positive value instead of wrapping.
module etlp_trace #(
  parameter int unsigned DATA_W      = etlp_pkg::DATA_W_DEF,
  parameter int unsigned FRAC_W      = etlp_pkg::FRAC_W_DEF,
  parameter int unsigned DECAY_SHIFT = etlp_pkg::DECAY_SHIFT_DEF,
  parameter logic signed [DATA_W-1:0] INC = DATA_W'(1) <<< FRAC_W
) (
  input  logic                     spike,
  input  logic signed [DATA_W-1:0] trace_in,
  output logic signed [DATA_W-1:0] trace_out
);

  localparam logic signed [DATA_W:0] SAT_MAX = (DATA_W+1)'({1'b0, {(DATA_W-1){1'b1}}});

  logic signed [DATA_W-1:0] inc_sel;
  logic signed [DATA_W-1:0] decayed;
  logic signed [DATA_W:0]   sum;

  always_comb begin
    inc_sel   = spike ? INC : '0;
    decayed   = trace_in - (trace_in >>> DECAY_SHIFT);
    sum       = (DATA_W+1)'(decayed) + (DATA_W+1)'(inc_sel);
    trace_out = (sum > SAT_MAX) ? SAT_MAX[DATA_W-1:0] : sum[DATA_W-1:0];
  end

endmodule
