// etlp_grad_mul -- three-factor product of the ETLP rule.
//
// pre_post = trace * surr and gradient = pre_post * teaching, two cascaded
// signed fixed-point multipliers (the original module used two DSP blocks).
// Each full-width product is shifted right by FRAC_W (rounding toward minus
// infinity) and saturated to DATA_W bits. Combinational.
//
// Interface: all operands and results are signed fixed point, DATA_W bits
// with FRAC_W fraction bits. trace is the updated pre-synaptic trace, surr
// the surrogate gradient of the post-synaptic voltage and teaching the value
// carried by a teaching-neuron spike (zero when none arrives, which makes the
// gradient zero). Rounding and saturation are this design's choice.
module etlp_grad_mul #(
  parameter int unsigned DATA_W = etlp_pkg::DATA_W_DEF,
  parameter int unsigned FRAC_W = etlp_pkg::FRAC_W_DEF
) (
  input  logic signed [DATA_W-1:0] trace,
  input  logic signed [DATA_W-1:0] surr,
  input  logic signed [DATA_W-1:0] teaching,
  output logic signed [DATA_W-1:0] pre_post,
  output logic signed [DATA_W-1:0] gradient
);

  localparam logic signed [2*DATA_W-1:0] PMAX = (2*DATA_W)'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [2*DATA_W-1:0] PMIN = -PMAX - 1;

  function automatic logic signed [DATA_W-1:0] fx_mul(input logic signed [DATA_W-1:0] a,
                                                      input logic signed [DATA_W-1:0] b);
    logic signed [2*DATA_W-1:0] p;
    p = (2*DATA_W)'(a) * (2*DATA_W)'(b);
    p = p >>> FRAC_W;
    if (p > PMAX)      return PMAX[DATA_W-1:0];
    else if (p < PMIN) return PMIN[DATA_W-1:0];
    else               return p[DATA_W-1:0];
  endfunction

  always_comb begin
    pre_post = fx_mul(trace, surr);
    gradient = fx_mul(pre_post, teaching);
  end

endmodule
