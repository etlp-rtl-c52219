// etlp_surrogate -- triangular surrogate gradient f(x) = max(0, 1 - |x|).
//
// Purely combinational. The absolute value is taken by a multiplexer that
// passes the voltage when it is greater than zero and its negation
// otherwise; the result is subtracted from the constant 1.0; a second
// multiplexer passes the difference when it is greater than zero and the
// constant 0 otherwise. That structure, the >0 tests, the negation and the
// constants 1 and 0 follow the original module's surrogate diagram.
//
// Interface: voltage is signed fixed point (DATA_W bits, FRAC_W fraction
// bits); grad lies in [0, 1.0] in the same format.
// Design choices: the number format, and that negating the most negative
// input saturates to the most positive value. The learning-rule equation
// carries an extra factor gamma in front of the triangle; the hardware, like
// the original one, leaves it out (0.25 in gives 0.75 out).
module etlp_surrogate #(
  parameter int unsigned DATA_W = etlp_pkg::DATA_W_DEF,
  parameter int unsigned FRAC_W = etlp_pkg::FRAC_W_DEF
) (
  input  logic signed [DATA_W-1:0] voltage,
  output logic signed [DATA_W-1:0] grad
);

  localparam logic signed [DATA_W-1:0] ONE  = DATA_W'(1) <<< FRAC_W;
  localparam logic signed [DATA_W-1:0] VMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] VMIN = {1'b1, {(DATA_W-1){1'b0}}};

  logic signed [DATA_W-1:0] neg_v;
  logic signed [DATA_W-1:0] abs_v;
  logic signed [DATA_W:0]   diff;   // one extra bit: 1 - |v| can reach -VMAX

  always_comb begin
    neg_v = (voltage == VMIN) ? VMAX : -voltage;
    abs_v = (voltage > 0) ? voltage : neg_v;
    diff  = (DATA_W+1)'(ONE) - (DATA_W+1)'(abs_v);
    grad  = (diff > 0) ? diff[DATA_W-1:0] : '0;
  end

endmodule
