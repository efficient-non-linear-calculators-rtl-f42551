// qsu_mult: the forget-gate multiplier of the SQNL LSTM cell (the "QSU").
//
// It scales the previous cell state c by a LogSQNL gate value g in
// 0..2^(R-2), where 2^(R-2) stands for 1.0:  p = (c * g) >>> (R-2).
// Because |g| <= 2^(R-2) the product never exceeds |c| and p needs no
// saturation. Purely combinational.
//
// The paper names a low-cost multiplier for this place that exploits the
// reduced bit widths, but does not describe it. This module only provides its
// function: the gate operand is R-1 bits wide, as the gate range allows, and
// the product is written as a plain multiplication; truncation towards minus
// infinity is this design's choice.
module qsu_mult #(
  parameter int unsigned R = 8
) (
  input  logic signed [R-1:0] c,
  input  logic        [R-2:0] g,   // 0 .. 2^(R-2)
  output logic signed [R-1:0] p
);

  logic signed [2*R-1:0] prod;

  always_comb begin
    prod = (2*R)'(c) * (2*R)'(signed'({1'b0, g}));
    p    = R'(prod >>> (R - 2));
  end

endmodule
