// sqnl_resize: brings a wide GEMM netsum down to the R-bit word of an
// activation generator (the "Resize" box at the input of the generator).
//
// The netsum n_in (RI bits, two's complement) is shifted right arithmetically
// by SHIFT bits, which drops fractional bits, and the result is saturated to
// the R-bit range [-2^(R-1), 2^(R-1)-1]. With the default SHIFT = R-2 a netsum
// formed from R-bit weights and R-bit activations (each with 2^(R-2) = 1.0)
// lands on the generator's own scale. Purely combinational.
//
// The paper names the block and says the GEMM word "may need to be resized";
// the shift-then-saturate rule, RI = 16 and SHIFT = R-2 are this design's own.
module sqnl_resize #(
  parameter int unsigned RI    = 16,
  parameter int unsigned R     = 8,
  parameter int unsigned SHIFT = R - 2
) (
  input  logic signed [RI-1:0] n_in,
  output logic signed [R-1:0]  n_out
);

  localparam logic signed [RI-1:0] MAXV = RI'((2 ** (R - 1)) - 1);
  localparam logic signed [RI-1:0] MINV = -RI'(2 ** (R - 1));

  logic signed [RI-1:0] shifted;

  initial begin
    assert (RI >= R) else $fatal(1, "sqnl_resize: RI must be at least R");
  end

  always_comb begin
    shifted = n_in >>> SHIFT;
    if (shifted > MAXV)      n_out = MAXV[R-1:0];
    else if (shifted < MINV) n_out = MINV[R-1:0];
    else                     n_out = shifted[R-1:0];
  end

endmodule
