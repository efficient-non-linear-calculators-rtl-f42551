// sqnl_sat_addsub: the saturating adder and subtracter at the heart of the
// square-law generators, one sample of Eq. (1):
//   s = f_sat( f_sat(n + u, C) - u, M )
//
// The adder clips n + u to [-C, +C], where C = c_lvl (2^(R-2) for the plain
// SQNL, the gate value for the gated activation). With lower_only set
// (asymmetric mappings) it clips only from below, at -U_MAX = -2^(R-2). The
// subtracter then removes u again and clips to M = 2^(R-1). When nothing was
// clipped s equals n; clipping leaves s smaller in magnitude, which is what
// bends the averaged mapping. Purely combinational.
//
// From the paper: the two saturation levels of both mappings and the gated
// variant's C port. Own choices: the adder result is kept on R+1 bits so the
// asymmetric mapping can pass n unchanged (the paper asks for "only the lower
// saturation boundary" there), and since +M is not an R-bit value the
// subtracter clips to [-M, M-1]; with the counter's offsets that bound is
// never reached.
module sqnl_sat_addsub #(
  parameter int unsigned R = 8
) (
  input  logic signed [R-1:0] n,
  input  logic signed [R-1:0] u,
  input  logic signed [R-1:0] c_lvl,      // adder level C, 0 .. 2^(R-2)
  input  logic                lower_only, // asymmetric: clip at -2^(R-2) only
  output logic signed [R-1:0] s
);

  localparam logic signed [R+1:0] UMAX = (R+2)'(2 ** (R - 2));
  localparam logic signed [R+1:0] MMAX = (R+2)'((2 ** (R - 1)) - 1);
  localparam logic signed [R+1:0] MMIN = -(R+2)'(2 ** (R - 1));

  logic signed [R+1:0] sum, c_ext, added, diff;

  always_comb begin
    c_ext = (R+2)'(c_lvl);
    sum   = (R+2)'(n) + (R+2)'(u);
    if (lower_only) begin
      added = (sum < -UMAX) ? -UMAX : sum;
    end else begin
      if (sum > c_ext)       added = c_ext;
      else if (sum < -c_ext) added = -c_ext;
      else                   added = sum;
    end
    diff = added - (R+2)'(u);
    if (diff > MMAX)      s = MMAX[R-1:0];
    else if (diff < MMIN) s = MMIN[R-1:0];
    else                  s = diff[R-1:0];
  end

endmodule
