// sqnl_filter: the averaging filter of the square-law generators ("Sign
// Extend", "Sum & Accumulate", "Right Shift" and "Sign Extend & Latch").
//
// Each clock with en high, the R-bit sample is sign-extended to R1 = R + O
// bits (O = log2 N) and added to the accumulator; first marks the first of
// the N samples and starts the sum from zero. With last high the complete sum
// is divided by N with an arithmetic right shift by O, sign-extended to RO
// bits and latched into f; valid pulses for one clock after that edge and f
// holds until the next result. With logsig set the latched value is instead
// sum/(2N) + 2^(R-3): the SQNL output halved and raised by one half, which
// turns the TanSig-like SQNL into the LogSig-like LogSQNL using only shifts
// and a constant.
//
// From the paper: the R1 = R + log2 N accumulator, the right shift and the
// output latch; the LogSQNL rule (scale by 1/2, shift by +1/2). Own choices:
// the shift truncates towards minus infinity, and the LogSQNL halving is
// folded into the same shift (by O+1) rather than done after it.
module sqnl_filter #(
  parameter int unsigned R  = 8,
  parameter int unsigned N  = 8,
  parameter int unsigned RO = R,
  localparam int unsigned O  = $clog2(N),
  localparam int unsigned R1 = R + O
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic                 last,
  input  logic                 logsig,
  input  logic signed [R-1:0]  sample,
  output logic signed [RO-1:0] f,
  output logic                 valid
);

  localparam logic signed [R1-1:0] HALF_ONE = R1'(2 ** (R - 3));

  logic signed [R1-1:0] acc, acc_next, mean, mean_half;
  logic signed [RO-1:0] f_next;

  initial begin
    assert (RO >= R) else $fatal(1, "sqnl_filter: RO must be at least R");
  end

  always_comb begin
    acc_next  = (first ? '0 : acc) + R1'(sample);
    mean      = acc_next >>> O;
    mean_half = (acc_next >>> (O + 1)) + HALF_ONE;
    f_next    = logsig ? RO'(signed'(mean_half[R-1:0])) : RO'(signed'(mean[R-1:0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      f     <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en && last;
      if (en) acc <= acc_next;
      if (en && last) f <= f_next;
    end
  end

endmodule
