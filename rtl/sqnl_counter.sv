// sqnl_counter: the offset source U(k) of the square-law generators
// (Counter1, Counter2 and the Alpha adder of the generator schematic).
//
// A log2(N)-bit binary counter k steps once per clock while en is high and
// restarts at 0 on clr. Its value is mapped onto N offsets spread evenly over
// a span of 2*U_MAX = 2^(R-1), each taken at the centre of its slot:
//   symmetric  (Counter1):           U = k*STEP + STEP/2 - U_MAX
//   asymmetric (Counter2 + alpha):   U = k*STEP + STEP/2 - 2*U_MAX + alpha
// with U_MAX = 2^(R-2) and STEP = 2^(R-1)/N. For N <= 2^(R-2) the symmetric
// offset is pure wiring of k; the asymmetric one needs the alpha adder.
// k, last (k == N-1) and u all come from the count register, so u is valid
// in the same cycle as k.
//
// From the paper: a binary counter replaces the random source, the symmetric
// set spans -U_MAX..U_MAX, the asymmetric set -2U_MAX..0 plus alpha with
// 0 <= alpha <= 2^(R-2). Own choices: centring each offset in its slot (this
// reproduces the paper's f(40,40) = 24 and its deviation profiles) and one
// count register shared by Counter1 and Counter2, since they run in lockstep
// and only one mapping is used at a time.
module sqnl_counter #(
  parameter int unsigned R = 8,
  parameter int unsigned N = 8,
  localparam int unsigned O = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,    // restart the sequence at k = 0
  input  logic                en,     // advance one step
  input  logic                asym,   // 1: Counter2 + alpha, 0: Counter1
  input  logic signed [R-1:0] alpha,  // 0 .. 2^(R-2)
  output logic [O-1:0]        k,
  output logic                last,
  output logic signed [R-1:0] u
);

  localparam int STEP = (2 ** (R - 1)) / N;
  localparam int HALF = STEP / 2;
  localparam int UMAX = 2 ** (R - 2);

  logic signed [R+1:0] u_sym, u_asym;

  initial begin
    assert (N >= 2 && N == (2 ** O) && N <= (2 ** (R - 1)))
      else $fatal(1, "sqnl_counter: N must be a power of two in 2..2^(R-1)");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   k <= '0;
    else if (clr) k <= '0;
    else if (en)  k <= k + 1'b1;
  end

  always_comb begin
    u_sym  = (R+2)'(signed'({1'b0, k}) * STEP) + (R+2)'(HALF) - (R+2)'(UMAX);
    u_asym = u_sym - (R+2)'(UMAX) + (R+2)'(alpha);
    u      = asym ? u_asym[R-1:0] : u_sym[R-1:0];
    last   = (k == O'(N - 1));
  end

endmodule
