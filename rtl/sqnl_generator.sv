// sqnl_generator: multi-clock square-law activation function generator.
//
// It evaluates Eq. (1) of the method,
//   f(n) = 1/N * sum_k f_sat( f_sat(n + U(k), C) - U(k), M ),
// one k per clock: the resized netsum is held in a register, sqnl_counter
// steps through the N offsets U(k), sqnl_sat_addsub forms one restored
// sample per clock and sqnl_filter averages the N samples. The mode chosen at
// start selects the mapping (see sqnl_pkg::act_mode_e):
//   ACT_SQNL    C = 2^(R-2): f = n -+ n^2/(2M), limits +-M/2 (TanSig-like)
//   ACT_LOGSQNL the SQNL halved and offset by 2^(R-3), range 0..2^(R-2)
//   ACT_GATED   C = c_in: the SQNL scaled by about c_in / 2^(R-2), as needed
//               to multiply a TanSig by a LogSig output in an LSTM cell
//   ACT_ASYM    offsets -2^(R-2)..0 shifted by alpha, adder clipped below only:
//               SQ_Softplus for alpha = 0, SQLU (ELU-like) for alpha = 2^(R-2)
//
// Interface and timing: start is accepted when ready is high; n_in, mode,
// c_in and alpha are captured on that clock edge. The next N clocks each add
// one sample; f is latched on the N-th of them and done is high for the one
// clock that follows, so a result is available N clocks after the accepting
// edge. ready is also high in the last sampling clock, so back-to-back starts
// give one result every N clocks. f holds until the next result.
//
// The datapath, its widths (R, R1 = R + log2 N) and the mode parameters
// follow the paper's schematics. The start/ready/done handshake, the input
// capture register and the encoding of the four modes into one unit are this
// design's own (the paper notes that symmetric and asymmetric functions can
// be encapsulated into one entity).
module sqnl_generator
  import sqnl_pkg::*;
#(
  parameter int unsigned RI           = 16,
  parameter int unsigned R            = SQNL_R,
  parameter int unsigned N            = SQNL_N,
  parameter int unsigned RO           = R,
  parameter int unsigned RESIZE_SHIFT = R - 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 ready,
  input  act_mode_e            mode,
  input  logic signed [RI-1:0] n_in,
  input  logic signed [R-1:0]  c_in,   // gate level for ACT_GATED, 0..2^(R-2)
  input  logic signed [R-1:0]  alpha,  // offset for ACT_ASYM, 0..2^(R-2)
  output logic                 busy,
  output logic                 done,
  output logic signed [RO-1:0] f
);

  localparam int unsigned O = $clog2(N);
  localparam logic signed [R-1:0] UMAX = R'(2 ** (R - 2));

  logic signed [R-1:0] n_rs, n_q, c_q, alpha_q, u, sample;
  act_mode_e           mode_q;
  logic [O-1:0]        k;
  logic                last, accept;

  assign ready  = !busy || last;
  assign accept = start && ready;

  sqnl_resize #(.RI(RI), .R(R), .SHIFT(RESIZE_SHIFT)) u_resize (
    .n_in (n_in),
    .n_out(n_rs)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      n_q     <= '0;
      c_q     <= UMAX;
      alpha_q <= '0;
      mode_q  <= ACT_SQNL;
    end else if (accept) begin
      busy    <= 1'b1;
      n_q     <= n_rs;
      c_q     <= (mode == ACT_GATED) ? c_in : UMAX;
      alpha_q <= alpha;
      mode_q  <= mode;
    end else if (busy && last) begin
      busy    <= 1'b0;
    end
  end

  sqnl_counter #(.R(R), .N(N)) u_counter (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (accept),
    .en   (busy),
    .asym (mode_q == ACT_ASYM),
    .alpha(alpha_q),
    .k    (k),
    .last (last),
    .u    (u)
  );

  sqnl_sat_addsub #(.R(R)) u_addsub (
    .n         (n_q),
    .u         (u),
    .c_lvl     (c_q),
    .lower_only(mode_q == ACT_ASYM),
    .s         (sample)
  );

  sqnl_filter #(.R(R), .N(N), .RO(RO)) u_filter (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (busy),
    .first (k == '0),
    .last  (last),
    .logsig(mode_q == ACT_LOGSQNL),
    .sample(sample),
    .f     (f),
    .valid (done)
  );

  // The paper bounds both run-time levels by 2^(R-2).
  a_c_range : assert property (@(posedge clk) disable iff (!rst_n)
    accept && mode == ACT_GATED |-> c_in >= 0 && c_in <= UMAX);
  a_alpha_range : assert property (@(posedge clk) disable iff (!rst_n)
    accept && mode == ACT_ASYM |-> alpha >= 0 && alpha <= UMAX);
  // The counter only wraps while the unit is busy, and done follows a last.
  a_done_after_last : assert property (@(posedge clk) disable iff (!rst_n)
    done |-> $past(busy && last));

endmodule
