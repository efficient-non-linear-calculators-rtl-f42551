// sqnl_lstm_cell: one LSTM cell step built without activation lookups and
// with the two gate multiplications folded into gated activations.
//
//   sigma_f, sigma_i, sigma_o = LogSQNL(net_f), LogSQNL(net_i), LogSQNL(net_o)
//   c_t = sat( QSU(c_prev, sigma_f) + GatedAct(net_g, C = sigma_i) )
//   h_t = GatedAct(c_t, C = sigma_o)
//
// A gated activation is the SQNL (TanSig-like) mapping whose adder saturates
// at C instead of 2^(R-2); feeding it a LogSQNL output in 0..2^(R-2) scales
// the mapping by C / 2^(R-2) without a multiplier. Only the forget gate keeps
// a product, done by qsu_mult. Values use 2^(R-2) = 1.0 throughout; the
// netsums are RI-bit GEMM results, resized inside the generators.
//
// Interface and timing: start is accepted when ready is high, capturing the
// four netsums and c_prev. The three gate units run together for N clocks,
// then the candidate gated unit runs N clocks (the QSU product is formed in
// parallel), c_t is registered and the output gated unit runs N clocks on it.
// done is high for one clock, 3N+2 clocks after the accepting edge; c_t and
// h_t are then valid and hold until the next step. For a sequence, feed c_t
// back as c_prev and h_t (through the GEMM) into the next netsums.
//
// The structure (three LogSQNL units, two gated activations, the QSU and the
// adder) follows the paper's SQNL LSTM cell. Its sequencing, the saturation
// of c_t to R bits and the handshake are this design's own. The GEMM that
// forms the netsums is outside this cell.
module sqnl_lstm_cell
  import sqnl_pkg::*;
#(
  parameter int unsigned RI           = 16,
  parameter int unsigned R            = SQNL_R,
  parameter int unsigned N            = SQNL_N,
  parameter int unsigned RESIZE_SHIFT = R - 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 ready,
  input  logic signed [RI-1:0] net_f,   // forget gate netsum
  input  logic signed [RI-1:0] net_i,   // input gate netsum
  input  logic signed [RI-1:0] net_g,   // candidate netsum
  input  logic signed [RI-1:0] net_o,   // output gate netsum
  input  logic signed [R-1:0]  c_prev,  // c(t-1)
  output logic                 done,
  output logic signed [R-1:0]  c_t,
  output logic signed [R-1:0]  h_t
);

  typedef enum logic [1:0] {S_IDLE, S_GATES, S_CAND, S_OUT} state_e;

  localparam logic signed [R:0] CMAX = (R+1)'((2 ** (R - 1)) - 1);
  localparam logic signed [R:0] CMIN = -(R+1)'(2 ** (R - 1));

  state_e state;
  logic signed [RI-1:0] net_g_q;
  logic signed [R-1:0]  c_prev_q, c_q;
  logic signed [R-1:0]  sig_f, sig_i, sig_o, ig, fc, c_next;
  logic signed [R:0]    c_sum;
  logic                 gates_start, cand_start, out_start;
  logic                 f_done, i_done, o_done, cand_done, out_done;
  logic                 f_rdy, i_rdy, o_rdy, cand_rdy, out_rdy;
  logic                 unused_busy [5];

  assign ready       = (state == S_IDLE);
  assign gates_start = start && ready;
  assign cand_start  = (state == S_GATES) && f_done;
  assign out_start   = (state == S_CAND) && cand_done;

  // Gate activations (LogSQNL)
  sqnl_generator #(.RI(RI), .R(R), .N(N), .RESIZE_SHIFT(RESIZE_SHIFT)) u_sig_f (
    .clk(clk), .rst_n(rst_n), .start(gates_start), .ready(f_rdy),
    .mode(ACT_LOGSQNL), .n_in(net_f), .c_in('0), .alpha('0),
    .busy(unused_busy[0]), .done(f_done), .f(sig_f));

  sqnl_generator #(.RI(RI), .R(R), .N(N), .RESIZE_SHIFT(RESIZE_SHIFT)) u_sig_i (
    .clk(clk), .rst_n(rst_n), .start(gates_start), .ready(i_rdy),
    .mode(ACT_LOGSQNL), .n_in(net_i), .c_in('0), .alpha('0),
    .busy(unused_busy[1]), .done(i_done), .f(sig_i));

  sqnl_generator #(.RI(RI), .R(R), .N(N), .RESIZE_SHIFT(RESIZE_SHIFT)) u_sig_o (
    .clk(clk), .rst_n(rst_n), .start(gates_start), .ready(o_rdy),
    .mode(ACT_LOGSQNL), .n_in(net_o), .c_in('0), .alpha('0),
    .busy(unused_busy[2]), .done(o_done), .f(sig_o));

  // Candidate: tanh(net_g) scaled by the input gate
  sqnl_generator #(.RI(RI), .R(R), .N(N), .RESIZE_SHIFT(RESIZE_SHIFT)) u_cand (
    .clk(clk), .rst_n(rst_n), .start(cand_start), .ready(cand_rdy),
    .mode(ACT_GATED), .n_in(net_g_q), .c_in(sig_i), .alpha('0),
    .busy(unused_busy[3]), .done(cand_done), .f(ig));

  // Forget-gate product
  qsu_mult #(.R(R)) u_qsu (
    .c(c_prev_q),
    .g(sig_f[R-2:0]),
    .p(fc)
  );

  always_comb begin
    c_sum = (R+1)'(fc) + (R+1)'(ig);
    if (c_sum > CMAX)      c_next = CMAX[R-1:0];
    else if (c_sum < CMIN) c_next = CMIN[R-1:0];
    else                   c_next = c_sum[R-1:0];
  end

  // Output: tanh(c_t) scaled by the output gate; c_t enters unresized
  sqnl_generator #(.RI(R), .R(R), .N(N), .RESIZE_SHIFT(0)) u_out (
    .clk(clk), .rst_n(rst_n), .start(out_start), .ready(out_rdy),
    .mode(ACT_GATED), .n_in(c_next), .c_in(sig_o), .alpha('0),
    .busy(unused_busy[4]), .done(out_done), .f(h_t));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      net_g_q  <= '0;
      c_prev_q <= '0;
      c_q      <= '0;
    end else begin
      case (state)
        S_IDLE:  if (gates_start) begin
                   net_g_q  <= net_g;
                   c_prev_q <= c_prev;
                   state    <= S_GATES;
                 end
        S_GATES: if (f_done) state <= S_CAND;
        S_CAND:  if (cand_done) begin
                   c_q   <= c_next;
                   state <= S_OUT;
                 end
        S_OUT:   if (out_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign c_t  = c_q;
  assign done = out_done;

  // The three gate units run in lockstep and each later unit is free when
  // the controller starts it.
  a_gates_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
    f_done == i_done && f_done == o_done);
  a_gates_ready : assert property (@(posedge clk) disable iff (!rst_n)
    gates_start |-> f_rdy && i_rdy && o_rdy);
  a_cand_ready : assert property (@(posedge clk) disable iff (!rst_n)
    cand_start |-> cand_rdy);
  a_out_ready : assert property (@(posedge clk) disable iff (!rst_n)
    out_start |-> out_rdy);

endmodule
