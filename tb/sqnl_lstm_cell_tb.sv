// sqnl_lstm_cell_tb: end-to-end test of the SQNL LSTM cell at its default
// sizes (R = 8, N = 8, 16-bit netsums). It runs a sequence of 400 time steps,
// feeding c_t back as c_prev, with random netsums plus runs that drive the
// gates fully open or shut and push the cell state to its limits.
//
// Each step is checked against a reference built from Eq. (1) on integers:
//   sigma_x = LogSQNL(resize(net_x)), ig = Gated(resize(net_g), C = sigma_i),
//   c_t = clamp(floor(c_prev * sigma_f / 64) + ig), h_t = Gated(c_t, sigma_o)
// and done must follow the accepting edge by 3N + 2 clocks. The test counts
// how often each mechanism of the cell occurred and fails if one never did:
// netsum resize saturation, a partly open gate (0 < C < 64) scaling a gated
// activation, a closed gate (C = 0), saturation in the generators' adders,
// forget-gate scaling by the QSU, saturation of c_t, and the recurrence
// (a step whose c_prev is the previous step's c_t).
module sqnl_lstm_cell_tb;
  import sqnl_ref_pkg::*;

  localparam int STEPS = 400;

  logic clk = 0, rst_n = 0, start = 0;
  logic ready, done;
  logic signed [15:0] net_f = 0, net_i = 0, net_g = 0, net_o = 0;
  logic signed [7:0] c_prev = 0, c_t, h_t;
  int checks = 0, failures = 0, cycles = 0;

  // mechanism counters
  int n_resize_sat = 0, n_partial_gate = 0, n_closed_gate = 0, n_adder_clip = 0;
  int n_forget_scale = 0, n_c_sat = 0, n_recur = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  sqnl_lstm_cell dut (.clk(clk), .rst_n(rst_n), .start(start), .ready(ready),
    .net_f(net_f), .net_i(net_i), .net_g(net_g), .net_o(net_o), .c_prev(c_prev),
    .done(done), .c_t(c_t), .h_t(h_t));

  task automatic check(bit cond, string what, int step, int got, int expv);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s step=%0d got %0d exp %0d", what, step, got, expv);
    end
  endtask

  function automatic int rs(int v);   // netsum resize, 16 -> 8 bits
    return ref_clamp(floor_div(v, 64), -128, 127);
  endfunction

  function automatic int rnd_net(int style);
    case (style)
      0: return $urandom_range(0, 8191) - 4096;            // +-1.0 .. mostly linear
      1: return $urandom_range(0, 65535) - 32768;          // full range
      2: return 12000 + $urandom_range(0, 4000);            // strongly positive
      default: return -12000 - $urandom_range(0, 4000);     // strongly negative
    endcase
  endfunction

  initial begin
    int vf, vi, vg, vo, sf, si, so, ig, fc, csum, cexp, hexp, t0, style;
    logic signed [7:0] c_fb;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    c_fb = 0;
    for (int step = 0; step < STEPS; step++) begin
      style = (step / 20) % 4;
      if (style == 2 && step % 20 < 12) begin
        // grow the cell state: gates open, candidate strongly positive
        vf = rnd_net(2); vi = rnd_net(2); vg = rnd_net(2); vo = rnd_net(1);
      end else if (style == 3 && step % 20 < 12) begin
        vf = rnd_net(2); vi = rnd_net(2); vg = rnd_net(3); vo = rnd_net(3);
      end else begin
        vf = rnd_net(style & 1); vi = rnd_net(style & 1);
        vg = rnd_net(style & 1); vo = rnd_net(style & 1);
      end
      net_f = 16'(vf); net_i = 16'(vi); net_g = 16'(vg); net_o = 16'(vo);
      // every fifth step restarts the recurrence from a random state
      c_prev = (step % 5 == 4) ? 8'($urandom) : c_fb;
      if (step % 5 != 4 && step > 0) n_recur++;
      check(ready, "ready", step, ready, 1);
      start = 1;
      @(negedge clk);
      start = 0;
      t0 = cycles;
      while (!done) @(negedge clk);
      check(cycles - t0 == 3 * 8 + 2, "latency 3N+2", step, cycles - t0, 26);

      // reference
      sf = ref_act(8, 8, 1, rs(vf), 0, 0);
      si = ref_act(8, 8, 1, rs(vi), 0, 0);
      so = ref_act(8, 8, 1, rs(vo), 0, 0);
      ig = ref_act(8, 8, 2, rs(vg), si, 0);
      fc = floor_div(int'(c_prev) * sf, 64);
      csum = fc + ig;
      cexp = ref_clamp(csum, -128, 127);
      hexp = ref_act(8, 8, 2, cexp, so, 0);
      check(int'(c_t) == cexp, "c_t", step, c_t, cexp);
      check(int'(h_t) == hexp, "h_t", step, h_t, hexp);
      check(int'(h_t) >= -so && int'(h_t) <= so, "h_t within output gate", step, h_t, so);
      // mechanism counts
      if (rs(vf) != floor_div(vf, 64) || rs(vg) != floor_div(vg, 64)) n_resize_sat++;
      if ((si > 0 && si < 64) || (so > 0 && so < 64)) n_partial_gate++;
      if (si == 0 || so == 0) n_closed_gate++;
      if (rs(vg) + 56 > si || rs(vg) - 56 < -si || cexp + 56 > so || cexp - 56 < -so) n_adder_clip++;
      if (sf < 64 && c_prev != 0 && fc != int'(c_prev)) n_forget_scale++;
      if (csum != cexp) n_c_sat++;
      c_fb = c_t;
      @(negedge clk);
    end
    $display("mechanisms: resize_sat=%0d partial_gate=%0d closed_gate=%0d adder_clip=%0d forget_scale=%0d c_sat=%0d recurrence=%0d",
             n_resize_sat, n_partial_gate, n_closed_gate, n_adder_clip, n_forget_scale, n_c_sat, n_recur);
    check(n_resize_sat > 0, "resize saturation seen", 0, n_resize_sat, 1);
    check(n_partial_gate > 0, "partial gate seen", 0, n_partial_gate, 1);
    check(n_closed_gate > 0, "closed gate seen", 0, n_closed_gate, 1);
    check(n_adder_clip > 0, "adder clipping seen", 0, n_adder_clip, 1);
    check(n_forget_scale > 0, "forget scaling seen", 0, n_forget_scale, 1);
    check(n_c_sat > 0, "c_t saturation seen", 0, n_c_sat, 1);
    check(n_recur > 0, "recurrence seen", 0, n_recur, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == STEPS * 40 + 100);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
