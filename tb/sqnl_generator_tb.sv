// sqnl_generator_tb: runs the activation generator at its defaults (R = 8,
// N = 8, 16-bit netsums resized by 6 bits) and a second instance with N = 4.
//
// For every netsum n in -128..127 and each mapping (SQNL, LogSQNL, gated
// with C = 0, 20, 32, 40, 64, asymmetric with alpha = 0, 30, 64) it checks:
//   - the result against Eq. (1) evaluated on integers (exact),
//   - the result against the closed forms, within 1.5 LSB for N = 8,
//   - the point values quoted for the method: f(40, C=40) = 24, the SQNL
//     limits +-64, the LogSQNL range 0..64, the asymmetric floor -alpha and
//     f(n) = n above M/2 - alpha,
//   - that done rises N clocks after the accepting edge and that back-to-back
//     starts give one result every N clocks.
module sqnl_generator_tb;
  import sqnl_pkg::*;
  import sqnl_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  act_mode_e mode = ACT_SQNL;
  logic signed [15:0] n_in = 0;
  logic signed [7:0] c_in = 0, alpha = 0;
  logic ready, busy, done, ready4, busy4, done4;
  logic signed [7:0] f, f4;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  sqnl_generator dut (.clk(clk), .rst_n(rst_n), .start(start), .ready(ready),
    .mode(mode), .n_in(n_in), .c_in(c_in), .alpha(alpha), .busy(busy),
    .done(done), .f(f));

  sqnl_generator #(.N(4)) dut4 (.clk(clk), .rst_n(rst_n), .start(start),
    .ready(ready4), .mode(mode), .n_in(n_in), .c_in(c_in), .alpha(alpha),
    .busy(busy4), .done(done4), .f(f4));

  task automatic check(bit cond, string what, int n, int got, int expv);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s mode=%0d n=%0d got %0d exp %0d", what, mode, n, got, expv);
    end
  endtask

  // modes to sweep: {mode, c, alpha}
  int sweep [10][3] = '{'{0, 64, 0}, '{1, 64, 0}, '{2, 0, 0}, '{2, 20, 0}, '{2, 32, 0},
                        '{2, 40, 0}, '{2, 64, 0}, '{3, 0, 0}, '{3, 0, 30}, '{3, 0, 64}};

  initial begin
    int m, cl, al, e8, e4, t0, got_n;
    real ideal;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int s = 0; s < 10; s++) begin
      m = sweep[s][0]; cl = sweep[s][1]; al = sweep[s][2];
      mode  = act_mode_e'(m);
      c_in  = 8'(cl);
      alpha = 8'(al);
      // one latency measurement per mapping: done N clocks after acceptance
      for (int nv = -128; nv < 128; nv++) begin
        n_in = 16'(nv * 64 + (nv & 63));   // fractional bits are dropped
        start = 1;
        check(ready, "ready before start", nv, ready, 1);
        @(negedge clk);
        t0 = cycles;
        start = 0;
        while (!done) @(negedge clk);
        check(cycles - t0 == 8, "latency N clocks", nv, cycles - t0, 8);
        e8 = ref_act(8, 8, m, nv, cl, al);
        check(int'(f) == e8, "Eq.1 N=8", nv, f, e8);
        e4 = ref_act(8, 4, m, nv, cl, al);
        check(int'(f4) == e4, "Eq.1 N=4", nv, f4, e4);
        // closed forms
        if (m == 0 || (m == 2 && cl == 64)) begin
          ideal = ref_sym_eq(8, real'(nv));
          check(real'(f) - ideal < 1.01 && ideal - real'(f) < 1.51, "Eq.5 N=8", nv, f, int'(ideal));
          check(real'(f4) - ideal < 1.51 && ideal - real'(f4) < 2.01, "Eq.5 N=4", nv, f4, int'(ideal));
          check(int'(f) >= -64 && int'(f) <= 64, "SQNL range", nv, f, 64);
        end
        if (m == 1) begin
          ideal = ref_sym_eq(8, real'(nv)) / 2.0 + 32.0;
          check(real'(f) - ideal < 1.01 && ideal - real'(f) < 1.51, "LogSQNL closed form", nv, f, int'(ideal));
          check(int'(f) >= 0 && int'(f) <= 64, "LogSQNL range", nv, f, 32);
        end
        if (m == 2) begin
          check(int'(f) >= -cl && int'(f) <= cl, "gated range", nv, f, cl);
          if (cl == 40 && nv == 40) check(int'(f) == 24, "f(40,40) = 24", nv, f, 24);
          if (cl == 0) check(int'(f) == 0, "gate closed", nv, f, 0);
        end
        if (m == 3) begin
          ideal = ref_asym_eq(8, real'(nv), real'(al));
          check(real'(f) - ideal < 1.01 && ideal - real'(f) < 1.51, "Eq.6", nv, f, int'(ideal));
          if (nv < -64 - al) check(int'(f) == -al, "asym floor -alpha", nv, f, -al);
          if (nv > 64 - al)  check(int'(f) == nv, "asym identity", nv, f, nv);
        end
        @(negedge clk);
      end
    end
    // back-to-back: hold start high, one result every N clocks
    mode = ACT_SQNL;
    got_n = 0;
    n_in = 16'(10 * 64);
    start = 1;
    @(negedge clk);
    while (!done) @(negedge clk);
    t0 = cycles;
    for (int r = 0; r < 6; r++) begin
      n_in = 16'((r * 37 - 100) * 64);
      @(negedge clk);
      while (!done) @(negedge clk);
      check(cycles - t0 == 8, "throughput one result per N clocks", r, cycles - t0, 8);
      t0 = cycles;
      got_n++;
    end
    start = 0;
    @(negedge clk);
    check(got_n == 6, "back-to-back results", 0, got_n, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 60000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
