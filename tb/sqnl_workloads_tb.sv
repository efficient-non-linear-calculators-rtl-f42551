// sqnl_workloads_tb: runs the configurations used in the method's resource
// comparison at sizes other than the 8-bit default.
//
//   1. 12-bit activation generator, N = 8: SQNL, SQLU (alpha = 2^(R-2)) and
//      SQ_Softplus (alpha = 0) for every input in -2048..2047, checked exactly
//      against Eq. (1) on integers and, within the piecewise-linear error
//      bound STEP^2 / (8M) + 1.5 LSB (4 + 1.5 for R = 12), against the closed
//      forms. Results must come N clocks after start.
//   2. 16-bit LSTM cell (32-bit netsums resized by 14 bits), 60 time steps with
//      c_t fed back, checked exactly against the integer reference; done must
//      come 3N + 2 clocks after start.
module sqnl_workloads_tb;
  import sqnl_pkg::*;
  import sqnl_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(bit cond, string what, int a, int got, int expv);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0d got %0d exp %0d", what, a, got, expv);
    end
  endtask

  // ---- 12-bit generator -------------------------------------------------
  logic g_start = 0, g_ready, g_busy, g_done;
  act_mode_e g_mode = ACT_SQNL;
  logic signed [11:0] g_n = 0, g_c = 0, g_alpha = 0, g_f;

  sqnl_generator #(.RI(12), .R(12), .N(8), .RESIZE_SHIFT(0)) gen12 (
    .clk(clk), .rst_n(rst_n), .start(g_start), .ready(g_ready), .mode(g_mode),
    .n_in(g_n), .c_in(g_c), .alpha(g_alpha), .busy(g_busy), .done(g_done), .f(g_f));

  // ---- 16-bit LSTM cell --------------------------------------------------
  logic l_start = 0, l_ready, l_done;
  logic signed [31:0] nf = 0, ni = 0, ng = 0, no = 0;
  logic signed [15:0] l_cprev = 0, l_c, l_h;

  sqnl_lstm_cell #(.RI(32), .R(16), .N(8), .RESIZE_SHIFT(14)) cell16 (
    .clk(clk), .rst_n(rst_n), .start(l_start), .ready(l_ready),
    .net_f(nf), .net_i(ni), .net_g(ng), .net_o(no), .c_prev(l_cprev),
    .done(l_done), .c_t(l_c), .h_t(l_h));

  function automatic int rs16(int v);
    return ref_clamp(floor_div(v, 1 << 14), -32768, 32767);
  endfunction

  initial begin
    int m, al, e, t0, sf, si, so, ig, fc, cexp, hexp, vf, vi, vg, vo;
    real ideal;
    logic signed [15:0] c_fb;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);

    // 1. R = 12
    for (int s = 0; s < 3; s++) begin
      m  = (s == 0) ? 0 : 3;
      al = (s == 1) ? 1024 : 0;
      g_mode  = act_mode_e'(m);
      g_alpha = 12'(al);
      for (int nv = -2048; nv < 2048; nv++) begin
        g_n = 12'(nv);
        g_start = 1;
        @(negedge clk);
        g_start = 0;
        t0 = cycles;
        while (!g_done) @(negedge clk);
        check(cycles - t0 == 8, "R12 latency", nv, cycles - t0, 8);
        e = ref_act(12, 8, m, nv, 1024, al);
        check(int'(g_f) == e, "R12 Eq.1", nv, g_f, e);
        ideal = (m == 0) ? ref_sym_eq(12, real'(nv)) : ref_asym_eq(12, real'(nv), real'(al));
        check(real'(g_f) - ideal < 4.01 && ideal - real'(g_f) < 5.51, "R12 closed form", nv, g_f, int'(ideal));
      end
    end

    // 2. 16-bit LSTM cell
    c_fb = 0;
    for (int step = 0; step < 60; step++) begin
      vf = $urandom_range(0, 1 << 21) - (1 << 20) + ((step % 6 == 0) ? (1 << 30) : 0);
      vi = $urandom_range(0, 1 << 21) - (1 << 20) + ((step % 6 == 0) ? (1 << 30) : 0);
      vg = $urandom_range(0, 1 << 22) - (1 << 21);
      vo = $urandom_range(0, 1 << 21) - (1 << 20);
      nf = vf; ni = vi; ng = vg; no = vo;
      l_cprev = c_fb;
      l_start = 1;
      @(negedge clk);
      l_start = 0;
      t0 = cycles;
      while (!l_done) @(negedge clk);
      check(cycles - t0 == 26, "R16 cell latency", step, cycles - t0, 26);
      sf = ref_act(16, 8, 1, rs16(vf), 0, 0);
      si = ref_act(16, 8, 1, rs16(vi), 0, 0);
      so = ref_act(16, 8, 1, rs16(vo), 0, 0);
      ig = ref_act(16, 8, 2, rs16(vg), si, 0);
      fc = floor_div(int'(l_cprev) * sf, 1 << 14);
      cexp = ref_clamp(fc + ig, -32768, 32767);
      hexp = ref_act(16, 8, 2, cexp, so, 0);
      check(int'(l_c) == cexp, "R16 c_t", step, l_c, cexp);
      check(int'(l_h) == hexp, "R16 h_t", step, l_h, hexp);
      c_fb = l_c;
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
