// sqnl_sat_addsub_tb: exhaustive check of one sample of the square-law
// method, f_sat(f_sat(n + u, C) - u, M), for R = 8: every n and u, the
// adder levels C = 0, 20, 40, 64 and the lower-only asymmetric clipping.
// Also checks the property the method rests on: with no clipping s = n.
module sqnl_sat_addsub_tb;
  import sqnl_ref_pkg::*;

  logic signed [7:0] n, u, c, s;
  logic              lower_only;
  int checks = 0, failures = 0;
  int clevels [4] = '{0, 20, 40, 64};
  int exp_s, a;

  sqnl_sat_addsub dut (.n(n), .u(u), .c_lvl(c), .lower_only(lower_only), .s(s));

  initial begin
    for (int mode = 0; mode < 5; mode++) begin
      for (int nv = -128; nv < 128; nv++) begin
        for (int uv = -120; uv <= 56; uv++) begin
          lower_only = (mode == 4);
          c = (mode < 4) ? 8'(clevels[mode]) : 8'd64;
          n = 8'(nv);
          u = 8'(uv);
          #1;
          if (mode == 4) a = (nv + uv < -64) ? -64 : nv + uv;
          else           a = ref_clamp(nv + uv, -clevels[mode], clevels[mode]);
          exp_s = ref_clamp(a - uv, -128, 127);
          checks++;
          if (int'(s) != exp_s) begin
            failures++;
            if (failures < 10)
              $display("FAIL mode=%0d n=%0d u=%0d got %0d exp %0d", mode, nv, uv, s, exp_s);
          end
          if (mode == 3 && nv + uv <= 64 && nv + uv >= -64) begin
            checks++;
            if (int'(s) != nv) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
