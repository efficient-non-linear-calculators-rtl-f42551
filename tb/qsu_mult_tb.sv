// qsu_mult_tb: exhaustive check of the forget-gate product for R = 8: every
// cell state c in -128..127 times every gate value g in 0..64, against
// floor(c * g / 64); also that the product never exceeds |c|.
module qsu_mult_tb;
  import sqnl_ref_pkg::*;

  logic signed [7:0] c, p;
  logic [6:0] g;
  int checks = 0, failures = 0;

  qsu_mult dut (.c(c), .g(g), .p(p));

  initial begin
    for (int cv = -128; cv < 128; cv++) begin
      for (int gv = 0; gv <= 64; gv++) begin
        c = 8'(cv);
        g = 7'(gv);
        #1;
        checks++;
        if (int'(p) != floor_div(cv * gv, 64)) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d g=%0d got %0d", cv, gv, p);
        end
        checks++;
        if ((cv >= 0 && (int'(p) > cv || int'(p) < 0)) || (cv < 0 && (int'(p) < cv || int'(p) > 0)))
          failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
