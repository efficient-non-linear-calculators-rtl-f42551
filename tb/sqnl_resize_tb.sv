// sqnl_resize_tb: checks the netsum resizer against shift-and-clamp
// arithmetic on integers, for the default 16-to-8-bit instance (shift 6)
// over every input value, and for a 12-to-8-bit instance with shift 2.
module sqnl_resize_tb;
  import sqnl_ref_pkg::*;

  logic signed [15:0] n16;
  logic signed [7:0]  o16;
  logic signed [11:0] n12;
  logic signed [7:0]  o12;
  int checks = 0, failures = 0;

  sqnl_resize dut16 (.n_in(n16), .n_out(o16));
  sqnl_resize #(.RI(12), .R(8), .SHIFT(2)) dut12 (.n_in(n12), .n_out(o12));

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      n16 = 16'(v);
      n12 = 12'(v);
      #1;
      checks++;
      if (int'(o16) != ref_clamp(floor_div(v, 64), -128, 127)) begin
        failures++;
        if (failures < 10) $display("FAIL 16-bit n=%0d got %0d", v, o16);
      end
      if (v >= -2048 && v < 2048) begin
        checks++;
        if (int'(o12) != ref_clamp(floor_div(v, 4), -128, 127)) begin
          failures++;
          if (failures < 10) $display("FAIL 12-bit n=%0d got %0d", v, o12);
        end
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
