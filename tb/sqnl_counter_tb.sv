// sqnl_counter_tb: checks the offset counter for R = 8 at N = 8 (default)
// and N = 4: the count, the last flag, the symmetric offsets (listed by
// hand: -56, -40, ..., 56 for N = 8 and -48, -16, 16, 48 for N = 4), the
// asymmetric offsets for several alpha, restart on clr and hold without en.
module sqnl_counter_tb;
  import sqnl_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0, asym = 0;
  logic signed [7:0] alpha = 0;
  logic [2:0] k8;
  logic [1:0] k4;
  logic last8, last4;
  logic signed [7:0] u8, u4;
  int checks = 0, failures = 0, cycles = 0;
  int sym8 [8] = '{-56, -40, -24, -8, 8, 24, 40, 56};
  int sym4 [4] = '{-48, -16, 16, 48};
  int alphas [4] = '{0, 30, 50, 64};

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  sqnl_counter dut8 (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .asym(asym),
                     .alpha(alpha), .k(k8), .last(last8), .u(u8));
  sqnl_counter #(.R(8), .N(4)) dut4 (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en),
                     .asym(asym), .alpha(alpha), .k(k4), .last(last4), .u(u4));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (k8=%0d u8=%0d k4=%0d u4=%0d)", what, k8, u8, k4, u4);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    clr = 1; @(negedge clk); clr = 0;
    for (int a = 0; a < 5; a++) begin
      asym  = (a > 0);
      alpha = (a > 0) ? 8'(alphas[a-1]) : 8'd0;
      en = 1;
      for (int i = 0; i < 16; i++) begin
        #1;
        check(int'(k8) == i % 8, "k8");
        check(int'(k4) == i % 4, "k4");
        check(last8 == (i % 8 == 7), "last8");
        check(last4 == (i % 4 == 3), "last4");
        if (!asym) begin
          check(int'(u8) == sym8[i % 8], "sym u8");
          check(int'(u4) == sym4[i % 4], "sym u4");
        end else begin
          check(int'(u8) == sym8[i % 8] - 64 + int'(alpha), "asym u8");
          check(int'(u4) == sym4[i % 4] - 64 + int'(alpha), "asym u4");
          check(int'(u8) == ref_offset(8, 8, i % 8, 1'b1, int'(alpha)), "asym ref u8");
        end
        @(negedge clk);
      end
      en = 0;
    end
    // hold without en, restart on clr
    en = 1; repeat (3) @(negedge clk); en = 0;
    repeat (2) @(negedge clk);
    check(k8 == 3'd3, "hold");
    clr = 1; @(negedge clk); clr = 0;
    check(k8 == 3'd0 && k4 == 2'd0, "clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
