// sqnl_filter_tb: feeds random R = 8 sample bursts of N = 8 into the
// averaging filter and checks the latched mean (floor of sum / N), the
// LogSQNL form (floor of sum / 2N, plus 32), the one-clock valid pulse after
// the last sample, that f holds between results, that a burst started with
// first discards the old sum, and the sign extension of a 12-bit output.
module sqnl_filter_tb;
  import sqnl_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, first = 0, last = 0, logsig = 0;
  logic signed [7:0] sample = 0;
  logic signed [7:0] f;
  logic signed [11:0] f12;
  logic valid, valid12;
  int checks = 0, failures = 0, cycles = 0;
  int sum, expv;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  sqnl_filter dut (.clk(clk), .rst_n(rst_n), .en(en), .first(first), .last(last),
                   .logsig(logsig), .sample(sample), .f(f), .valid(valid));
  sqnl_filter #(.R(8), .N(8), .RO(12)) dut12 (.clk(clk), .rst_n(rst_n), .en(en),
                   .first(first), .last(last), .logsig(logsig), .sample(sample),
                   .f(f12), .valid(valid12));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s f=%0d exp=%0d", what, f, expv);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // a partial burst that must be discarded
    en = 1; first = 1; sample = 8'sd100; @(negedge clk); first = 0; @(negedge clk);
    en = 0;
    for (int t = 0; t < 400; t++) begin
      logsig = t[0];
      sum = 0;
      for (int i = 0; i < 8; i++) begin
        en = 1; first = (i == 0); last = (i == 7);
        // bias some bursts to the extremes
        if (t % 5 == 0)      sample = (t % 10 == 0) ? -8'sd128 : 8'sd127;
        else                 sample = 8'($urandom);
        sum += int'(sample);
        @(negedge clk);
        check(valid == (i == 7), "valid timing");
        // an idle clock inside the burst must not change the sum
        if (i == 3) begin
          en = 0; first = 0; last = 0; @(negedge clk);
          check(!valid, "no valid when idle");
        end
      end
      en = 0; first = 0; last = 0;
      expv = logsig ? floor_div(sum, 16) + 32 : floor_div(sum, 8);
      check(int'(f) == expv, "mean");
      check(int'(f12) == expv, "sign extended mean");
      @(negedge clk);
      check(!valid, "valid is one clock");
      check(int'(f) == expv, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
