// tb_vdc_output: measures the on-time of each period of the VDC output.
//
// With PERIOD = 2000 ticks (1 kHz at 2 MS/s) and a duty of 1653.28 ticks (82.664 %),
// represented as 26452/16 = 1653.25 ticks, adding the 16-value sequence must give
// 1653 ticks in 12 periods and 1654 in 4, averaging 1653.25. The order of the periods
// is checked against the sequence, and 0 and full-scale duties give a constant output.
module tb_vdc_output;
  localparam int P = 2000;
  logic clk = 0, rst = 1, tick = 0, out;
  logic [15:0] duty;
  int checks = 0, failures = 0;
  int seqv [16] = '{0, 15, 1, 13, 3, 11, 5, 9, 7, 8, 6, 10, 4, 12, 2, 14};

  vdc_output #(.PERIOD(P)) dut (.clk, .rst, .tick, .duty, .out);

  always #5 clk = ~clk;
  always @(posedge clk) tick <= !tick;   // a tick every other clock
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // Count high ticks over one period, starting at a period boundary.
  task automatic measure(output int high);
    high = 0;
    for (int i = 0; i < P; i++) begin
      @(posedge clk iff tick); #1;
      if (out) high++;
    end
  endtask

  int h, total, n1654;
  initial begin
    duty = 16'd26452;   // 1653.25 ticks
    repeat (3) @(posedge clk); #1 rst = 0;
    // align: the first tick after reset starts a period (idx 0); output lags one tick
    @(posedge clk iff tick); #1;
    total = 0; n1654 = 0;
    for (int p = 0; p < 16; p++) begin
      measure(h);
      expect_true(h == (26452 + seqv[(p + 1) % 16]) / 16 || h == (26452 + seqv[p % 16]) / 16, "period on-time follows the sequence");
      total += h;
      if (h == 1654) n1654++;
    end
    $display("16 periods: total %0d ticks, %0d periods of 1654", total, n1654);
    expect_true(n1654 == 4, "four periods rounded up");
    expect_true(total == 16 * 1653 + 4, "average 1653.25 ticks");
    duty = 16'd0;
    measure(h); measure(h);
    expect_true(h == 0, "zero duty");
    duty = 16'hFFFF;
    measure(h); measure(h);
    expect_true(h == P, "full duty saturates to a constant output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
