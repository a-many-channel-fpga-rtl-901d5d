// tb_preset_ramp: checks the preset ramp rate (one unit per ramp_div+1 ticks), that the
// PID is enabled only once the target is reached, and the ramp back down when off.
module tb_preset_ramp;
  logic clk = 0, rst = 1, ce = 0, on = 0, pid_en;
  logic [15:0] target, preset;
  logic [23:0] ramp_div;
  int checks = 0, failures = 0, ticks;

  preset_ramp dut (.clk, .rst, .ce, .on, .target, .ramp_div, .preset, .pid_en);

  always #5 clk = ~clk;
  always @(posedge clk) ce <= ($urandom % 3) == 0;   // irregular servo ticks
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (preset=%0d ticks=%0d)", what, preset, ticks); end
  endtask

  initial begin
    target = 40; ramp_div = 4;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (20) @(posedge clk); #1;
    expect_true(preset == 0 && !pid_en, "idle while off");
    on = 1; ticks = 0;
    while (preset != 40 && ticks < 1000) begin
      @(posedge clk); if (ce) ticks++;
      #1;
      if (preset != 40) begin
        checks++;
        if (pid_en) begin failures++; $display("FAIL PID enabled during the ramp"); end
      end
    end
    expect_true(ticks == 40 * 5, "ramp takes (ramp_div+1) ticks per unit");
    @(posedge clk iff ce); #1;
    expect_true(pid_en, "PID enabled at target");
    target = 30;
    repeat (300) @(posedge clk); #1;
    expect_true(preset == 30 && pid_en, "follows a lower target, PID stays on");
    on = 0;
    @(posedge clk iff ce); #1;
    expect_true(!pid_en, "off disables PID");
    repeat (1000) @(posedge clk); #1;
    expect_true(preset == 0, "ramps down to zero when off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
