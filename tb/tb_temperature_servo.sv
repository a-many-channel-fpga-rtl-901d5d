// tb_temperature_servo: closed-loop test of a VDC temperature servo with a thermal
// model, at a shortened time scale (VDC period of 100 ticks, a servo sample every 64
// clocks, a shift-register tick every 2 clocks).
//
// Thermal model: temperature (in ADC LSB, 256 internal fractional units) rises with the
// heater bit and relaxes towards ambient (code 0) with a time constant of 2^18 clocks.
// Checks: the PID stays disabled while the preset ramps up; the preset reaches its
// target; the loop then settles at setpoint + offset; the drive word equals
// preset + round(PID * mult / 16) computed here from the PID output; a servo with
// FIXED_PID = 1 ignores its run-time coefficients (zero here) and still regulates.
module tb_temperature_servo;
  import mcfs_pkg::*;
  localparam int P = 100;
  logic clk = 0, rst = 1, sample = 0, tick = 0;
  temp_cfg_t cfg, cfg_fixed;
  sample_t adc, adc_f;
  logic vdc, pid_en, vdc_f, pid_en_f;
  logic [15:0] drive, drive_f;
  int checks = 0, failures = 0;
  longint temp, temp_f;   // 2^8 units per ADC LSB
  int scnt = 0;

  temperature_servo #(.PERIOD(P)) dut (.clk, .rst, .cfg, .sample, .adc, .tick, .vdc, .pid_en, .drive);
  temperature_servo #(.FIXED_PID(1'b1), .PERIOD(P)) dut_fixed (.clk, .rst, .cfg(cfg_fixed), .sample, .adc(adc_f), .tick,
    .vdc(vdc_f), .pid_en(pid_en_f), .drive(drive_f));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    tick <= !tick;
    scnt <= (scnt == 63) ? 0 : scnt + 1;
    sample <= (scnt == 63);
    // heater adds 40/256 LSB per clock while on; loss = temp / 2^18
    temp   <= temp   + (vdc   ? 40 : 0) - (temp   >>> 18);
    temp_f <= temp_f + (vdc_f ? 40 : 0) - (temp_f >>> 18);
  end
  assign adc   = sample_t'(temp >>> 8);
  assign adc_f = sample_t'(temp_f >>> 8);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (adc=%0d drive=%0d)", what, adc, drive); end
  endtask
  function automatic coef_t c(int shift);
    c.on = 1'b1; c.shift = 6'(shift); c.frac = FRAC_NONE;
  endfunction

  longint exp_drive, pr;
  int en_early = 0;
  initial begin
    temp = 0; temp_f = 0;
    cfg = '0;
    cfg.setpoint = 16'sd20000; cfg.offset = 16'sd500;
    cfg.mult = 7'sd16; cfg.preset = 16'd600; cfg.ramp_div = 24'd3;
    cfg.pid.p_gain = c(4); cfg.pid.p_roll = c(2); cfg.pid.i_gain = c(9);
    cfg_fixed = cfg; cfg_fixed.pid = '0; cfg_fixed.mult = 7'sd63;
    repeat (3) @(posedge clk); #1 rst = 0;
    cfg.servo_on = 1; cfg_fixed.servo_on = 1;
    while (dut.preset != 16'd600) begin
      @(posedge clk);
      if (pid_en) en_early++;
    end
    expect_true(en_early == 0, "PID disabled during preset ramp");
    repeat (200) @(posedge clk); #1;
    expect_true(pid_en, "PID enabled after ramp");
    repeat (1500000) @(posedge clk); #1;
    $display("adc=%0d (target 20500) drive=%0d; fixed servo adc=%0d drive=%0d", adc, drive, adc_f, drive_f);
    expect_true(adc > 20500 - 60 && adc < 20500 + 60, "settles at setpoint + offset");
    expect_true(adc_f > 20500 - 250 && adc_f < 20500 + 250, "fixed-coefficient servo regulates");
    // drive formula, sampled between servo updates
    for (int i = 0; i < 20; i++) begin
      @(posedge clk iff sample); repeat (3) @(posedge clk); #1;
      pr = (longint'(dut.pid_y) + 256) >>> 9;
      exp_drive = ((pr * 16) + 8) >>> 4;
      exp_drive += 600;
      if (exp_drive < 0) exp_drive = 0;
      if (exp_drive > 65535) exp_drive = 65535;
      expect_true(longint'(drive) == exp_drive, "drive = preset + PID*mult/16");
    end
    // overall gain: doubling mult doubles the PID part of the drive
    cfg.mult = 7'sd32;
    @(posedge clk iff sample); repeat (3) @(posedge clk); #1;
    pr = (longint'(dut.pid_y) + 256) >>> 9;
    expect_true(longint'(drive) == ((pr * 32 + 8) >>> 4) + 600, "mult 32/16 doubles the gain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
