// temperature_servo: variable-duty-cycle PID temperature servo.
//
// A slow ADC reads a temperature sensor. The error (setpoint + offset) - reading drives
// a shift-add PID (pid_filter) that updates once per slow-ADC sample ('sample', 125 kHz
// when all 16 slow channels are read in turn). The PID sum is rounded to 16 bits and
// multiplied by a 7-bit signed overall gain in steps of 1/16 (mult/16, from 1/4 to
// almost 4), then added to a preset. The result, clamped to 0..65535, is the heater
// on-time in 1/16 of a shift-register tick and drives vdc_output, a 1 kHz
// pulse-width output on one bit of the shift-register bus.
//
// preset_ramp brings the preset up slowly when the servo is switched on and enables
// the PID when the target is reached. With FIXED_PID = 1 the P, I and D coefficients
// are the constant FIXED_CFG and the run-time coefficients are ignored; only the
// overall gain stays adjustable, which saves logic. How the PID output maps onto the
// duty word (one output LSB = 1/16 tick) is this design's choice.
//
// Timing: PID state advances on 'sample'; drive is registered on the following clock;
// the VDC output samples drive at the start of each 1 kHz period.
module temperature_servo
  import mcfs_pkg::*;
#(
  parameter bit          FIXED_PID = 1'b0,
  parameter pid_cfg_t    FIXED_CFG = TEMP_FIXED_PID,
  parameter int unsigned PERIOD    = 2000,
  parameter int unsigned VDC_START = 0      // heater period stagger, see vdc_output
) (
  input  logic        clk,
  input  logic        rst,
  input  temp_cfg_t   cfg,
  input  logic        sample,
  input  sample_t     adc,
  input  logic        tick,
  output logic        vdc,
  output logic        pid_en,
  output logic [15:0] drive
);
  pid_cfg_t pid_cfg;
  wide_t    err_w, pid_r, scaled, total;
  err_t     err;
  logic signed [ERR_W:0] pid_y;
  logic [15:0] preset;

  assign pid_cfg = FIXED_PID ? FIXED_CFG : cfg.pid;

  always_comb begin
    err_w = sat(wide_t'(cfg.setpoint) + wide_t'(cfg.offset) - wide_t'(adc), ADC_W) <<< FRAC_IN;
    pid_r  = sat(round_shift(wide_t'(pid_y), FRAC_IN), ADC_W);
    scaled = round_shift(pid_r * wide_t'(cfg.mult), 4);
    total  = scaled + wide_t'(preset);
    if (total < 0)            total = '0;
    else if (total > 65535)   total = 65535;
  end
  assign err = err_w[ERR_W-1:0];

  preset_ramp u_ramp (
    .clk, .rst, .ce(sample), .on(cfg.servo_on), .target(cfg.preset), .ramp_div(cfg.ramp_div),
    .preset, .pid_en);

  pid_filter u_pid (
    .clk, .rst, .ce(sample), .en(pid_en), .x(err), .cfg(pid_cfg), .y(pid_y));

  always_ff @(posedge clk) begin
    if (rst) drive <= '0;
    else     drive <= total[15:0];
  end

  vdc_output #(.PERIOD(PERIOD), .START(VDC_START)) u_vdc (.clk, .rst, .tick, .duty(drive), .out(vdc));

  logic unused;
  assign unused = ^{cfg.pad, cfg.adc_sel, cfg.pid, err_w[63:ERR_W], pid_r[63:ADC_W], total[63:16]};

endmodule
