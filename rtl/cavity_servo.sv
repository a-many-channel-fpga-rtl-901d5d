// cavity_servo: laser/cavity lock with automatic lock acquisition and a slow
// dither-lock correction of the lock offset.
//
// Signal path (all in 16.9 fixed point): the fast error signal (for example a
// Haensch-Couillaud error from a fast ADC) plus the dither plus the slow correction
// forms the PID input. The PID (pid_filter: shift-add P, I and D filters) runs on every
// clock while the servo is locked. The auto-lock scan is added after the PID; the sum
// is rounded to 16 bits and saturated and goes to a fast DAC.
//
// Lock acquisition: lock_threshold compares the cavity transmission or reflection
// with a threshold. Until it is crossed the PID is held cleared and autolock_scan
// sweeps the output; once it is crossed the PID is enabled and the scan holds.
//
// Dither correction: dither_synth adds a small, nearly sinusoidal dither to the error
// signal while the servo is locked, the dither is switched on and not inhibited. The
// resulting modulation of the transmission is demodulated by lockin_demod; its
// first-harmonic in-phase output is integrated once per dither period by a
// first-order shift-add filter (normally a pure integrator) into the correction. The
// correction integrator runs only while locked and corr_on is set. Using the 1st
// harmonic in-phase output for the correction is this design's choice; all six lock-in
// outputs are brought out as monitors.
//
// Timing: from err_in to out one clock through the D path, two through P and I.
module cavity_servo
  import mcfs_pkg::*;
#(
  parameter int unsigned HOLD_CYCLES = 500_000_000
) (
  input  logic         clk,
  input  logic         rst,
  input  cavity_cfg_t  cfg,
  input  logic         dither_inhibit,
  input  sample_t      err_in,
  input  sample_t      trans,
  output sample_t      out,
  output logic         locked,
  output lock_status_e status,
  output logic         dither_active,
  output err_t         correction,
  output err_t         demod [6],
  output logic         demod_valid
);
  sample_t scan;
  err_t    dither, err_pid;
  logic [5:0] phase;
  logic    step_tick, period_end;
  logic signed [ERR_W:0] pid_y;
  wide_t   err_w, out_w;

  lock_threshold #(.HOLD_CYCLES(HOLD_CYCLES)) u_thr (
    .clk, .rst, .arm(cfg.servo_on), .level(trans), .threshold(cfg.threshold),
    .below(cfg.thr_below), .locked, .status);

  autolock_scan u_scan (
    .clk, .rst, .run(cfg.servo_on && !locked), .lo(cfg.scan_lo), .hi(cfg.scan_hi),
    .step(cfg.scan_step), .scan);

  dither_synth u_dither (
    .clk, .rst, .sync(1'b0), .step_len(cfg.dither_step_len), .amp_shift(cfg.dither_shift),
    .dither, .phase, .step_tick, .period_end);

  assign dither_active = locked && cfg.dither_on && !dither_inhibit;

  lockin_demod u_lockin (
    .clk, .rst, .hold(!dither_active), .sig(trans), .phase, .period_end,
    .out_shift(cfg.lockin_shift), .demod, .valid(demod_valid));

  iir_first_order #(.W_IN(ERR_W), .W_EXTRA(32)) u_corr (
    .clk, .rst, .ce(demod_valid), .en(locked && cfg.corr_on), .x(demod[0]),
    .gain(cfg.corr_gain), .roll(cfg.corr_roll), .y(correction));

  always_comb begin
    err_w = (wide_t'(err_in) <<< FRAC_IN) + wide_t'(correction)
          + (dither_active ? wide_t'(dither) : wide_t'(0));
    err_w = sat(err_w, ERR_W);
  end
  assign err_pid = err_w[ERR_W-1:0];

  pid_filter u_pid (
    .clk, .rst, .ce(1'b1), .en(locked), .x(err_pid), .cfg(cfg.pid), .y(pid_y));

  always_comb out_w = sat(round_shift(wide_t'(pid_y), FRAC_IN) + wide_t'(scan), ADC_W);
  assign out = out_w[ADC_W-1:0];

  // Unused parts of the configuration word.
  logic unused;
  assign unused = ^{cfg.pad, cfg.pad2, cfg.trans_ext, cfg.trans_sel, step_tick, out_w[63:ADC_W]};  // trans source is chosen outside

endmodule
