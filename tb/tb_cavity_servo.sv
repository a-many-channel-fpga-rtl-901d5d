// tb_cavity_servo: closed-loop test of one laser/cavity servo against a cavity model.
//
// Model: the cavity resonance sits at output code V0. The fast error signal is
// V0 - out + OFFSET (a Haensch-Couillaud error with a lock offset) and the
// transmission is 30000 - (out - V0)^2 / 8. Both reach the servo through one register
// (converter latency). The test checks, in order:
//   - the auto-lock scan sweeps the output until the transmission passes the threshold,
//     then the PID is enabled (lock acquired) and the scan holds;
//   - the PID alone locks to V0 + OFFSET (the lock offset);
//   - the dither lock-in and correction integrator then remove the offset, so the
//     output converges to V0 (the transmission peak) within a few LSB;
//   - the lock status goes from recently locked to steady after HOLD_CYCLES;
//   - inhibiting the dither stops the dither and the lock-in results;
//   - a jump of the resonance beyond the capture range loses the lock, the scan resumes
//     and the servo relocks.
module tb_cavity_servo;
  import mcfs_pkg::*;
  localparam int V0 = 5000, OFFSET = 120, HOLD = 2000;
  logic clk = 0, rst = 1, dither_inhibit = 0;
  cavity_cfg_t cfg;
  sample_t err_in, trans, out;
  logic locked, dither_active, demod_valid;
  lock_status_e status;
  err_t correction;
  err_t demod [6];
  int checks = 0, failures = 0;
  int v0;

  cavity_servo #(.HOLD_CYCLES(HOLD)) dut (.clk, .rst, .cfg, .dither_inhibit, .err_in, .trans,
    .out, .locked, .status, .dither_active, .correction, .demod, .demod_valid);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cavity model with one register of latency
  always_ff @(posedge clk) begin
    int d, t;
    d = int'(out) - v0;
    err_in <= sample_t'(-d + OFFSET);
    t = 30000 - (d * d) / 8;
    trans <= sample_t'(t < -30000 ? -30000 : t);
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (out=%0d corr=%0d)", what, out, correction); end
  endtask

  function automatic coef_t c(int shift, frac_e f = FRAC_NONE);
    c.on = 1'b1; c.shift = 6'(shift); c.frac = f;
  endfunction

  int t0, n_valid;
  initial begin
    v0 = V0;
    cfg = '0;
    cfg.threshold = 16'sd20000;
    cfg.scan_lo = -16'sd20000; cfg.scan_hi = 16'sd20000; cfg.scan_step = 32'd20 << 16;
    cfg.pid.p_gain = c(2); cfg.pid.p_roll = c(0);         // P = 0.5
    cfg.pid.i_gain = c(6);                                // integrator
    cfg.dither_on = 1; cfg.dither_step_len = 35'd1; cfg.dither_shift = 5'd8;
    cfg.lockin_shift = 6'd2; cfg.corr_gain = c(2); cfg.corr_on = 1;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (20) @(posedge clk);
    expect_true(!locked && out == 0, "idle while not armed");
    cfg.servo_on = 1;
    t0 = 0;
    while (!locked && t0 < 20000) begin @(posedge clk); t0++; end
    expect_true(locked, "scan acquires lock");
    expect_true(status == LOCK_RECENT, "status recent after acquisition");
    $display("locked after %0d clocks at out=%0d", t0, out);
    // PID alone (correction still small) pulls to the offset point quickly
    cfg.corr_on = 0;
    repeat (400) @(posedge clk); #1;
    expect_true(out > V0 + OFFSET - 30 && out < V0 + OFFSET + 30, "PID locks to V0+OFFSET");
    expect_true(status == LOCK_RECENT, "still recent");
    // dither correction removes the offset
    cfg.corr_on = 1;
    repeat (30000) @(posedge clk); #1;
    $display("after correction: out=%0d correction=%0d (16.9)", out, correction);
    expect_true(out > V0 - 25 && out < V0 + 25, "dither lock corrects the offset");
    expect_true(correction < -(OFFSET - 10) * 512 && correction > -(OFFSET + 10) * 512, "correction equals -offset");
    expect_true(status == LOCK_STEADY, "status steady after hold time");
    // dither inhibit
    dither_inhibit = 1;
    @(posedge clk); #1;
    expect_true(!dither_active, "inhibit stops dither");
    n_valid = 0;
    repeat (600) begin @(posedge clk); if (demod_valid) n_valid++; end
    expect_true(n_valid == 0, "no lock-in results while inhibited");
    dither_inhibit = 0;
    // resonance jumps far away: lock is lost, scan resumes and relocks
    v0 = -8000;
    t0 = 0;
    while (locked && t0 < 100) begin @(posedge clk); t0++; end
    expect_true(!locked, "lock lost after jump");
    t0 = 0;
    while (!locked && t0 < 40000) begin @(posedge clk); t0++; end
    expect_true(locked, "relock at the new resonance");
    repeat (3000) @(posedge clk); #1;
    expect_true(out > -8000 + OFFSET - 60 - 150 && out < -8000 + OFFSET + 60, "locked near new resonance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
