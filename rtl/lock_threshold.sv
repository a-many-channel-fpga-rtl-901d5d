// lock_threshold: lock detection and lock-status classification for a cavity servo.
//
// The servo is considered locked while the cavity transmission (or, with below = 1,
// the reflection) is past a threshold; 'locked' is the PID enable and stops the
// auto-lock scan. 'arm' switches the servo on; when it is low the servo is never
// locked. The status output drives a three-colour indicator: unlocked, recently
// locked (the lock was lost at some time within the last HOLD_CYCLES clocks), or
// locked for longer than HOLD_CYCLES (5 s at 100 MHz by default).
//
// Timing: level is compared combinationally and 'locked' is registered, so the PID is
// enabled on the clock after the threshold is crossed. A counter of clocks since the
// last loss of lock saturates at HOLD_CYCLES. No hysteresis (this design's choice).
module lock_threshold
  import mcfs_pkg::*;
#(
  parameter int unsigned HOLD_CYCLES = 500_000_000  // 5 s at 100 MHz
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         arm,
  input  sample_t      level,
  input  sample_t      threshold,
  input  logic         below,
  output logic         locked,
  output lock_status_e status
);
  localparam int unsigned CW = $clog2(HOLD_CYCLES + 1);

  logic          past;
  logic [CW-1:0] since;   // clocks since the lock was last lost

  assign past = below ? (level < threshold) : (level > threshold);

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      since  <= '0;
    end else begin
      locked <= arm && past;
      if (!(arm && past))                 since <= '0;
      else if (since != CW'(HOLD_CYCLES)) since <= since + 1'b1;
    end
  end

  always_comb begin
    if (!locked)                        status = LOCK_UNLOCKED;
    else if (since == CW'(HOLD_CYCLES)) status = LOCK_STEADY;
    else                                status = LOCK_RECENT;
  end

endmodule
