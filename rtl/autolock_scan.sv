// autolock_scan: lock-acquisition scan for a cavity servo.
//
// While 'run' is high (the servo is armed but not locked) the scan output sweeps as a
// triangle between lo and hi, moving by 'step' every clock and reversing direction at
// each limit. The step has 16 fractional bits (16.16 LSB per clock), so the sweep can be
// as slow as the slow-ADC transmission signal requires (down to 1.5 kLSB/s). It is added to the servo output, so the cavity or laser is swept until
// the lock threshold is crossed. When 'run' goes low the scan stops and holds its
// value, so the PID takes over from the point where lock was found without a jump.
// The waveform shape and the hold are this design's choices.
//
// Timing: the scan value is registered and moves on every clock with run = 1.
module autolock_scan
  import mcfs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  input  sample_t     lo,
  input  sample_t     hi,
  input  logic [31:0] step,    // LSB per clock, 16.16
  output sample_t     scan
);
  logic up;
  logic signed [33:0] acc, nxt, lo_w, hi_w;  // 16.16 with two guard bits

  always_comb begin
    lo_w = {{2{lo[15]}}, lo, 16'h0};
    hi_w = {{2{hi[15]}}, hi, 16'h0};
    nxt  = up ? acc + 34'(step) : acc - 34'(step);
  end
  assign scan = sample_t'(acc[31:16]);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0;
      up  <= 1'b1;
    end else if (run) begin
      if (acc < lo_w) begin
        acc <= lo_w; up <= 1'b1;
      end else if (acc > hi_w) begin
        acc <= hi_w; up <= 1'b0;
      end else if (up && nxt >= hi_w) begin
        acc <= hi_w; up <= 1'b0;
      end else if (!up && nxt <= lo_w) begin
        acc <= lo_w; up <= 1'b1;
      end else begin
        acc <= nxt;
      end
    end
  end

endmodule
