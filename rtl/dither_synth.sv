// dither_synth: nearly sinusoidal dither from a twice-integrated stepped waveform.
//
// One dither period is 60 coarse time steps; each coarse step lasts step_len+1 clocks,
// so the frequency is f_clk / (60*(step_len+1)): 1.67 MHz at step_len = 0 and 100 MHz,
// down to below 100 uHz with the 35-bit step length. At every coarse step a three-level
// stepped waveform s(k) (+1 for 120 degrees, 0 for 60, -1 for 120, 0 for 60; see
// mcfs_pkg::stepped) is added to a first integrator v1, and v1 to a second integrator
// v2. Each integration suppresses the odd harmonics further (s has no 3rd harmonic),
// so v2 is close to a sine. The integrators run in units of 1/60; their phase-0 values
// give zero mean and are recomputed by constant functions (mcfs_pkg::v1_init and
// v2_init) and reloaded at the start of every period, so they cannot drift. Both
// integrations advancing once per coarse step is this design's choice: the amplitude
// is then independent of the frequency.
//
// Output: dither = round(v2 * 2^amp_shift / 256) in 16.9 format, saturated. phase is
// the current coarse step 0..59 (for the lock-in), step_tick marks the last clock of a
// coarse step and period_end the last clock of a period. sync restarts at phase 0.
// Timing: all outputs are registered or decoded from registers; the dither changes on
// the clock after a step_tick.
module dither_synth
  import mcfs_pkg::*;
#(
  parameter int unsigned STEP_W = 35
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              sync,
  input  logic [STEP_W-1:0] step_len,
  input  logic [4:0]        amp_shift,
  output err_t              dither,
  output logic [5:0]        phase,
  output logic              step_tick,
  output logic              period_end
);
  localparam int V1_0 = v1_init();
  localparam int V2_0 = v2_init();

  logic [STEP_W-1:0]   cnt;
  logic signed [15:0]  v1;
  logic signed [23:0]  v2;
  wide_t               d_w;

  assign step_tick  = (cnt >= step_len);
  assign period_end = step_tick && (phase == 6'(DITHER_STEPS - 1));

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      cnt   <= '0;
      phase <= '0;
      v1    <= 16'(V1_0);
      v2    <= 24'(V2_0);
    end else if (step_tick) begin
      cnt <= '0;
      if (period_end) begin
        phase <= '0;
        v1    <= 16'(V1_0);
        v2    <= 24'(V2_0);
      end else begin
        phase <= phase + 1'b1;
        v1    <= v1 + 16'(int'(DITHER_STEPS) * stepped(int'(phase)));
        v2    <= v2 + 24'(v1);
      end
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  always_comb d_w = sat(round_shift(wide_t'(v2) <<< amp_shift, 8), ERR_W);
  assign dither = d_w[ERR_W-1:0];
  // Bits above the saturated field are copies of its sign.
  logic unused;
  assign unused = ^d_w[63:ERR_W];

endmodule
