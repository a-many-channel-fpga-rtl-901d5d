// mcfs_pkg: types, constants and fixed-point helpers shared by the control system.
//
// Fixed point. Analog samples are 16-bit two's complement. Error signals inside the
// servos carry 9 extra fractional bits ("16.9", 25 bits) so that dither and offset
// corrections can act below one converter LSB. The IIR filters add 32 (P, I) or 16 (D)
// further internal fractional bits.
//
// Coefficients. Every filter coefficient is a power of two with an optional second
// term, c = 2^-shift * (1 + {0, +1/4, +1/2, -1/8}), which gives steps of 25 % or finer
// without a multiplier. coef_t stores it as {on, frac, shift}; on = 0 makes the
// coefficient zero. Every right shift rounds (adds 2^(s-1) before shifting by s), both
// the inner shift of the second term and the outer shift.
//
// Dither/demodulation waveforms. One dither period is 60 coarse steps. The stepped
// waveform that is integrated twice into the dither is +1 for steps 5..24, -1 for
// steps 35..54 and 0 elsewhere (120 degrees at +-1 and 60 degrees at 0, which removes
// the 3rd harmonic). The same three-level layout, negated, is the demodulation
// waveform: it is -1 where the dither is near its minimum (step 15) and +1 near its
// maximum (step 45). The constants for the two integrators are computed below by
// constant functions rather than stored as tables.
//
// Lint note: a module that imports this package but uses only part of it is reported
// for the constants it does not need (for example TEMP_FIXED_PID, used only by the
// temperature servo, and QUARTER, used only by the lock-in). These are shared
// definitions, not dead code.
package mcfs_pkg;

  localparam int unsigned ADC_W   = 16;  // converter word
  localparam int unsigned FRAC_IN = 9;   // sub-LSB fractional bits of servo inputs
  localparam int unsigned ERR_W   = ADC_W + FRAC_IN;  // 25

  typedef logic signed [ADC_W-1:0] sample_t;
  typedef logic signed [ERR_W-1:0] err_t;
  // Wide arithmetic word used inside the filters (internal words are at most 57 bits).
  typedef logic signed [63:0] wide_t;

  typedef enum logic [1:0] {
    FRAC_NONE  = 2'd0,  // 1
    FRAC_QUART = 2'd1,  // 1 + 1/4
    FRAC_HALF  = 2'd2,  // 1 + 1/2
    FRAC_NEG8  = 2'd3   // 1 - 1/8
  } frac_e;

  typedef struct packed {
    logic       on;
    frac_e      frac;
    logic [5:0] shift;
  } coef_t;  // 9 bits

  // P, I and D coefficients of one PID (63 bits).
  typedef struct packed {
    coef_t p_gain;   // G~/2 of the proportional filter
    coef_t p_roll;   // w~_H
    coef_t i_gain;   // G~/2 of the integral filter
    coef_t i_roll;   // w~_L (integral gain cap; off = pure integrator)
    coef_t d_gain;   // D~/2
    coef_t d_w2;     // w~^2
    coef_t d_gamma;  // gamma~
  } pid_cfg_t;

  typedef enum logic [1:0] {
    LOCK_UNLOCKED = 2'd0,
    LOCK_RECENT   = 2'd1,  // locked, but unlocked within the hold time
    LOCK_STEADY   = 2'd2   // locked for longer than the hold time
  } lock_status_e;

  // Configuration of one laser/cavity servo: 256 bits = 8 register words.
  typedef struct packed {
    logic [18:0]   pad;
    logic          trans_ext;      // take the threshold/lock-in signal from trans_sel
    logic [3:0]    trans_sel;      // slow ADC channel used when trans_ext is set
    logic          servo_on;       // arm the auto-lock
    logic          thr_below;      // 1: locked while trans < threshold (reflection)
    sample_t       threshold;
    sample_t       scan_lo;
    sample_t       scan_hi;
    logic [31:0]   scan_step;        // 16.16 LSB per clock
    logic          dither_on;
    logic [34:0]   dither_step_len;  // clocks per coarse step, minus 1
    logic [4:0]    dither_shift;     // dither amplitude (left shift)
    logic [5:0]    lockin_shift;     // lock-in output scaling (right shift)
    coef_t         corr_gain;        // correction integrator gain
    coef_t         corr_roll;        // correction integrator leak (normally off)
    logic          corr_on;
    logic [20:0]   pad2;
    pid_cfg_t      pid;
  } cavity_cfg_t;

  // Configuration of one temperature servo: 256 bits = 8 register words.
  typedef struct packed {
    logic [109:0]       pad;
    logic               servo_on;
    logic [2:0]         adc_sel;     // which temperature channel
    sample_t            setpoint;
    sample_t            offset;
    logic signed [6:0]  mult;        // overall gain, value/16
    logic [15:0]        preset;      // preset target (duty word)
    logic [23:0]        ramp_div;    // servo ticks per preset step
    pid_cfg_t           pid;
  } temp_cfg_t;

  // One segment of the arbitrary waveform sequencer (176 bits = 6 words, 8 allocated).
  typedef enum logic [1:0] {
    GATE_IDLE  = 2'd0,
    GATE_PLUS  = 2'd1,   // fluorescence integration window
    GATE_MINUS = 2'd2    // background integration window
  } gate_e;

  localparam int unsigned AWG_CH = 3;  // laser frequency, laser intensity, trigger

  typedef struct packed {
    logic [1:0]               pad;
    logic [23:0]              dur;       // modulation cycles
    logic                     fm_on;     // add FM to channel 0
    gate_e                    gate;
    logic [AWG_CH-1:0]        load;      // load level[c] at segment start
    sample_t [AWG_CH-1:0]     level;
    logic signed [AWG_CH-1:0][31:0] slope;  // 16.16 per modulation cycle
  } awg_seg_t;

  // Fixed P/I/D coefficients of the temperature servos built without run-time PID
  // adjustment (only their overall gain multiplier stays adjustable). The values are
  // an example for a plant with a thermal time constant of order seconds at a 125 kHz
  // update rate: P = 1/2 with roll-off w_H = 2^-4, integrator I*T = 2^-14, D off.
  localparam pid_cfg_t TEMP_FIXED_PID = '{
    p_gain:  '{on: 1'b1, frac: FRAC_NONE, shift: 6'd6},
    p_roll:  '{on: 1'b1, frac: FRAC_NONE, shift: 6'd4},
    i_gain:  '{on: 1'b1, frac: FRAC_NONE, shift: 6'd15},
    i_roll:  '{on: 1'b0, frac: FRAC_NONE, shift: 6'd0},
    d_gain:  '{on: 1'b0, frac: FRAC_NONE, shift: 6'd0},
    d_w2:    '{on: 1'b0, frac: FRAC_NONE, shift: 6'd0},
    d_gamma: '{on: 1'b0, frac: FRAC_NONE, shift: 6'd0}
  };

  // ---------------------------------------------------------------- helpers

  // Rounding arithmetic right shift: (v + 2^(s-1)) >>> s.
  function automatic wide_t round_shift(input wide_t v, input int unsigned s);
    wide_t half;
    if (s == 0) return v;
    half = wide_t'(1) <<< (s - 1);
    return (v + half) >>> s;
  endfunction

  // Multiply by a shift-add coefficient.
  function automatic wide_t coef_mul(input wide_t v, input coef_t c);
    wide_t base;
    if (!c.on) return '0;
    unique case (c.frac)
      FRAC_NONE:  base = v;
      FRAC_QUART: base = v + round_shift(v, 2);
      FRAC_HALF:  base = v + round_shift(v, 1);
      default:    base = v - round_shift(v, 3);
    endcase
    return round_shift(base, int'(c.shift));
  endfunction

  // Saturate a wide value to a signed field of w bits.
  function automatic wide_t sat(input wide_t v, input int unsigned w);
    wide_t hi, lo;
    hi = (wide_t'(1) <<< (w - 1)) - 1;
    lo = -(wide_t'(1) <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // ------------------------------------------------ dither / demod waveforms

  localparam int unsigned DITHER_STEPS = 60;
  localparam int unsigned QUARTER      = DITHER_STEPS / 4;  // 90 degrees (quadrature)

  // Stepped waveform that is integrated twice into the dither.
  function automatic int stepped(input int unsigned k);
    if (k >= 5 && k < 25) return 1;
    if (k >= 35 && k < 55) return -1;
    return 0;
  endfunction

  // Three-level demodulation waveform, in phase with the dither.
  function automatic int demod_level(input int unsigned k);
    return -stepped(k % DITHER_STEPS);
  endfunction

  // The first integrator is v1(k+1) = v1(k) + s(k). Its value at phase 0 is chosen so
  // that v1 has zero mean over a period (scaled by 60 to stay integer: the integrators
  // run in units of 1/60).
  function automatic int v1_init();
    int acc, sum;
    acc = 0; sum = 0;
    for (int k = 0; k < DITHER_STEPS; k++) begin
      sum += acc;            // v1 before step k, relative to v1(0)
      acc += stepped(k);
    end
    return -sum;             // (60*v1(0) + sum) = 0, in units of 1/60
  endfunction

  // The second integrator is v2(k+1) = v2(k) + v1(k); its phase-0 value gives zero mean.
  function automatic int v2_init();
    int v1, v2, sum;
    v1 = v1_init(); v2 = 0; sum = 0;
    for (int k = 0; k < DITHER_STEPS; k++) begin
      sum += v2;
      v2 += v1;
      v1 += DITHER_STEPS * stepped(k);
    end
    return -(sum / int'(DITHER_STEPS));
  endfunction

endpackage
