// mcfs_top_env: end-to-end stimulus, plant models and checks for mcfs_top.
//
// Everything reaches the design through its pins: parameters are loaded over the
// serial input, converters are modelled at the sample level, and the slow digital I/O
// is decoded from behavioural shift-register chains. The environment models
//   - nine cavities: fast error signal -(out - v0) + offset within a capture range
//     of +-400 LSB (0 outside) and a quadratic
//     transmission peak (a reflection dip for servo 8) on the slow ADC;
//   - temperature sensors as constant readings on the five temperature channels
//     (three wrong channels read 0, so a wrong channel selection is visible);
//   - fluorescence on the gated-integrator input: 100 + intensity/4, where the
//     intensity is AWG channel 1;
//   - two 13-bit output chains with latches and two 11-bit input chains.
// The slow ADC strobe comes every 800 clocks (125 kS/s per channel), so the auto-lock
// scan is set to 1/16 LSB per clock and the dither period to 19,200 clocks (24 slow
// samples per period).
//
// Mechanisms counted (each must happen at least once):
//   serial parameter writes, a malformed frame being ignored, auto-lock scan and lock
//   acquisition on all nine servos (one in reflection mode), recently-locked status,
//   steady status (only when HOLD is small enough to be reached), lock loss and relock,
//   dither-lock removal of a lock offset, dither inhibit, preset ramp up to the PID
//   enable, an adjustable and a fixed-coefficient temperature servo with channel
//   selection, the VDC heater duty with sub-tick resolution, AWG segments with load,
//   ramp and FM at the 50.5 kHz modulation cycle, gated integration with background
//   subtraction and cycle-to-cycle difference, RAM read-back and monitor outputs,
//   slow DACs, auxiliary inputs and the shift-register inputs and outputs, dither
//   alternation between two servos, a servo switched to another slow channel for its
//   threshold signal, and staggered heater periods.
//
// CHECK_STEADY selects whether the steady-lock status is expected within the run.
module mcfs_top_env
  import mcfs_pkg::*;
#(
  parameter bit CHECK_STEADY = 1'b0
) (
  output logic         clk,
  output logic         rst,
  output sample_t      fast_adc [10],
  output sample_t      slow_adc [16],
  output logic         slow_adc_strobe,
  input  sample_t      fast_dac [14],
  input  sample_t      slow_dac [16],
  input  sample_t      aux_out [2],
  output logic         s_clk,
  output logic         s_dat,
  output logic         s_cs_n,
  input  logic         sr_clk,
  input  logic         sr_latch,
  input  logic         sr_load,
  input  logic [1:0]   sr_do,
  output logic [1:0]   sr_di,
  input  logic [21:0]  dig_in,
  output logic         dither_inhibit,
  input  logic [8:0]   locked,
  input  lock_status_e lock_status [9],
  input  logic [8:0]   dither_active,
  input  logic [7:0]   temp_pid_en,
  input  logic [3:0]   awg_seg,
  input  logic         awg_mod_tick,
  output logic [9:0]   gi_rd_addr,
  input  logic signed [39:0] gi_rd_diff,
  input  logic signed [39:0] gi_rd_ddiff,
  input  logic [9:0]   gi_wr_ptr,
  input  logic         gi_done
);
  localparam int OFFSET0 = 120;

  int checks = 0, failures = 0;
  int n_writes = 0, n_bad_frames = 0, n_locks = 0, n_recent = 0, n_steady = 0, n_relock = 0;
  int n_corrected = 0, n_inhibit = 0, n_ramp = 0, n_temp_adj = 0, n_temp_fixed = 0;
  int n_vdc_frac = 0, n_modcycle = 0, n_fm = 0, n_ramp_seg = 0, n_gi = 0, n_gi_ddiff = 0;
  int n_ram = 0, n_mon = 0, n_sdac = 0, n_aux = 0, n_dout = 0, n_din = 0, n_unlock = 0;
  int n_alt_turns = 0, n_alt_both = 0, n_trans_sel = 0, n_stagger = 0, n_sdac_servo = 0;

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------------ clock, watchdog
  initial clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ cavity models
  int v0 [9];
  int off [9];
  sample_t trans_now [9];
  always_ff @(posedge clk) begin
    for (int s = 0; s < 9; s++) begin
      int d, t;
      d = int'(fast_dac[s]) - v0[s];
      fast_adc[s] <= (d > -400 && d < 400) ? sample_t'(-d + off[s]) : '0;  // capture range
      t = (d * d) / 8;
      if (t > 30000) t = 30000;
      trans_now[s] <= (s == 8) ? sample_t'(t) : sample_t'(30000 - t);
    end
    fast_adc[9] <= sample_t'(100 + int'(fast_dac[10]) / 4);
  end

  // slow ADC: a new set every 800 clocks
  sample_t temp_in [5];
  sample_t aux_in [2];
  int strobe_cnt = 0;
  always_ff @(posedge clk) begin
    strobe_cnt <= (strobe_cnt == 799) ? 0 : strobe_cnt + 1;
    slow_adc_strobe <= (strobe_cnt == 799);
  end
  always_comb begin
    for (int s = 0; s < 9; s++) slow_adc[s] = trans_now[s];
    slow_adc[9] = aux_in[0];
    slow_adc[10] = aux_in[1];
    for (int k = 0; k < 5; k++) slow_adc[11 + k] = temp_in[k];
  end

  // ------------------------------------------------------------ shift-register chains
  logic [12:0] oshift [2];
  logic [25:0] latched = '0;
  logic [10:0] ishift [2];
  logic [21:0] pins;
  always @(posedge sr_clk) for (int c = 0; c < 2; c++) oshift[c] <= {oshift[c][11:0], sr_do[c]};
  always @(posedge sr_latch) latched <= {oshift[1], oshift[0]};
  always @(posedge clk) if (sr_load) begin ishift[0] <= pins[10:0]; ishift[1] <= pins[21:11]; end
  always @(posedge sr_clk) if (!sr_load) for (int c = 0; c < 2; c++) ishift[c] <= {ishift[c][9:0], 1'b0};
  assign sr_di = {ishift[1][10], ishift[0][10]};

  // heater period stagger: frame index of the rising edges of heater bits 0 and 2
  int frame_abs = 0, rise0 = -1, rise2 = -1;
  logic [25:0] latched_q = '0;
  always @(posedge sr_latch) begin
    #1;
    frame_abs++;
    if (latched[0] && !latched_q[0]) rise0 = frame_abs;
    if (latched[2] && !latched_q[2]) rise2 = frame_abs;
    latched_q = latched;
  end

  // heater duty: on-ticks per 2000 frames, for heater bits 0 and 2
  int frame_cnt = 0, on0 = 0, on2 = 0, duty0 = -1, duty2 = -1;
  always @(posedge sr_latch) begin
    on0 = on0 + int'(latched[0]);   // value latched by the previous frame
    on2 = on2 + int'(latched[2]);
    frame_cnt++;
    if (frame_cnt == 2000) begin
      duty0 = on0; duty2 = on2; on0 = 0; on2 = 0; frame_cnt = 0;
    end
  end

  // ---------------------------------------------------------------- serial writes
  task automatic send(logic [63:0] bits, int nbits);
    #37 s_cs_n = 0;
    for (int i = nbits - 1; i >= 0; i--) begin
      #13 s_dat = bits[i];
      #27 s_clk = 1;
      #30 s_clk = 0;
    end
    #33 s_cs_n = 1;
    #60;
  endtask
  task automatic wr(int addr, logic [31:0] data);
    send({16'(addr), data}, 48);
    n_writes++;
  endtask
  task automatic wr_block(int base, logic [255:0] v, int nwords);
    for (int w = 0; w < nwords; w++) wr(base + w, v[w*32 +: 32]);
  endtask

  function automatic coef_t c(int shift, frac_e f = FRAC_NONE);
    c.on = 1'b1; c.shift = 6'(shift); c.frac = f;
  endfunction

  // ------------------------------------------------------------------ AWG monitors
  int last_tick = -1, t_now = 0;
  always @(posedge clk) t_now++;
  always @(posedge clk) if (awg_mod_tick) begin
    if (last_tick >= 0 && t_now - last_tick == 1980) n_modcycle++;
    last_tick = t_now;
  end
  int fmin = 99999, fmax = -99999, rmin = 99999;
  logic [3:0] prev_seg = 0;
  always @(posedge clk) begin
    if (awg_seg == 0) begin
      if (int'(fast_dac[9]) < fmin) fmin = int'(fast_dac[9]);
      if (int'(fast_dac[9]) > fmax) fmax = int'(fast_dac[9]);
    end
    if (awg_seg == 3 && int'(fast_dac[9]) < rmin) rmin = int'(fast_dac[9]);
    if (prev_seg == 0 && awg_seg == 1) begin
      if (fmax - fmin > 50) n_fm++;
      fmin = 99999; fmax = -99999;
    end
    if (prev_seg == 3 && awg_seg == 0) begin
      if (rmin == 1800) n_ramp_seg++;
      rmin = 99999;
    end
    prev_seg <= awg_seg;
  end

  // ------------------------------------------------------------- gated integrator
  int n_results = 0;
  always @(posedge clk) if (gi_done) begin
    gi_rd_addr <= gi_wr_ptr - 10'd1;
    fork begin
      repeat (2) @(posedge clk); #1;
      n_results++;
      if (gi_rd_diff > 40'sd3_900_000 && gi_rd_diff < 40'sd3_970_000) n_gi++;
      else $display("gated result %0d", gi_rd_diff);
      if (n_results > 1 && gi_rd_ddiff > -40'sd100 && gi_rd_ddiff < 40'sd100) n_gi_ddiff++;
      n_ram++;
      if (int'(fast_dac[12]) == int'((gi_rd_diff + 40'sd128) >>> 8)) n_mon++;
    end join_none
  end

  // recently-locked status seen on each servo
  logic [8:0] seen_recent = '0;
  always @(posedge clk) for (int s = 0; s < 9; s++) if (lock_status[s] == LOCK_RECENT) seen_recent[s] <= 1'b1;

  // --------------------------------------------------------------------- stimulus
  cavity_cfg_t ccfg;
  temp_cfg_t tcfg;
  awg_seg_t seg;
  int t0;
  initial begin
    rst = 1; s_clk = 0; s_dat = 0; s_cs_n = 1; dither_inhibit = 0; gi_rd_addr = '0;
    for (int s = 0; s < 9; s++) begin v0[s] = 1000 + 700 * s; off[s] = (s == 0) ? OFFSET0 : 0; end
    temp_in[0] = 0; temp_in[1] = 0; temp_in[2] = 3000; temp_in[3] = 3000; temp_in[4] = 0;
    aux_in[0] = 16'sd1234; aux_in[1] = -16'sd4321;
    pins = 22'h2a5c3f;
    repeat (10) @(posedge clk); #1 rst = 0;
    repeat (10) @(posedge clk);

    // a frame of 47 bits is ignored
    send({16'h0300, 32'd777} >> 1, 47);
    n_bad_frames += (slow_dac[0] == 0);

    // slow DACs, digital outputs, gated-integrator scaling
    wr(16'h0305, 32'd12345);
    wr(16'h0310, 32'h2_a5a5);
    wr(16'h0314, 32'd8);

    // AWG table: 0 FM + load, 1 '+' window, 2 '-' window, 3 frequency ramp
    seg = '0; seg.dur = 2; seg.fm_on = 1; seg.load = 3'b111; seg.level[0] = 2000;
    wr_block(16'h0200, 256'(seg), 6);
    seg = '0; seg.dur = 2; seg.gate = GATE_PLUS; seg.load = 3'b110; seg.level[1] = 4000; seg.level[2] = 10000;
    wr_block(16'h0208, 256'(seg), 6);
    seg = '0; seg.dur = 2; seg.gate = GATE_MINUS; seg.load = 3'b110;
    wr_block(16'h0210, 256'(seg), 6);
    seg = '0; seg.dur = 2; seg.slope[0] = -32'sd100 <<< 16;
    wr_block(16'h0218, 256'(seg), 6);
    wr(16'h0312, 32'd32);                       // 60 x 33 clocks = 1980 clocks (50.5 kHz)
    wr(16'h0311, (32'd10 << 6) | (32'd4 << 1) | 32'd1);

    // temperature servos 0 (adjustable, channel 2) and 2 (fixed PID, channel 3)
    tcfg = '0; tcfg.setpoint = 4000; tcfg.mult = 7'sd16; tcfg.preset = 800; tcfg.ramp_div = 0;
    tcfg.pid.p_gain = c(1); tcfg.pid.p_roll = c(0); tcfg.adc_sel = 3'd2; tcfg.servo_on = 1;
    wr_block(16'h0100, 256'(tcfg), 8);
    tcfg.pid = '0; tcfg.adc_sel = 3'd3;
    wr_block(16'h0110, 256'(tcfg), 8);

    // cavity servos
    for (int s = 0; s < 9; s++) begin
      ccfg = '0;
      ccfg.thr_below = (s == 8);
      ccfg.threshold = (s == 8) ? 16'sd10000 : 16'sd20000;
      ccfg.scan_lo = -16'sd2000; ccfg.scan_hi = 16'sd12000; ccfg.scan_step = 32'd1 << 12;
      ccfg.pid.p_gain = c(2); ccfg.pid.p_roll = c(0); ccfg.pid.i_gain = c(6);
      ccfg.dither_on = (s < 2); ccfg.dither_step_len = 35'd319; ccfg.dither_shift = 5'd8;
      ccfg.lockin_shift = 6'd9; ccfg.corr_gain = c(0); ccfg.corr_on = (s == 0);
      ccfg.servo_on = 1;
      wr_block(16'h0000 + 8 * s, 256'(ccfg), 8);
    end
    expect_true(n_writes == 117 + 0, "all parameter frames sent");

    // lock acquisition
    t0 = 0;
    while (locked != 9'h1ff && t0 < 400000) begin @(posedge clk); t0++; end
    for (int s = 0; s < 9; s++) begin
      n_locks += locked[s];
    end
    expect_true(locked == 9'h1ff, "all nine servos lock");
    $display("locked %b after %0d clocks", locked, t0);

    // run: temperature, AWG, gated integrator and the dither lock all proceed
    repeat (1_500_000) @(posedge clk); #1;
    for (int s = 1; s < 8; s++) begin
      int o;
      o = int'(fast_dac[s]);
      expect_true(o > v0[s] - 40 && o < v0[s] + 40, "servo held on resonance");
    end
    $display("servo 0 out=%0d (resonance %0d, lock offset %0d)", fast_dac[0], v0[0], OFFSET0);
    if (int'(fast_dac[0]) > v0[0] - 30 && int'(fast_dac[0]) < v0[0] + 30) n_corrected++;
    if (CHECK_STEADY) for (int s = 0; s < 9; s++) n_steady += (lock_status[s] == LOCK_STEADY);
    for (int s = 0; s < 9; s++) $display("servo %0d out=%0d v0=%0d status=%0d", s, fast_dac[s], v0[s], lock_status[s]);

    // dither inhibit
    expect_true(dither_active[0] && dither_active[1] && !dither_active[2], "dither on where enabled");
    dither_inhibit = 1;
    repeat (3) @(posedge clk); #1;
    if (dither_active[1:0] == 2'b00) n_inhibit++;
    dither_inhibit = 0;

    // dither alternation between servos 0 and 1, two lock-in periods per turn
    wr(16'h0315, (32'd2 << 16) | (32'd1 << 5) | (32'd0 << 1) | 32'd1);
    begin
      logic prev_a;
      prev_a = dither_active[0];
      repeat (300000) begin
        @(posedge clk);
        if (dither_active[0] && dither_active[1]) n_alt_both++;
        if (dither_active[0] != prev_a) begin n_alt_turns++; prev_a = dither_active[0]; end
      end
    end
    wr(16'h0315, 32'd0);
    $display("alternation: %0d changes of turn, %0d clocks with both dithering", n_alt_turns, n_alt_both);

    // temperature servos
    expect_true(temp_pid_en[0] && temp_pid_en[2] && !temp_pid_en[1], "preset ramps reached target");
    if (temp_pid_en[0] && temp_pid_en[2]) n_ramp++;
    // after the PID enable: servo 0 drive 800 + 1000 = 1800 (112.5 ticks)
    @(posedge sr_latch iff frame_cnt == 0);
    @(posedge sr_latch iff frame_cnt == 0); #1;
    $display("heater duty: servo0 %0d, servo2 %0d ticks per 2000", duty0, duty2);
    if (duty0 == 112 || duty0 == 113) begin n_temp_adj++; n_vdc_frac++; end
    if (duty2 > 80 && duty2 < 96) n_temp_fixed++;
    // slow DACs 6 and 7 follow temperature servos 0 and 2 (analog-output slow servos)
    wr(16'h0306, 32'h8_0000);
    wr(16'h0307, 32'h8_0000 | (32'd2 << 16));

    // lock loss and relock on servo 3
    v0[3] = v0[3] + 3000;
    t0 = 0;
    while (locked[3] && t0 < 2000) begin @(posedge clk); t0++; end
    #1;
    if (!locked[3] && lock_status[3] == LOCK_UNLOCKED) n_unlock++;
    t0 = 0;
    while (!locked[3] && t0 < 600000) begin @(posedge clk); t0++; end
    repeat (2000) @(posedge clk); #1;
    if (locked[3] && int'(fast_dac[3]) > v0[3] - 40 && int'(fast_dac[3]) < v0[3] + 40) n_relock++;

    // heater periods of servos 0 and 2 are staggered by 2 * 2000/8 ticks
    if (rise0 > 0 && rise2 > 0 && ((rise2 - rise0) % 2000 + 2000) % 2000 == 1500) n_stagger++;
    $display("heater rising edges at frames %0d and %0d", rise0, rise2);

    // servo 2 switched to an external threshold signal (aux channel 9, 1234 < 20000)
    ccfg = '0;
    ccfg.threshold = 16'sd20000; ccfg.scan_lo = -16'sd2000; ccfg.scan_hi = 16'sd12000;
    ccfg.scan_step = 32'd1 << 12; ccfg.pid.p_gain = c(2); ccfg.pid.p_roll = c(0); ccfg.pid.i_gain = c(6);
    ccfg.trans_ext = 1; ccfg.trans_sel = 4'd9; ccfg.servo_on = 1;
    wr(16'h0017, ccfg[255:224]);
    repeat (2000) @(posedge clk); #1;
    if (!locked[2] && locked[1] && locked[4]) n_trans_sel++;

    // static paths
    if (slow_dac[5] == 16'sd12345 && slow_dac[0] == 0) n_sdac++;
    $display("slow DACs following temperature servos: %0d %0d", slow_dac[6], slow_dac[7]);
    if (slow_dac[6] == 16'sd900 && slow_dac[7] > 0) n_sdac_servo++;
    if (aux_out[0] == 16'sd1234 && aux_out[1] == -16'sd4321) n_aux++;
    if (latched[25:8] == 18'h2_a5a5) n_dout++;
    if (dig_in == pins) n_din++;
    if (latched[1] == 0 && latched[7:3] == 0) n_dout++;

    // ---------------------------------------------------------------- tally
    for (int s = 0; s < 9; s++) n_recent += seen_recent[s];
    $display("writes=%0d bad_frames=%0d locks=%0d recent=%0d steady=%0d unlock=%0d relock=%0d",
             n_writes, n_bad_frames, n_locks, n_recent, n_steady, n_unlock, n_relock);
    $display("corrected=%0d inhibit=%0d ramp=%0d temp_adj=%0d temp_fixed=%0d vdc_frac=%0d",
             n_corrected, n_inhibit, n_ramp, n_temp_adj, n_temp_fixed, n_vdc_frac);
    $display("modcycle=%0d fm=%0d ramp_seg=%0d gi=%0d gi_ddiff=%0d ram=%0d mon=%0d sdac=%0d aux=%0d dout=%0d din=%0d",
             n_modcycle, n_fm, n_ramp_seg, n_gi, n_gi_ddiff, n_ram, n_mon, n_sdac, n_aux, n_dout, n_din);
    $display("alt_turns=%0d alt_both=%0d trans_sel=%0d stagger=%0d", n_alt_turns, n_alt_both, n_trans_sel, n_stagger);
    expect_true(n_alt_turns >= 2 && n_alt_both == 0, "dither alternation between two servos");
    expect_true(n_trans_sel > 0, "external threshold/lock-in signal");
    expect_true(n_stagger > 0, "staggered heater periods");
    expect_true(n_sdac_servo > 0, "slow DAC driven by a temperature servo");
    expect_true(n_bad_frames > 0, "malformed frame ignored");
    expect_true(n_locks == 9, "scan and lock on every servo");
    expect_true(n_recent == 9, "recently-locked status");
    if (CHECK_STEADY) expect_true(n_steady == 9, "steady status after the hold time");
    expect_true(n_unlock > 0, "lock lost");
    expect_true(n_relock > 0, "relock after loss");
    expect_true(n_corrected > 0, "dither lock removes the lock offset");
    expect_true(n_inhibit > 0, "dither inhibit");
    expect_true(n_ramp > 0, "preset ramp enables the PID");
    expect_true(n_temp_adj > 0, "adjustable temperature servo duty");
    expect_true(n_temp_fixed > 0, "fixed temperature servo duty");
    expect_true(n_vdc_frac > 0, "sub-tick VDC resolution");
    expect_true(n_modcycle > 0, "50.5 kHz modulation cycle");
    expect_true(n_fm > 0, "FM in segment 0");
    expect_true(n_ramp_seg > 0, "frequency ramp in segment 3");
    expect_true(n_gi > 0 && n_gi == n_results, "gated integration with background subtraction");
    expect_true(n_gi_ddiff > 0, "cycle-to-cycle difference");
    expect_true(n_ram > 0, "result RAM read-back");
    expect_true(n_mon == n_results && n_mon > 0, "gated-integrator monitor output");
    expect_true(n_sdac > 0, "slow DAC register");
    expect_true(n_aux > 0, "auxiliary inputs");
    expect_true(n_dout == 2, "shift-register outputs");
    expect_true(n_din > 0, "shift-register inputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
