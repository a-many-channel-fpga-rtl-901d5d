// tb_mot_cycle: the magneto-optical-trap detection cycle at its real durations.
//
// The waveform sequencer (default 16 segments) drives the gated integrator (default
// 1024 results) through a table of eight segments, two MOT cycles with opposite
// trigger levels (field gradient trapping, then anti-trapping):
//   loading   20200 modulation cycles (399.96 ms) with 50.5 kHz FM on the laser frequency
//   '+'       842 cycles (16.6716 ms): no FM, fluorescence integrated
//   clearing  842 cycles: laser frequency stepped to lower voltage, atoms expelled
//   '-'       842 cycles: background integrated
// A simple plant model gives fluorescence while atoms are in the trap: a background
// level plus small random noise, plus a signal that is larger for the trapping
// gradient. Atoms load during the loading segment and are lost when the clearing
// segment starts.
//
// Checked: the 1980-clock modulation cycle, the lengths of the loading and gate
// windows in clocks, FM present during loading and no frequency step when it ends,
// the trigger alternating between cycles, every stored difference and
// cycle-to-cycle difference against sums formed here from the same input samples,
// the RAM read-back, and the scaled monitor outputs. Four MOT cycles are run (about
// 180 M clocks).
module tb_mot_cycle;
  import mcfs_pkg::*;

  localparam int NSEG = 16;
  localparam int LOAD_CYC = 20200, WIN_CYC = 842, CYC_CLK = 1980;
  localparam int F_LOAD = 2000, F_DET = 2500, F_CLEAR = -3000;
  localparam int I_ON = 20000, TRIG = 12000, BG = 900, SIG_TRAP = 3000, SIG_ANTI = 400;
  localparam int MON_SHIFT = 20, N_MOT = 4;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  awg_seg_t segs [NSEG];
  sample_t  wave [AWG_CH];
  gate_e    gate;
  logic     mod_tick, running, done;
  logic [3:0] seg_idx;
  sample_t  x, mon [2];
  logic [9:0] rd_addr, wr_ptr;
  logic signed [39:0] rd_diff, rd_ddiff;

  awg_sequencer u_awg (
    .clk, .rst, .run(1'b1), .seg(segs), .nseg(5'd8), .fm_step_len(35'd32), .fm_shift(5'd10),
    .wave, .gate, .mod_tick, .seg_idx, .running);

  gated_integrator u_gi (
    .clk, .rst, .x, .gate, .mon_shift(6'(MON_SHIFT)), .rd_addr, .rd_diff, .rd_ddiff,
    .wr_ptr, .mon, .done);

  int checks = 0, failures = 0;
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------------ segment table
  initial begin
    for (int g = 0; g < NSEG; g++) segs[g] = '0;
    for (int c = 0; c < 2; c++) begin
      segs[4*c].dur = 24'(LOAD_CYC); segs[4*c].fm_on = 1'b1; segs[4*c].load = 3'b111;
      segs[4*c].level[0] = 16'(F_LOAD); segs[4*c].level[1] = 16'(I_ON);
      segs[4*c].level[2] = (c == 0) ? 16'(TRIG) : -16'(TRIG);
      segs[4*c+1].dur = 24'(WIN_CYC); segs[4*c+1].gate = GATE_PLUS;
      segs[4*c+1].load = 3'b001; segs[4*c+1].level[0] = 16'(F_DET);
      segs[4*c+2].dur = 24'(WIN_CYC); segs[4*c+2].load = 3'b001; segs[4*c+2].level[0] = 16'(F_CLEAR);
      segs[4*c+3].dur = 24'(WIN_CYC); segs[4*c+3].gate = GATE_MINUS;
      segs[4*c+3].load = 3'b001; segs[4*c+3].level[0] = 16'(F_DET);
    end
  end

  // ---------------------------------------------------------------- plant model
  logic atoms = 1'b0;
  logic trapping = 1'b1, trap_win = 1'b1;   // trap_win: gradient during the '+' window
  always @(posedge clk) begin
    if (seg_idx == 4'd0 || seg_idx == 4'd4) begin
      atoms    <= 1'b1;
      trapping <= (wave[2] > 0);
    end
    if (seg_idx == 4'd2 || seg_idx == 4'd6) atoms <= 1'b0;
    if (gate == GATE_PLUS) trap_win <= trapping;
    x <= 16'(BG + int'($urandom_range(0, 16)) - 8 + (atoms ? (trapping ? SIG_TRAP : SIG_ANTI) : 0));
  end

  // ------------------------------------------------------------- reference sums
  // The integrator sees x on the same clock as the gate, like here.
  longint sum_p = 0, sum_m = 0, last_ref = 0;
  gate_e  prev_gate = GATE_IDLE;
  always @(posedge clk) if (!rst) begin
    if (gate == GATE_PLUS)  sum_p = (prev_gate == GATE_PLUS)  ? sum_p + longint'(x) : longint'(x);
    if (gate == GATE_MINUS) sum_m = (prev_gate == GATE_MINUS) ? sum_m + longint'(x) : longint'(x);
    prev_gate = gate;
  end

  // ------------------------------------------------------------------- monitors
  int n_cyc = 0, last_tick = -1, t_now = 0;
  int len_p = 0, len_m = 0, len_load = 0, n_win_ok = 0, n_load_ok = 0;
  int fmin = 99999, fmax = -99999, last_f = 0, n_fm = 0, n_no_step = 0;
  int n_trig_alt = 0, last_trig = 0, n_loads = 0;
  logic [3:0] prev_seg = '0;
  gate_e      pg = GATE_IDLE;
  always @(posedge clk) if (!rst) begin
    t_now++;
    if (mod_tick) begin
      if (last_tick >= 0) begin checks++; if (t_now - last_tick != CYC_CLK) failures++; end
      last_tick = t_now;
      n_cyc++;
    end
    if (gate == GATE_PLUS) len_p++;
    if (gate == GATE_MINUS) len_m++;
    if (pg == GATE_PLUS && gate != GATE_PLUS) begin
      if (len_p == WIN_CYC * CYC_CLK) n_win_ok++;
      else $display("'+' window %0d clocks", len_p);
      len_p = 0;
    end
    if (pg == GATE_MINUS && gate != GATE_MINUS) begin
      if (len_m == WIN_CYC * CYC_CLK) n_win_ok++;
      else $display("'-' window %0d clocks", len_m);
      len_m = 0;
    end
    if (seg_idx == 4'd0 || seg_idx == 4'd4) begin
      len_load++;
      if (int'(wave[0]) < fmin) fmin = int'(wave[0]);
      if (int'(wave[0]) > fmax) fmax = int'(wave[0]);
      last_f = int'(wave[0]);
    end
    if ((prev_seg == 4'd0 || prev_seg == 4'd4) && seg_idx == prev_seg + 4'd1) begin
      // the first loading after reset starts partway into a modulation cycle
      n_loads++;
      if (n_loads > 1 && len_load == LOAD_CYC * CYC_CLK) n_load_ok++;
      else $display("loading %0d clocks", len_load);
      if (fmax - fmin > 100) n_fm++;
      // the FM ends where it began: the last loading sample is within 2 % of the FM
      // swing of the unmodulated level
      if ((last_f - F_LOAD) * 50 <= fmax - fmin && (F_LOAD - last_f) * 50 <= fmax - fmin) n_no_step++;
      $display("loading: FM %0d..%0d, last sample %0d", fmin, fmax, last_f);
      len_load = 0; fmin = 99999; fmax = -99999;
      if (last_trig != 0 && int'(wave[2]) == -last_trig) n_trig_alt++;
      last_trig = int'(wave[2]);
    end
    prev_seg <= seg_idx;
    pg = gate;
  end

  // ---------------------------------------------------------------- results
  int n_res = 0, n_diff = 0, n_ddiff = 0, n_ram = 0, n_mon = 0, n_sign = 0;
  longint ref_diff, ref_ddiff, sat_mon;
  always @(posedge clk) if (!rst && done) begin
    ref_diff  = sum_p - sum_m;
    ref_ddiff = ref_diff - last_ref;
    last_ref  = ref_diff;
    n_res++;
    // sat(round(diff / 2^MON_SHIFT))
    sat_mon = (ref_diff + (64'sd1 <<< (MON_SHIFT - 1))) >>> MON_SHIFT;
    if (sat_mon > 32767) sat_mon = 32767;
    if (sat_mon < -32768) sat_mon = -32768;
    if (int'(mon[0]) == int'(sat_mon)) n_mon++;
    else $display("monitor %0d, expected %0d", mon[0], sat_mon);
    // the background-free signal is the plant's signal times the window length
    if (ref_diff > (trap_win ? longint'(SIG_TRAP) : longint'(SIG_ANTI)) * WIN_CYC * CYC_CLK - 64'sd2_000_000 &&
        ref_diff < (trap_win ? longint'(SIG_TRAP) : longint'(SIG_ANTI)) * WIN_CYC * CYC_CLK + 64'sd2_000_000) n_sign++;
    rd_addr <= wr_ptr - 10'd1;
    fork begin
      longint d, dd;
      d = ref_diff; dd = ref_ddiff;
      repeat (2) @(posedge clk); #1;
      if (rd_diff == 40'(d)) n_diff++;
      else $display("diff %0d, expected %0d", rd_diff, d);
      if (rd_ddiff == 40'(dd)) n_ddiff++;
      n_ram++;
      $display("result %0d: diff %0d ddiff %0d", n_res, rd_diff, rd_ddiff);
    end join_none
  end

  // ------------------------------------------------------------------- run
  initial begin
    rd_addr = '0; x = '0;
    repeat (5) @(posedge clk); #1 rst = 0;
    wait (n_res == N_MOT);
    repeat (5) @(posedge clk); #1;
    expect_true(n_cyc > N_MOT * (LOAD_CYC + 3 * WIN_CYC) - 10, "modulation cycles counted");
    expect_true(n_win_ok == 2 * N_MOT, "16.6716 ms gate windows");
    expect_true(n_load_ok == N_MOT - 1, "399.96 ms loading");
    expect_true(n_fm == N_MOT, "FM during loading");
    expect_true(n_no_step == N_MOT, "FM ends without a frequency step");
    expect_true(n_trig_alt == N_MOT - 1, "trigger level alternates");
    expect_true(n_diff == N_MOT, "background-subtracted results");
    expect_true(n_ddiff == N_MOT, "cycle-to-cycle differences");
    expect_true(n_ram == N_MOT, "RAM read-back");
    expect_true(n_mon == N_MOT, "monitor output");
    expect_true(n_sign == N_MOT, "signal equals fluorescence times window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog: four cycles need about 190 M clocks
  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
