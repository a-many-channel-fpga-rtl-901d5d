// mcfs_top: many-channel FPGA control system, top level.
//
// One FPGA runs, side by side and on one 100 MHz clock:
//   - N_CAV (9) laser/cavity servos (cavity_servo): error signal from a fast ADC,
//     transmission/reflection from a slow ADC, output to a fast DAC, with auto-lock,
//     shift-add PID and slow dither-lock offset correction;
//   - N_TEMP (8) variable-duty-cycle temperature servos (temperature_servo): sensor on a
//     slow ADC, heater on a shift-register output bit. The first N_TEMP_ADJ (2) have
//     run-time adjustable PID coefficients, the others fixed coefficients and an
//     adjustable overall gain;
//   - an arbitrary waveform sequencer (awg_sequencer) driving three fast DACs, and a
//     gated integrator (gated_integrator) on one fast ADC driving two monitor DACs;
//   - the shift-register bus for 26 slow digital outputs and 22 inputs;
//   - the serial parameter input (param_loader) and the register file it writes.
//
// Converter channels (16-bit two's complement samples at the pins of this module; the
// converter chips' own serial/parallel interfaces are outside it):
//   fast_adc[0..8] cavity error signals, fast_adc[9] gated-integrator input;
//   slow_adc[0..8] cavity transmission/reflection (a servo may instead use any slow
//   channel, e.g. one sum-frequency power shared by two locks), [9..10] auxiliary (brought through
//   to aux_out for monitoring), [11..15] temperature sensors;
//   fast_dac[0..8] cavity servo outputs, [9..11] waveforms (laser frequency, laser
//   intensity, two-level trigger), [12..13] gated-integrator monitors;
//   slow_dac[0..15] from registers (monitors and experiment controls), or each one
//   following a temperature servo's drive word (a slow servo with an analog output).
//   slow_adc_strobe marks a new set of slow samples; it is the temperature servos'
//   update tick (125 kHz when all 16 channels are converted in turn).
//
// Register map (32-bit words written through param_loader; all reset to 0 = off):
//   0x000 + 8*s + w   cavity servo s, word w of cavity_cfg_t (w = 0 least significant)
//   0x100 + 8*t + w   temperature servo t, word w of temp_cfg_t
//   0x200 + 8*g + w   AWG segment g, word w (0..5) of awg_seg_t
//   0x300 + k         slow DAC k: bits 15:0 value; bit 19 set = follow temperature
//                     servo bits 18:16 instead (its drive word / 2, 0 to +full scale)
//   0x310             digital outputs 8..25 of the shift-register bus (bits 17:0);
//                     outputs 0..7 are the temperature servos' heater bits
//   0x311             AWG control: bit 0 run, bits 5:1 segments used, bits 10:6 FM amplitude
//   0x312, 0x313      AWG FM coarse-step length, bits 31:0 and 34:32
//   0x314             gated-integrator monitor scaling (bits 5:0)
//   0x315             dither alternation: bit 0 on, bits 4:1 and 8:5 the two servos,
//                     bits 31:16 lock-in periods per turn
//
// The channel counts, their assignment to converters, the two adjustable plus six
// fixed-coefficient temperature servos and the converter-side registers follow the
// published system. The register map, the serial frame, the sharing of five temperature
// channels among eight servos (selected per servo by register), the analog-output
// option of the slow DACs and the heater bit
// positions on the shift-register bus are this design's choices.
//
// Latency of a fast servo: one register after the fast ADC pins, one clock in the PID
// (D path; P and I one more), one register before the fast DAC pins: 30 ns of logic.
module mcfs_top
  import mcfs_pkg::*;
#(
  parameter int unsigned N_CAV       = 9,
  parameter int unsigned N_TEMP      = 8,
  parameter int unsigned N_TEMP_ADJ  = 2,
  parameter int unsigned NSEG        = 16,
  parameter int unsigned HOLD_CYCLES = 500_000_000,
  parameter int unsigned VDC_PERIOD  = 2000,
  parameter int unsigned SR_FRAME    = 50,
  parameter int unsigned GI_DEPTH    = 1024
) (
  input  logic         clk,
  input  logic         rst,
  // converters
  input  sample_t      fast_adc [10],
  input  sample_t      slow_adc [16],
  input  logic         slow_adc_strobe,
  output sample_t      fast_dac [14],
  output sample_t      slow_dac [16],
  output sample_t      aux_out [2],
  // serial parameter input
  input  logic         s_clk,
  input  logic         s_dat,
  input  logic         s_cs_n,
  // shift-register bus
  output logic         sr_clk,
  output logic         sr_latch,
  output logic         sr_load,
  output logic [1:0]   sr_do,
  input  logic [1:0]   sr_di,
  output logic [21:0]  dig_in,
  // buffered digital input: inhibit all dithers (e.g. during fluorescence detection)
  input  logic         dither_inhibit,
  // status for the display
  output logic [N_CAV-1:0] locked,
  output lock_status_e     lock_status [N_CAV],
  output logic [N_CAV-1:0] dither_active,
  output logic [N_TEMP-1:0] temp_pid_en,
  // sequencer position (e.g. for an oscilloscope trigger)
  output logic [$clog2(NSEG)-1:0] awg_seg,
  output logic                    awg_mod_tick,
  // gated-integrator result memory
  input  logic [$clog2(GI_DEPTH)-1:0] gi_rd_addr,
  output logic signed [39:0]          gi_rd_diff,
  output logic signed [39:0]          gi_rd_ddiff,
  output logic [$clog2(GI_DEPTH)-1:0] gi_wr_ptr,
  output logic                        gi_done
);
  localparam int unsigned N_FIX = N_TEMP - N_TEMP_ADJ;
  localparam int unsigned CI = (N_CAV  > 1) ? $clog2(N_CAV)  : 1;
  localparam int unsigned TI = (N_TEMP > 1) ? $clog2(N_TEMP) : 1;
  localparam int unsigned GI = (NSEG   > 1) ? $clog2(NSEG)   : 1;

  // ------------------------------------------------------------ parameter registers
  logic        wr;
  logic [15:0] waddr;
  logic [31:0] wdata;

  param_loader u_loader (.clk, .rst, .s_clk, .s_dat, .s_cs_n, .wr, .addr(waddr), .data(wdata));

  logic [31:0] cav_regs  [N_CAV][8];
  logic [31:0] temp_regs [N_TEMP][8];
  logic [31:0] seg_regs  [NSEG][6];
  logic [19:0] sdac_regs [16];
  logic [17:0] dout_reg;
  logic [31:0] awg_ctrl, fm_len_lo, fm_len_hi, gi_ctrl, alt_ctrl;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < N_CAV; s++)  for (int w = 0; w < 8; w++) cav_regs[s][w]  <= '0;
      for (int t = 0; t < N_TEMP; t++) for (int w = 0; w < 8; w++) temp_regs[t][w] <= '0;
      for (int g = 0; g < NSEG; g++)   for (int w = 0; w < 6; w++) seg_regs[g][w]  <= '0;
      for (int k = 0; k < 16; k++) sdac_regs[k] <= '0;
      dout_reg <= '0; awg_ctrl <= '0; fm_len_lo <= '0; fm_len_hi <= '0; gi_ctrl <= '0;
      alt_ctrl <= '0;
    end else if (wr && waddr[15:12] == 4'h0) begin
      unique case (waddr[11:8])
        4'h0: if (32'(waddr[7:3]) < N_CAV)  cav_regs[waddr[3 +: CI]][waddr[2:0]]  <= wdata;
        4'h1: if (32'(waddr[7:3]) < N_TEMP) temp_regs[waddr[3 +: TI]][waddr[2:0]] <= wdata;
        4'h2: if (32'(waddr[7:3]) < NSEG && waddr[2:0] < 3'd6) seg_regs[waddr[3 +: GI]][waddr[2:0]] <= wdata;
        4'h3: begin
          if (waddr[7:4] == 4'h0) sdac_regs[waddr[3:0]] <= wdata[19:0];
          else if (waddr[7:0] == 8'h10) dout_reg  <= wdata[17:0];
          else if (waddr[7:0] == 8'h11) awg_ctrl  <= wdata;
          else if (waddr[7:0] == 8'h12) fm_len_lo <= wdata;
          else if (waddr[7:0] == 8'h13) fm_len_hi <= wdata;
          else if (waddr[7:0] == 8'h14) gi_ctrl   <= wdata;
          else if (waddr[7:0] == 8'h15) alt_ctrl  <= wdata;
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- converter side
  sample_t fast_q [10];
  sample_t slow_q [16];
  logic    slow_tick;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 10; i++) fast_q[i] <= '0;
      for (int i = 0; i < 16; i++) slow_q[i] <= '0;
      slow_tick <= 1'b0;
    end else begin
      for (int i = 0; i < 10; i++) fast_q[i] <= fast_adc[i];
      if (slow_adc_strobe) for (int i = 0; i < 16; i++) slow_q[i] <= slow_adc[i];
      slow_tick <= slow_adc_strobe;
    end
  end

  // ------------------------------------------------------------- cavity servos
  sample_t cav_out [N_CAV];
  logic [N_CAV-1:0] cav_valid, alt_inhibit;
  logic             alt_active_b;

  dither_alternator #(.N(N_CAV)) u_alt (
    .clk, .rst, .en(alt_ctrl[0]), .sel_a(alt_ctrl[4:1]), .sel_b(alt_ctrl[8:5]),
    .n_periods(alt_ctrl[31:16]), .valid(cav_valid), .inhibit(alt_inhibit), .active_b(alt_active_b));

  for (genvar s = 0; s < N_CAV; s++) begin : g_cav
    logic [255:0] flat;
    cavity_cfg_t  cfg;
    err_t         correction;
    err_t         demod [6];
    sample_t      trans;
    always_comb for (int w = 0; w < 8; w++) flat[w*32 +: 32] = cav_regs[s][w];
    assign cfg = cavity_cfg_t'(flat);
    assign trans = cfg.trans_ext ? slow_q[cfg.trans_sel] : slow_q[s];
    cavity_servo #(.HOLD_CYCLES(HOLD_CYCLES)) u_servo (
      .clk, .rst, .cfg, .dither_inhibit(dither_inhibit || alt_inhibit[s]), .err_in(fast_q[s]), .trans,
      .out(cav_out[s]), .locked(locked[s]), .status(lock_status[s]),
      .dither_active(dither_active[s]), .correction, .demod, .demod_valid(cav_valid[s]));
    // Lock-in outputs and the correction are internal observation points.
    logic unused;
    assign unused = ^{correction, demod[0], demod[1], demod[2], demod[3], demod[4], demod[5],
                      1'b0};
  end

  // -------------------------------------------------------- temperature servos
  logic    update;   // shift-register frame tick (2 MS/s)
  logic [N_TEMP-1:0] heater;
  logic [15:0] temp_drive [N_TEMP];

  for (genvar t = 0; t < N_TEMP; t++) begin : g_temp
    logic [255:0] flat;
    temp_cfg_t    cfg;
    sample_t      adc;
    logic [15:0]  drive;
    always_comb for (int w = 0; w < 8; w++) flat[w*32 +: 32] = temp_regs[t][w];
    assign cfg = temp_cfg_t'(flat);
    assign adc = (cfg.adc_sel < 3'd5) ? slow_q[11 + int'(cfg.adc_sel)] : slow_q[11];
    // heater periods staggered by VDC_PERIOD/N_TEMP ticks from servo to servo
    temperature_servo #(.FIXED_PID(t >= N_TEMP_ADJ), .PERIOD(VDC_PERIOD),
                        .VDC_START(t * VDC_PERIOD / N_TEMP)) u_servo (
      .clk, .rst, .cfg, .sample(slow_tick), .adc, .tick(update), .vdc(heater[t]),
      .pid_en(temp_pid_en[t]), .drive);
    assign temp_drive[t] = drive;
  end

  // ------------------------------------------------- waveforms and gated integrator
  awg_seg_t segs [NSEG];
  sample_t  wave [AWG_CH];
  gate_e    gate;
  sample_t  gi_mon [2];
  logic     awg_running;

  for (genvar g = 0; g < NSEG; g++) begin : g_seg
    logic [191:0] flat;
    always_comb for (int w = 0; w < 6; w++) flat[w*32 +: 32] = seg_regs[g][w];
    assign segs[g] = awg_seg_t'(flat[$bits(awg_seg_t)-1:0]);
    logic unused;
    assign unused = ^flat[191:$bits(awg_seg_t)];
  end

  awg_sequencer #(.NSEG(NSEG)) u_awg (
    .clk, .rst, .run(awg_ctrl[0]), .seg(segs), .nseg(awg_ctrl[$clog2(NSEG)+1:1]),
    .fm_step_len({fm_len_hi[2:0], fm_len_lo}), .fm_shift(awg_ctrl[10:6]),
    .wave, .gate, .mod_tick(awg_mod_tick), .seg_idx(awg_seg), .running(awg_running));

  gated_integrator #(.DEPTH(GI_DEPTH), .ACC_W(40)) u_gi (
    .clk, .rst, .x(fast_q[9]), .gate, .mon_shift(gi_ctrl[5:0]), .rd_addr(gi_rd_addr),
    .rd_diff(gi_rd_diff), .rd_ddiff(gi_rd_ddiff), .wr_ptr(gi_wr_ptr), .mon(gi_mon), .done(gi_done));

  // ------------------------------------------------------------ shift registers
  shift_register_io #(.NOUT(26), .NIN(22), .FRAME(SR_FRAME)) u_sr (
    .clk, .rst, .dout({dout_reg, heater}), .din(dig_in), .sr_clk, .sr_latch, .sr_load,
    .sr_do, .sr_di, .update);

  // --------------------------------------------------------- DAC-side registers
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 14; i++) fast_dac[i] <= '0;
      for (int i = 0; i < 16; i++) slow_dac[i] <= '0;
    end else begin
      for (int s = 0; s < N_CAV; s++) fast_dac[s] <= cav_out[s];
      for (int c = 0; c < AWG_CH; c++) fast_dac[N_CAV + c] <= wave[c];
      fast_dac[N_CAV + AWG_CH]     <= gi_mon[0];
      fast_dac[N_CAV + AWG_CH + 1] <= gi_mon[1];
      for (int i = 0; i < 16; i++)
        if (sdac_regs[i][19] && 32'(sdac_regs[i][18:16]) < N_TEMP)
          slow_dac[i] <= sample_t'({1'b0, temp_drive[sdac_regs[i][16 +: TI]][15:1]});
        else
          slow_dac[i] <= sample_t'(sdac_regs[i][15:0]);
    end
  end
  assign aux_out[0] = slow_q[9];
  assign aux_out[1] = slow_q[10];

  initial begin
    assert ($bits(cavity_cfg_t) == 256) else $error("cavity_cfg_t must be 8 words");
    assert ($bits(temp_cfg_t) == 256) else $error("temp_cfg_t must be 8 words");
    assert (N_CAV + AWG_CH + 2 <= 14) else $error("more fast DAC channels than converters");
    assert (N_FIX <= N_TEMP) else $error("N_TEMP_ADJ > N_TEMP");
  end

  logic unused;
  assign unused = ^{awg_ctrl[31:11], fm_len_hi[31:3], gi_ctrl[31:6], awg_running, alt_ctrl[15:9], alt_active_b};

endmodule
