// awg_sequencer: synchronized arbitrary waveforms from a counter-driven state machine.
//
// Instead of replaying samples from memory, the sequencer steps through a table of
// segments. Its time base is the modulation cycle of a built-in FM synthesizer (a
// dither_synth: 60 coarse steps of fm_step_len+1 clocks, e.g. 33 clocks -> 50.5 kHz at
// 100 MHz). Every segment lasts 'dur' modulation cycles; at its start each of the three
// channels (0 laser frequency, 1 laser intensity, 2 trigger) is optionally loaded with
// 'level', and at every following modulation cycle 'slope' (16.16 fixed point) is added,
// which gives steps and linear ramps. In segments with fm_on the FM waveform is added
// to channel 0. The FM term is taken relative to its value at phase 0, and segments
// begin and end only on modulation-cycle boundaries, so the frequency modulation
// always starts and ends without a frequency step. Each segment also carries the gate
// (idle, '+', '-') of the gated integrator. The table of nseg segments repeats while
// run is high; with run low the sequencer waits at segment 0 and outputs are held.
// The table layout and its linear ramps are this design's choices.
//
// Timing: the segment index and channel values change on the clock after a
// modulation-cycle boundary (mod_tick); wave is registered.
module awg_sequencer
  import mcfs_pkg::*;
#(
  parameter int unsigned NSEG = 16
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    run,
  input  awg_seg_t                seg [NSEG],
  input  logic [$clog2(NSEG):0]   nseg,        // segments in use, 1..NSEG
  input  logic [34:0]             fm_step_len,
  input  logic [4:0]              fm_shift,
  output sample_t                 wave [AWG_CH],
  output gate_e                   gate,
  output logic                    mod_tick,
  output logic [$clog2(NSEG)-1:0] seg_idx,
  output logic                    running
);
  localparam int IW = $clog2(NSEG);

  err_t        fm;
  logic [5:0]  fm_phase;
  logic        fm_step;
  logic [23:0] cnt;
  logic signed [31:0] val [AWG_CH];
  wide_t fm0_w, fm_rel, ch0;
  awg_seg_t cur, nxt_seg;
  logic [IW-1:0] nxt_idx;

  dither_synth u_fm (
    .clk, .rst, .sync(1'b0), .step_len(fm_step_len), .amp_shift(fm_shift),
    .dither(fm), .phase(fm_phase), .step_tick(fm_step), .period_end(mod_tick));

  assign cur = seg[seg_idx];
  always_comb begin
    nxt_idx = (32'(seg_idx) + 1 >= 32'(nseg)) ? '0 : seg_idx + 1'b1;
    nxt_seg = seg[nxt_idx];
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      running <= 1'b0;
      seg_idx <= '0;
      cnt     <= '0;
      if (rst) for (int c = 0; c < AWG_CH; c++) val[c] <= '0;
    end else if (mod_tick) begin
      if (!running) begin
        running <= 1'b1;
        seg_idx <= '0;
        cnt     <= '0;
        for (int c = 0; c < AWG_CH; c++)
          if (seg[0].load[c]) val[c] <= {seg[0].level[c], 16'h0000};
      end else if (cnt + 1'b1 >= cur.dur) begin
        seg_idx <= nxt_idx;
        cnt     <= '0;
        for (int c = 0; c < AWG_CH; c++)
          if (nxt_seg.load[c]) val[c] <= {nxt_seg.level[c], 16'h0000};
          else                 val[c] <= val[c] + nxt_seg.slope[c];
      end else begin
        cnt <= cnt + 1'b1;
        for (int c = 0; c < AWG_CH; c++) val[c] <= val[c] + cur.slope[c];
      end
    end
  end

  // FM relative to its phase-0 value, rounded to converter LSBs.
  always_comb begin
    fm0_w  = sat(round_shift(wide_t'(v2_init()) <<< fm_shift, 8), ERR_W);
    fm_rel = round_shift(wide_t'(fm) - fm0_w, FRAC_IN);
    ch0    = sat(wide_t'(signed'(val[0][31:16])) + ((running && cur.fm_on) ? fm_rel : wide_t'(0)), ADC_W);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < AWG_CH; c++) wave[c] <= '0;
      gate <= GATE_IDLE;
    end else begin
      wave[0] <= ch0[ADC_W-1:0];
      for (int c = 1; c < AWG_CH; c++) wave[c] <= val[c][31:16];
      gate <= running ? cur.gate : GATE_IDLE;
    end
  end

  logic unused;
  assign unused = ^{fm_phase, fm_step, cur.pad, cur.load, cur.level, nxt_seg.pad, nxt_seg.gate, nxt_seg.fm_on, nxt_seg.dur,
                    val[1][15:0], val[2][15:0], val[0][15:0], fm0_w[63:ERR_W], ch0[63:ADC_W]};

endmodule
