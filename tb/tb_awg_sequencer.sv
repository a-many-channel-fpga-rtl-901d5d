// tb_awg_sequencer: runs a four-segment table shaped like one MOT cycle:
//   seg 0: load frequency 0, intensity 2500, trigger 3000; FM on; 5 cycles
//   seg 1: frequency ramps down by 100 LSB per modulation cycle; 3 cycles
//   seg 2: '+' gate, trigger loaded to 0; 4 cycles
//   seg 3: '-' gate; 4 cycles
// Checks: the 50.5 kHz modulation cycle (1980 clocks at fm_step_len = 32); segment
// durations in clocks; loaded levels and ramp slope; the FM is present in seg 0 with
// a peak-to-peak of at least 4/5 of the expected amplitude and starts and ends without
// a step; the gate windows; the table repeats; run low stops the sequencer.
module tb_awg_sequencer;
  import mcfs_pkg::*;
  localparam int CYC = 120;   // clocks per modulation cycle at fm_step_len = 1
  logic clk = 0, rst = 1, run = 0, mod_tick, running;
  awg_seg_t seg [16];
  logic [4:0] nseg;
  logic [34:0] fm_step_len;
  logic [4:0] fm_shift;
  sample_t wave [3];
  gate_e gate;
  logic [3:0] seg_idx;
  int checks = 0, failures = 0;

  awg_sequencer dut (.clk, .rst, .run, .seg, .nseg, .fm_step_len, .fm_shift, .wave, .gate,
    .mod_tick, .seg_idx, .running);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int t0, t1, fmin, fmax, prevw, maxjump, start_seg1, start_seg2;
  initial begin
    for (int i = 0; i < 16; i++) seg[i] = '0;
    seg[0].dur = 5; seg[0].fm_on = 1; seg[0].load = 3'b111;
    seg[0].level[0] = 0; seg[0].level[1] = 2500; seg[0].level[2] = 3000;
    seg[1].dur = 3; seg[1].slope[0] = -32'sd100 <<< 16;
    seg[2].dur = 4; seg[2].gate = GATE_PLUS; seg[2].load = 3'b100; seg[2].level[2] = 0;
    seg[3].dur = 4; seg[3].gate = GATE_MINUS;
    nseg = 4; fm_shift = 5'd10;
    fm_step_len = 35'd32;
    repeat (3) @(posedge clk); #1 rst = 0;
    @(posedge clk iff mod_tick); t0 = $time;
    @(posedge clk iff mod_tick); t1 = $time;
    expect_true((t1 - t0) / 10 == 1980, "modulation cycle of 1980 clocks (50.5 kHz)");
    fm_step_len = 35'd1;
    repeat (2) @(posedge clk iff mod_tick);
    #1 run = 1;
    @(posedge clk iff mod_tick); #1;
    t0 = $time;
    @(posedge clk); #1;
    expect_true(running && seg_idx == 0, "started at segment 0");
    expect_true(wave[1] == 2500 && wave[2] == 3000, "levels loaded");
    fmin = 99999; fmax = -99999; maxjump = 0; prevw = wave[0];
    expect_true(wave[0] >= -3 && wave[0] <= 3, "FM starts without a step");
    while (seg_idx == 0) begin
      @(posedge clk); #1;
      if (seg_idx == 0) begin
        if (wave[0] < fmin) fmin = wave[0];
        if (wave[0] > fmax) fmax = wave[0];
        if ((wave[0] - prevw) > maxjump) maxjump = wave[0] - prevw;
        if ((prevw - wave[0]) > maxjump) maxjump = prevw - wave[0];
        prevw = wave[0];
      end
    end
    start_seg1 = $time;
    $display("FM peak-to-peak %0d, largest clock-to-clock change %0d, seg0 %0d clocks, wave0 %0d", fmax - fmin, maxjump, (start_seg1 - t0) / 10, wave[0]);
    expect_true((start_seg1 - t0) / 10 == 5 * CYC, "segment 0 lasts 5 modulation cycles");
    expect_true(fmax - fmin > 4 * 6000 * 4 / 512 / 5 * 2, "FM amplitude");
    expect_true(maxjump < (fmax - fmin) / 8, "FM is smooth");
    @(posedge clk); #1;
    $display("first sample of segment 1: %0d", wave[0]);
    expect_true(wave[0] >= -100 - (fmax - fmin) / 8 && wave[0] <= -100 + (fmax - fmin) / 8, "FM ends without a step, ramp begins");
    repeat (CYC) @(posedge clk); #1;
    expect_true(wave[0] == -200, "ramp slope -100 per modulation cycle");
    @(posedge clk iff seg_idx == 2); #1; start_seg2 = $time;
    // (the iff wait above returns one clock after the change)
    expect_true((start_seg2 - start_seg1) / 10 == 3 * CYC + 1, "segment 1 lasts 3 modulation cycles");
    @(posedge clk); #1;
    expect_true(gate == GATE_PLUS && wave[2] == 0, "'+' window and trigger level");
    @(posedge clk iff seg_idx == 3); @(posedge clk); #1;
    expect_true(gate == GATE_MINUS, "'-' window");
    @(posedge clk iff seg_idx == 0); #1; t1 = $time;
    expect_true((t1 - start_seg2) / 10 == 8 * CYC, "segments 2 and 3 last 8 cycles");
    @(posedge clk); #1;
    expect_true(wave[2] == 3000 && gate == GATE_IDLE, "table repeats");
    run = 0; @(posedge clk); #1;
    expect_true(!running, "run low stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
