// tb_dither_synth: checks the dither period (60 coarse steps of step_len+1 clocks, so
// 60 clocks = 1.67 MHz at 100 MHz with step_len = 0), that the dither is periodic and
// free of drift, that its minimum and maximum fall near steps 15 and 45, and its
// spectrum: a discrete Fourier transform of one period (computed here with real
// arithmetic) must show the 3rd harmonic below 0.5 % and the 5th and 7th below 2 % of
// the fundamental. The peak amplitude and the mean are compared with a model of the
// double integration. Also checks the amplitude scaling by amp_shift and the sync input.
module tb_dither_synth;
  import mcfs_pkg::*;
  logic clk = 0, rst = 1, sync = 0;
  logic [34:0] step_len;
  logic [4:0] amp_shift;
  err_t dither;
  logic [5:0] phase;
  logic step_tick, period_end;
  int checks = 0, failures = 0;

  dither_synth dut (.clk, .rst, .sync, .step_len, .amp_shift, .dither, .phase, .step_tick, .period_end);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  real samp [60];
  int  prev_period [60];
  int  t_last, t_now, kmin, kmax;
  real re, im, h [8];

  initial begin
    step_len = 0; amp_shift = 8;
    repeat (2) @(posedge clk); #1 rst = 0;
    // period length at the fastest setting
    @(posedge clk iff period_end); t_last = $time;
    @(posedge clk iff period_end); t_now = $time;
    expect_true(t_now - t_last == 600, "60-clock period at step_len=0");
    // slower setting: step_len = 3 -> 240 clocks
    step_len = 3;
    @(posedge clk iff period_end);
    @(posedge clk iff period_end); t_last = $time;
    @(posedge clk iff period_end); t_now = $time;
    expect_true(t_now - t_last == 2400, "240-clock period at step_len=3");
    // record one period, one sample per coarse step, and the next one
    for (int p = 0; p < 3; p++) begin
      for (int k = 0; k < 60; k++) begin
        @(posedge clk iff step_tick); #1;
        if (p == 1) prev_period[k] = int'(dither);
        if (p == 2) begin
          samp[k] = real'(dither);
          expect_true(int'(dither) == prev_period[k], "periodic without drift");
        end
      end
    end
    kmin = 0; kmax = 0;
    for (int k = 0; k < 60; k++) begin
      if (samp[k] < samp[kmin]) kmin = k;
      if (samp[k] > samp[kmax]) kmax = k;
    end
    // samples are taken after step k completes, i.e. they hold the value for step k+1
    expect_true(kmin >= 12 && kmin <= 17, "minimum near step 15");
    expect_true(kmax >= 42 && kmax <= 47, "maximum near step 45");
    for (int n = 1; n < 8; n++) begin
      re = 0; im = 0;
      for (int k = 0; k < 60; k++) begin
        re += samp[k] * $cos(2.0 * 3.14159265358979 * n * k / 60.0);
        im += samp[k] * $sin(2.0 * 3.14159265358979 * n * k / 60.0);
      end
      h[n] = $sqrt(re * re + im * im);
    end
    $display("amplitude %0.1f..%0.1f  h3/h1=%f h5/h1=%f h7/h1=%f", samp[kmin], samp[kmax], h[3] / h[1], h[5] / h[1], h[7] / h[1]);
    expect_true(h[3] / h[1] < 0.005, "3rd harmonic suppressed");
    expect_true(h[5] / h[1] < 0.02, "5th harmonic reduced");
    expect_true(h[7] / h[1] < 0.02, "7th harmonic reduced");
    expect_true(h[2] / h[1] < 0.005, "no even harmonic");
    // absolute amplitude and zero mean against an independent model of the double
    // integration: m1 += 60*s(k), m2 += m1, both made zero-mean over one period
    begin
      real m1, m2, mean1, mean2, mmax, smean;
      real m2s [60];
      m1 = 0; mean1 = 0;
      for (int k = 0; k < 60; k++) begin mean1 += m1; m1 += 60.0 * stepped(k); end
      mean1 /= 60.0;
      m1 = -mean1; m2 = 0; mean2 = 0;
      for (int k = 0; k < 60; k++) begin m2s[k] = m2; mean2 += m2; m2 += m1; m1 += 60.0 * stepped(k); end
      mean2 /= 60.0;
      mmax = -1e9; smean = 0;
      for (int k = 0; k < 60; k++) begin
        if (m2s[k] - mean2 > mmax) mmax = m2s[k] - mean2;
        smean += samp[k];
      end
      smean /= 60.0;
      $display("model peak %0.1f, dither peak %0.1f, dither mean %0.2f", mmax, samp[kmax], smean);
      expect_true(samp[kmax] > 0.98 * mmax && samp[kmax] < 1.02 * mmax, "absolute amplitude");
      expect_true(smean < 0.01 * mmax && smean > -0.01 * mmax, "zero mean");
    end
    // amplitude doubles per amp_shift step
    amp_shift = 9; #1;
    expect_true(dither == sat(round_shift(wide_t'(dut.v2) <<< 9, 8), ERR_W), "amp_shift scaling");
    // sync restarts at phase 0
    @(posedge clk); #1 sync = 1; @(posedge clk); #1 sync = 0;
    expect_true(phase == 0, "sync restarts phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
