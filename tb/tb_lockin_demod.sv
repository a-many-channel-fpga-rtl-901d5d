// tb_lockin_demod: drives the lock-in with a phase counter and test signals.
//
// 1. Random signal: the six period sums are recomputed here from an independently
//    written table of the three-level waveforms and compared after scaling.
// 2. Physical checks with a signal that follows a sine in phase with the dither: the
//    1st-harmonic in-phase output is large and positive, the quadrature and the 2nd
//    harmonic outputs are near zero; a constant signal gives zero on all outputs.
// 3. A period during which hold was raised produces no valid pulse.
module tb_lockin_demod;
  import mcfs_pkg::*;
  logic clk = 0, rst = 1, hold = 0, period_end, valid;
  sample_t sig;
  logic [5:0] phase = 0, out_shift;
  err_t demod [6];
  int checks = 0, failures = 0;
  int sub = 0;

  lockin_demod dut (.clk, .rst, .hold, .sig, .phase, .period_end, .out_shift, .demod, .valid);

  // Phase counter: 4 clocks per coarse step.
  assign period_end = (sub == 3) && (phase == 59);
  always @(posedge clk) begin
    if (sub == 3) begin sub <= 0; phase <= (phase == 59) ? 6'd0 : phase + 1'b1; end
    else sub <= sub + 1;
  end

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference three-level waveform: -1 on [5,25), +1 on [35,55) of 60 steps.
  function automatic int ref_level(int h, int q, int k);
    int m = (h * k + 15 * q) % 60;
    if (m >= 5 && m < 25) return -1;
    if (m >= 35 && m < 55) return 1;
    return 0;
  endfunction

  longint exp_acc [6];
  int mode;   // 0 random, 1 sine, 2 constant
  always @(posedge clk) if (!rst && !hold) begin
    if (period_end) for (int i = 0; i < 6; i++) exp_acc[i] <= 0;
    else for (int i = 0; i < 6; i++) exp_acc[i] <= exp_acc[i] + longint'(ref_level(i / 2 + 1, i % 2, int'(phase))) * longint'(sig);
  end
  longint snap [6];
  always @(posedge clk) if (period_end) for (int i = 0; i < 6; i++)
    snap[i] <= exp_acc[i] + longint'(ref_level(i / 2 + 1, i % 2, int'(phase))) * longint'(sig);

  sample_t rnd;
  always_comb begin
    case (mode)
      0: sig = rnd;
      1: sig = sample_t'($rtoi(8000.0 * $sin(2.0 * 3.14159265358979 * (real'(phase) - 30.0) / 60.0)));
      default: sig = 16'sd1234;
    endcase
  end
  always @(posedge clk) rnd <= sample_t'($urandom);

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic longint rnd_shift(longint v, int s);
    return (v + (longint'(1) <<< (s - 1))) >>> s;
  endfunction

  initial begin
    mode = 0; out_shift = 6; rnd = 0;
    for (int i = 0; i < 6; i++) exp_acc[i] = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    // the first (partial) period is discarded
    @(posedge clk iff period_end);
    for (int p = 0; p < 5; p++) begin
      @(posedge clk iff valid); #1;
      for (int i = 0; i < 6; i++)
        expect_true(longint'(demod[i]) == rnd_shift(snap[i], 6), $sformatf("random sum ch %0d", i));
    end
    // sine in phase with the dither (minimum at step 15, maximum at 45)
    mode = 1; out_shift = 0;
    @(posedge clk iff valid); @(posedge clk iff valid); #1;
    $display("sine: I1=%0d Q1=%0d I2=%0d Q2=%0d I3=%0d Q3=%0d", demod[0], demod[1], demod[2], demod[3], demod[4], demod[5]);
    expect_true(demod[0] > 400000, "I1 large for in-phase sine");
    expect_true(demod[1] < demod[0] / 10 && demod[1] > -demod[0] / 10, "Q1 small");
    expect_true(demod[2] < 20000 && demod[2] > -20000, "I2 near zero");
    expect_true(demod[3] < 20000 && demod[3] > -20000, "Q2 near zero");
    mode = 2;
    @(posedge clk iff valid); @(posedge clk iff valid); #1;
    for (int i = 0; i < 6; i++) expect_true(demod[i] == 0, "constant input rejected");
    // hold during a period: no result for it
    @(posedge clk iff period_end); #1;
    repeat (30) @(posedge clk);
    hold = 1; @(posedge clk); #1 hold = 0;
    @(posedge clk iff period_end); #1;
    expect_true(!valid, "held period discarded");
    @(posedge clk iff period_end); #1;
    expect_true(valid, "next full period valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
