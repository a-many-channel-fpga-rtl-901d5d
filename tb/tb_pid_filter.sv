// tb_pid_filter: self-checking test of the PID sum and its pipeline.
//
// Latency: an impulse through the D path alone must reach the output one clock after
// it is applied, through P alone two clocks after (the P+I adder is pipelined).
// Random test: separately instantiated P, I and D filters (each verified by its own
// testbench) feed a model of the sum, y(t) = D(t) + P(t-1) + I(t-1), which is compared
// with the PID every clock. Also checked: en = 0 clears the output, and ce = 0 holds it.
module tb_pid_filter;
  import mcfs_pkg::*;
  logic clk = 0, rst = 1, ce = 1, en = 1;
  err_t x;
  pid_cfg_t cfg;
  logic signed [ERR_W:0] y;
  err_t rp, ri, rd;
  int checks = 0, failures = 0;

  pid_filter dut (.clk, .rst, .ce, .en, .x, .cfg, .y);
  iir_first_order  #(.W_EXTRA(32)) ref_p (.clk, .rst, .ce, .en, .x, .gain(cfg.p_gain), .roll(cfg.p_roll), .y(rp));
  iir_first_order  #(.W_EXTRA(32)) ref_i (.clk, .rst, .ce, .en, .x, .gain(cfg.i_gain), .roll(cfg.i_roll), .y(ri));
  iir_second_order #(.W_EXTRA(16)) ref_d (.clk, .rst, .ce, .en, .x, .gain(cfg.d_gain), .w2(cfg.d_w2), .gamma(cfg.d_gamma), .y(rd));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  // Clocks from applying x until |y| first exceeds 100.
  task automatic impulse_latency(output int lat);
    en = 0; x = 0; @(posedge clk); #1; en = 1;
    x = 25'sd1000;
    lat = 0;
    @(posedge clk); #1; x = 0; lat = 1;
    while (y < 100 && y > -100 && lat < 10) begin @(posedge clk); #1; lat++; end
  endtask

  function automatic coef_t c(bit on, int shift, frac_e f = FRAC_NONE);
    c.on = on; c.shift = 6'(shift); c.frac = f;
  endfunction

  longint pi_prev;
  int lat;
  initial begin
    x = 0; cfg = '0;
    repeat (2) @(posedge clk); rst <= 0;
    // D only: no additional latency
    cfg = '0; cfg.d_gain = c(1, 0); cfg.d_gamma = c(1, 0);
    impulse_latency(lat);
    check(lat, 1, "D latency");
    check(y, 1000, "D impulse amplitude");
    // P only: one more clock
    cfg = '0; cfg.p_gain = c(1, 1); cfg.p_roll = c(1, 0);
    impulse_latency(lat);
    check(lat, 2, "P latency");
    check(y, 500, "P impulse amplitude");
    // I only: pure integrator also arrives after two clocks and then holds
    cfg = '0; cfg.i_gain = c(1, 1);
    impulse_latency(lat);
    check(lat, 2, "I latency");
    repeat (5) @(posedge clk); #1;
    check(y, 1000, "I holds the integral");
    // ce = 0 holds everything
    ce = 0; x = 25'sd5000; repeat (5) @(posedge clk); #1;
    check(y, 1000, "ce=0 holds");
    ce = 1;
    // en = 0 clears
    en = 0; @(posedge clk); #1;
    check(y, 0, "en=0 clears");
    en = 1;
    // random comparison
    for (int b = 0; b < 20; b++) begin
      en = 0; x = 0; @(posedge clk); #1; en = 1;
      cfg.p_gain = c(1, 2 + $urandom % 8, frac_e'($urandom % 4)); cfg.p_roll = c(1, 1 + $urandom % 8, frac_e'($urandom % 4));
      cfg.i_gain = c(1, 6 + $urandom % 10, frac_e'($urandom % 4)); cfg.i_roll = c($urandom % 2, 8 + $urandom % 10);
      cfg.d_gain = c(1, 1 + $urandom % 6, frac_e'($urandom % 4)); cfg.d_w2 = c(1, 3 + $urandom % 6); cfg.d_gamma = c(1, 1 + $urandom % 4);
      pi_prev = 0;
      for (int i = 0; i < 200; i++) begin
        x = err_t'(longint'($urandom % 20000) - 10000);
        @(posedge clk); #1;
        check(y, longint'(rd) + pi_prev, "random sum");
        pi_prev = longint'(rp) + longint'(ri);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
