// tb_iir_second_order: self-checking test of the second-order shift-add D filter.
//
// A 128-bit reference model recomputes y0 = y1 - w2*y1 + dy - g*dy + (D/2)dx with the
// +-1 LSB damping guard, rounding shifts, saturation and, with FINE_ROLLOFF = 0, the
// frac fields of w2 and g ignored. It is compared with the filter every clock for
// random inputs and coefficients. Closed-form checks: a constant input gives zero
// output after the transient (a differentiator has no DC gain), and with the roll-off
// and damping off the first output after a step is exactly (D/2)*step.
module tb_iir_second_order;
  import mcfs_pkg::*;
  localparam int unsigned WE = 16;
  localparam int unsigned W  = ERR_W + WE;
  typedef logic signed [127:0] big_t;

  logic clk = 0, rst = 1, ce = 1, en = 1;
  err_t x, y;
  coef_t gain, w2, gamma;
  int checks = 0, failures = 0;

  iir_second_order dut (.clk, .rst, .ce, .en, .x, .gain, .w2, .gamma, .y);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic big_t rs(big_t v, int s);
    if (s == 0) return v;
    return (v + (big_t'(1) <<< (s - 1))) >>> s;
  endfunction
  function automatic big_t cm(big_t v, coef_t c, bit fine);
    big_t b;
    if (!c.on) return 0;
    case (fine ? c.frac : 2'd0)
      2'd0: b = v;
      2'd1: b = v + rs(v, 2);
      2'd2: b = v + rs(v, 1);
      default: b = v - rs(v, 3);
    endcase
    return rs(b, int'(c.shift));
  endfunction
  function automatic big_t clip(big_t v, int w);
    big_t hi = (big_t'(1) <<< (w - 1)) - 1;
    big_t lo = -(big_t'(1) <<< (w - 1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  big_t my1, my2, mx1, mx2;
  task automatic model_step();
    big_t dx = (big_t'(x) - mx2) <<< WE;
    big_t dy = my1 - my2;
    big_t gd = cm(dy, gamma, 1'b0);
    big_t n;
    if (gamma.on && gd == 0 && dy > 0) gd = 1;
    if (gamma.on && gd == 0 && dy < 0) gd = -1;
    n = clip(my1 - cm(my1, w2, 1'b0) + dy - gd + cm(dx, gain, 1'b1), W);
    my2 = my1; my1 = n; mx2 = mx1; mx1 = big_t'(x);
  endtask
  function automatic big_t model_out();
    return clip(rs(my1, WE), ERR_W);
  endfunction
  task automatic clear();
    en = 0; @(posedge clk); #1; en = 1;
    my1 = 0; my2 = 0; mx1 = 0; mx2 = 0;
  endtask

  task automatic check(big_t exp_v, string what);
    checks++;
    if (big_t'(y) !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: y=%0d expected %0d", what, y, exp_v);
    end
  endtask

  function automatic coef_t rnd_coef(int lo, int span);
    coef_t c;
    c.on = ($urandom % 8) != 0;
    c.frac = frac_e'($urandom % 4);
    c.shift = 6'(lo + $urandom % span);
    return c;
  endfunction

  int guard_hits = 0;
  initial begin
    x = 0; gain = '0; w2 = '0; gamma = '0;
    my1 = 0; my2 = 0; mx1 = 0; mx2 = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int blk = 0; blk < 40; blk++) begin
      clear();
      gain = rnd_coef(0, 12); w2 = rnd_coef(2, 14); gamma = rnd_coef(1, 14);
      if (blk % 4 == 0) begin gamma.on = 1'b1; gamma.shift = 6'(30 + blk % 8); end
      for (int i = 0; i < 300; i++) begin
        x = (i % 50 < 25) ? err_t'($urandom % 4096) : err_t'(-($urandom % 4096));
        @(posedge clk);
        if (gamma.on && (my1 != my2) && cm(my1 - my2, gamma, 1'b0) == 0) guard_hits++;
        model_step(); #1;
        check(model_out(), "random");
      end
    end
    checks++;
    if (guard_hits == 0) begin failures++; $display("FAIL the +-1 LSB damping guard never acted"); end
    // Step response with roll-off and damping off: first output is (D/2)*step.
    clear();
    gain = '{on:1'b1, frac:FRAC_QUART, shift:6'd2}; w2 = '0; gamma = '0;
    x = 25'sd4096;
    @(posedge clk); #1;
    check(big_t'(4096 / 4 + 4096 / 16), "step (D/2)dx");
    // Constant input through a damped filter decays to zero.
    clear();
    gain = '{on:1'b1, frac:FRAC_NONE, shift:6'd0};
    w2 = '{on:1'b1, frac:FRAC_NONE, shift:6'd4};
    gamma = '{on:1'b1, frac:FRAC_NONE, shift:6'd2};
    x = 25'sd20000;
    repeat (400) @(posedge clk); #1;
    check(0, "no DC gain");
    $display("guard hits %0d", guard_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
