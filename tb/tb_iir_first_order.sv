// tb_iir_first_order: self-checking test of the first-order shift-add IIR filter.
//
// A reference model written with 128-bit integers recomputes
// y0 = y1 - w*y1 + (G/2)(x0 + x1) with rounding shifts and saturation, and the output
// is compared every clock for random inputs and coefficients. Two closed-form checks
// follow: a pure integrator must grow by exactly 2*x*G/2 per update, and a low-pass
// with G/2 = w/2 must settle to unity DC gain. The latency check confirms that an
// input step reaches the output one clock later.
module tb_iir_first_order;
  import mcfs_pkg::*;
  localparam int unsigned WE = 32;
  localparam int unsigned W  = ERR_W + WE;
  typedef logic signed [127:0] big_t;

  logic clk = 0, rst = 1, ce = 1, en = 1;
  err_t x, y;
  coef_t gain, roll;
  int checks = 0, failures = 0;

  iir_first_order dut (.clk, .rst, .ce, .en, .x, .gain, .roll, .y);

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
  function automatic big_t cm(big_t v, coef_t c);
    big_t b;
    if (!c.on) return 0;
    case (c.frac)
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

  big_t my1, mx1;
  task automatic model_step();
    big_t sx = (big_t'(x) + mx1) <<< WE;
    my1 = clip(my1 - cm(my1, roll) + cm(sx, gain), W);
    mx1 = big_t'(x);
  endtask
  function automatic big_t model_out();
    return clip(rs(my1, WE), ERR_W);
  endfunction

  task automatic check(big_t exp_v, string what);
    checks++;
    if (big_t'(y) !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: y=%0d expected %0d", what, y, exp_v);
    end
  endtask

  function automatic coef_t rnd_coef(int maxshift);
    coef_t c;
    c.on = ($urandom % 8) != 0;
    c.frac = frac_e'($urandom % 4);
    c.shift = 6'($urandom % maxshift);
    return c;
  endfunction

  initial begin
    x = 0; gain = '0; roll = '0;
    my1 = 0; mx1 = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    // 1. random comparison against the model
    for (int blk = 0; blk < 40; blk++) begin
      gain = rnd_coef(48); roll = rnd_coef(48);
      if (blk % 5 == 0) begin gain.shift = 6'(WE + $urandom % 6); roll.shift = 6'(3 + $urandom % 10); end
      for (int i = 0; i < 200; i++) begin
        x = err_t'($urandom);
        @(posedge clk); model_step(); #1;
        check(model_out(), "random");
      end
    end
    // 2. pure integrator: G/2 = 1 makes the increment x0+x1 in 16.9 LSBs
    en = 0; @(posedge clk); #1; en = 1; my1 = 0; mx1 = 0;
    gain = '{on:1'b1, frac:FRAC_NONE, shift:6'd0}; roll = '0;
    x = 25'sd3;
    @(posedge clk); #1;           // y = 3 (x1 was 0)
    check(128'sd3, "integrator latency");
    for (int i = 2; i < 20; i++) begin
      @(posedge clk); #1;
      check(big_t'(3 + 6 * (i - 1)), "integrator slope");
    end
    // 3. low-pass with unity DC gain: G/2 = w/2, w = 2^-4
    en = 0; @(posedge clk); #1; en = 1;
    gain = '{on:1'b1, frac:FRAC_NONE, shift:6'd5}; roll = '{on:1'b1, frac:FRAC_NONE, shift:6'd4};
    x = 25'sd100000;
    repeat (600) @(posedge clk); #1;
    checks++;
    if (y < 25'sd99999 || y > 25'sd100001) begin failures++; $display("FAIL DC gain y=%0d", y); end
    // 4. same low-pass with 1+1/2 on the gain: DC gain 1.5
    gain.frac = FRAC_HALF;
    repeat (600) @(posedge clk); #1;
    checks++;
    if (y < 25'sd149998 || y > 25'sd150002) begin failures++; $display("FAIL DC gain 1.5 y=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
