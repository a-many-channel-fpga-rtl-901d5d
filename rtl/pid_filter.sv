// pid_filter: PID controller as the sum of three parallel shift-add IIR filters.
//
// P is a first-order filter with a high-frequency roll-off, I a first-order filter
// with an optional low-frequency gain cap, D a second-order filter with roll-off and
// damping (see iir_first_order and iir_second_order). P and I keep 32 extra internal
// fractional bits, D keeps 16.
//
// Timing: each filter registers its output one update after its input. The D output
// goes straight to the sum, so the D contribution has one clock of latency. The P+I
// sum is registered once more (pipelining the adder), so P and I contribute one clock
// later than D. The output is y = D + (P+I) in 16.9 format with one guard bit; the
// caller adds the scan or preset, rounds to 16 bits and saturates.
// All registers advance only when ce = 1; en = 0 clears all filter state.
module pid_filter
  import mcfs_pkg::*;
#(
  parameter int unsigned W_EXTRA_PI   = 32,
  parameter int unsigned W_EXTRA_D    = 16,
  parameter bit          FINE_ROLLOFF = 1'b0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ce,
  input  logic               en,
  input  err_t               x,
  input  pid_cfg_t           cfg,
  output logic signed [ERR_W:0] y
);
  err_t yp, yi, yd;
  logic signed [ERR_W:0] pi_sum;

  iir_first_order #(.W_IN(ERR_W), .W_EXTRA(W_EXTRA_PI)) u_p (
    .clk, .rst, .ce, .en, .x, .gain(cfg.p_gain), .roll(cfg.p_roll), .y(yp));
  iir_first_order #(.W_IN(ERR_W), .W_EXTRA(W_EXTRA_PI)) u_i (
    .clk, .rst, .ce, .en, .x, .gain(cfg.i_gain), .roll(cfg.i_roll), .y(yi));
  iir_second_order #(.W_IN(ERR_W), .W_EXTRA(W_EXTRA_D), .FINE_ROLLOFF(FINE_ROLLOFF)) u_d (
    .clk, .rst, .ce, .en, .x, .gain(cfg.d_gain), .w2(cfg.d_w2), .gamma(cfg.d_gamma), .y(yd));

  wide_t pi_next;
  always_comb pi_next = sat(wide_t'(yp) + wide_t'(yi), ERR_W + 1);

  always_ff @(posedge clk) begin
    if (rst || (ce && !en)) pi_sum <= '0;
    else if (ce)            pi_sum <= pi_next[ERR_W:0];
  end

  wide_t y_w;
  always_comb y_w = sat(wide_t'(pi_sum) + wide_t'(yd), ERR_W + 1);
  assign y = y_w[ERR_W:0];
  // Bits above the saturated fields are copies of their signs.
  logic unused;
  assign unused = ^{pi_next[63:ERR_W+1], y_w[63:ERR_W+1]};

endmodule
