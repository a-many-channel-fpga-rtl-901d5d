// iir_second_order: second-order IIR differential (D) filter from shifts and additions.
//
// It computes y0 = y1 - w2*y1 + dy - g*dy + (D/2)*dx with dy = y1 - y2 and dx = x0 - x2:
// a differentiator with gain D rolled off at f0 with damping gamma. The gain D/2 acts
// only on dx, the roll-off terms w2 and g only on the outputs, so gain and frequency
// response are set independently. All three are shift-add coefficients (coef_t).
// With FINE_ROLLOFF = 0 (the fast-servo configuration) w2 and g are plain powers of two
// and their frac fields are ignored; D/2 always has the two extra fractional bits.
//
// Truncation guard: when dy is nonzero but g*dy rounds to zero, g*dy is replaced by
// +-1 LSB of the internal word, so that dy keeps decaying and the output cannot creep
// up to overflow. Every right shift rounds. The internal word has W_EXTRA = 16 extra
// fractional bits (16+9+16 = 41 bits). The state saturates at the word limits.
//
// Timing: one clock of latency at the update rate selected by ce; en = 0 clears the
// state.
module iir_second_order
  import mcfs_pkg::*;
#(
  parameter int unsigned W_IN         = ERR_W,
  parameter int unsigned W_EXTRA      = 16,
  parameter bit          FINE_ROLLOFF = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    ce,
  input  logic                    en,
  input  logic signed [W_IN-1:0]  x,
  input  coef_t                   gain,   // D/2
  input  coef_t                   w2,     // omega~^2
  input  coef_t                   gamma,  // gamma~
  output logic signed [W_IN-1:0]  y
);
  localparam int unsigned W = W_IN + W_EXTRA;

  logic signed [W-1:0]    y1, y2;
  logic signed [W_IN-1:0] x1, x2;

  coef_t w2_eff, g_eff;
  wide_t dx, dy, g_dy, y_next;

  always_comb begin
    w2_eff = w2;
    g_eff  = gamma;
    if (!FINE_ROLLOFF) begin
      w2_eff.frac = FRAC_NONE;
      g_eff.frac  = FRAC_NONE;
    end
    dx   = (wide_t'(x) - wide_t'(x2)) <<< W_EXTRA;
    dy   = wide_t'(y1) - wide_t'(y2);
    g_dy = coef_mul(dy, g_eff);
    if (g_eff.on && g_dy == 0 && dy != 0) g_dy = (dy > 0) ? wide_t'(1) : -wide_t'(1);
    y_next = wide_t'(y1) - coef_mul(wide_t'(y1), w2_eff) + dy - g_dy + coef_mul(dx, gain);
    y_next = sat(y_next, W);
  end

  always_ff @(posedge clk) begin
    if (rst || (ce && !en)) begin
      y1 <= '0; y2 <= '0; x1 <= '0; x2 <= '0;
    end else if (ce) begin
      y2 <= y1;
      y1 <= y_next[W-1:0];
      x2 <= x1;
      x1 <= x;
    end
  end

  wide_t y_round;
  always_comb y_round = sat(round_shift(wide_t'(y1), W_EXTRA), W_IN);
  assign y = y_round[W_IN-1:0];
  // Bits above the saturated field are copies of its sign.
  logic unused;
  assign unused = ^y_round[63:W_IN];

endmodule
