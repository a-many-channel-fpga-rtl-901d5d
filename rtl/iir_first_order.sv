// iir_first_order: first-order IIR filter built from bit shifts and additions.
//
// It computes y0 = y1 - w*y1 + (G/2)*(x0 + x1), the bilinear form of a single-pole
// low-pass. With the roll-off w = w_H and G = w_H*P it is the proportional filter with
// a high-frequency roll-off f_H; with w = w_L (or w off) and G = I*T it is the integral
// filter with an optional low-frequency gain cap. The DC gain is G/w.
//
// Both coefficients are shift-add values (mcfs_pkg::coef_t); the gain port holds G/2.
// The input is 16.9 (16 converter bits, 9 sub-LSB bits). The internal word has
// W_EXTRA more fractional bits, 16+9+32 = 57 bits by default, so that roll-off
// frequencies and gains far below the update rate are reachable. Every right shift
// rounds. The state saturates at the word limits instead of wrapping (this design's
// choice; only the second-order filter's overflow mechanism is discussed in the source).
//
// Timing: x is sampled on a clock edge with ce = 1 and the new y is available after
// that edge: one clock of latency at the update rate. ce selects the update rate
// (every clock for the fast servos, the slow-ADC strobe for temperature servos).
// en = 0 clears the state, so the filter restarts from zero when a servo locks.
module iir_first_order
  import mcfs_pkg::*;
#(
  parameter int unsigned W_IN    = ERR_W,  // 16 integer + 9 fractional bits
  parameter int unsigned W_EXTRA = 32      // internal fractional bits
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    ce,
  input  logic                    en,
  input  logic signed [W_IN-1:0]  x,
  input  coef_t                   gain,   // G/2
  input  coef_t                   roll,   // w
  output logic signed [W_IN-1:0]  y
);
  localparam int unsigned W = W_IN + W_EXTRA;

  logic signed [W-1:0]    y1;   // previous output, internal word
  logic signed [W_IN-1:0] x1;   // previous input

  wide_t sx, y_next;

  always_comb begin
    sx     = (wide_t'(x) + wide_t'(x1)) <<< W_EXTRA;
    y_next = wide_t'(y1) - coef_mul(wide_t'(y1), roll) + coef_mul(sx, gain);
    y_next = sat(y_next, W);
  end

  always_ff @(posedge clk) begin
    if (rst || (ce && !en)) begin
      y1 <= '0;
      x1 <= '0;
    end else if (ce) begin
      y1 <= y_next[W-1:0];
      x1 <= x;
    end
  end

  // Output: the 16.9 part of the internal word, rounded.
  wide_t y_round;
  always_comb y_round = sat(round_shift(wide_t'(y1), W_EXTRA), W_IN);
  assign y = y_round[W_IN-1:0];
  // Bits above the saturated field are copies of its sign.
  logic unused;
  assign unused = ^y_round[63:W_IN];

endmodule
