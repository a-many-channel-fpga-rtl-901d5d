// shift_register_io: slow digital I/O over external shift-register chains.
//
// Many slow digital outputs (26) and inputs (22) are served by seven FPGA pins: a
// shared shift clock (sr_clk, half the system clock: 50 MHz), an output latch strobe
// (sr_latch), an input parallel-load strobe (sr_load), two serial output lines feeding
// two output chains of NOUT/2 bits and two serial input lines from two input chains of
// NIN/2 bits. The split into two chains of each kind, the bit order and the frame
// layout are this design's choices; only the pin count, the 50 MHz bus and the update
// rate are given.
//
// Frame of FRAME clocks (50 -> 2 MS/s at 100 MHz), counter f:
//   f = 0      sr_latch and sr_load high: the bits shifted in the previous frame appear
//              on the output pins, the input chains capture their pins
//   f = 1      dout is sampled for this frame
//   f = 2+2b   bit b is put on sr_do (chain c sends dout[c*NOUT/2 + NOUT/2-1-b]),
//              sr_clk low
//   f = 3+2b   sr_clk high: the chains shift on this rising edge
// Input bit b (chain c, din[c*NIN/2 + NIN/2-1-b]) is read while the clock is low,
// before the edge that shifts it away. All pin outputs are registered (one clock after
// the counter). 'update' pulses on the last clock of a frame, when din takes the newly
// read bits; it is the 2 MS/s tick of the VDC outputs. An output bit reaches its pin at
// the start of the next frame; an input pin is seen in din at the end of the frame
// that loaded it.
module shift_register_io #(
  parameter int unsigned NOUT  = 26,
  parameter int unsigned NIN   = 22,
  parameter int unsigned FRAME = 50
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [NOUT-1:0] dout,
  output logic [NIN-1:0]  din,
  output logic            sr_clk,
  output logic            sr_latch,
  output logic            sr_load,
  output logic [1:0]      sr_do,
  input  logic [1:0]      sr_di,
  output logic            update
);
  localparam int unsigned HO = NOUT / 2;   // bits per output chain
  localparam int unsigned HI = NIN / 2;    // bits per input chain
  localparam int unsigned NB = (HO > HI) ? HO : HI;
  localparam int unsigned FW = $clog2(FRAME);

  logic [FW-1:0]   f;
  logic [NOUT-1:0] snap;
  logic [NIN-1:0]  cap;
  logic            in_bits, odd;
  int unsigned     b;

  initial assert (FRAME >= 2 * NB + 2) else $error("FRAME too short for the chains");

  always_comb begin
    odd     = f[0];
    b       = (int'(f) - 2) / 2;
    in_bits = (f >= FW'(2)) && (f < FW'(2 + 2 * NB));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      f <= '0; snap <= '0; cap <= '0; din <= '0;
      sr_clk <= 1'b0; sr_latch <= 1'b0; sr_load <= 1'b0; sr_do <= '0; update <= 1'b0;
    end else begin
      f        <= (f == FW'(FRAME - 1)) ? '0 : f + 1'b1;
      update   <= (f == FW'(FRAME - 2));
      sr_latch <= (f == '0);
      sr_load  <= (f == '0);
      sr_clk   <= in_bits && odd;
      if (f == FW'(1)) snap <= dout;
      if (in_bits && !odd && b < HO) begin
        sr_do[0] <= snap[HO - 1 - b];
        sr_do[1] <= snap[HO + HO - 1 - b];
      end
      // pins show the registered state of the previous counter value: bit b is on the
      // input lines while f = 3+2b
      if (in_bits && odd && b < HI) begin
        cap[HI - 1 - b]      <= sr_di[0];
        cap[HI + HI - 1 - b] <= sr_di[1];
      end
      if (f == FW'(FRAME - 1)) din <= cap;
    end
  end

endmodule
