// vdc_output: variable-duty-cycle (pulse-width) heater drive with 1/16-sample dithering.
//
// The output is a constant-frequency pulse train on one bit of the shift-register
// output bus. 'tick' is the bus update strobe (2 MS/s); one period is PERIOD ticks
// (2000, i.e. 1 kHz). The on-time 'duty' is given in 1/16 of a tick. At the start of
// every period the next value of the sequence {0,15,1,13,3,11,5,9,7,8,6,10,4,12,2,14}
// (in 1/16) is added to duty and the sum is truncated to whole ticks; the output is
// high for that many ticks. Averaged over 16 periods this gives 16 times finer duty
// resolution, and the sequence changes the most significant fractional bit every period
// and the least significant one slowly. Duty values beyond a full period saturate.
//
// START sets the counter after reset. Giving each heater a different START staggers
// the periods of several outputs, so that their pulses do not all begin together and
// a shared heater supply sees a more even load (this design's choice of mechanism).
//
// Timing: duty is sampled on the tick that starts a period; out is registered and
// changes on ticks only.
module vdc_output #(
  parameter int unsigned PERIOD = 2000,
  parameter int unsigned START  = 0     // counter value after reset (period stagger)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        tick,
  input  logic [15:0] duty,   // on-time, 1/16 tick units
  output logic        out
);
  localparam int unsigned CW = $clog2(PERIOD);

  // Fractional offsets added in successive periods, in 1/16 tick.
  function automatic logic [3:0] seq(input logic [3:0] i);
    case (i)
      4'd0: return 4'd0;   4'd1: return 4'd15;  4'd2: return 4'd1;   4'd3: return 4'd13;
      4'd4: return 4'd3;   4'd5: return 4'd11;  4'd6: return 4'd5;   4'd7: return 4'd9;
      4'd8: return 4'd7;   4'd9: return 4'd8;   4'd10: return 4'd6;  4'd11: return 4'd10;
      4'd12: return 4'd4;  4'd13: return 4'd12; 4'd14: return 4'd2;  default: return 4'd14;
    endcase
  endfunction

  logic [CW-1:0] cnt;
  logic [3:0]    idx;
  logic [16:0]   sum;
  logic [12:0]   on_ticks;   // whole ticks, before the period limit
  logic [CW:0]   ontime;     // latched on-time of the current period

  always_comb begin
    sum      = 17'(duty) + 17'(seq(idx));
    on_ticks = sum[16:4];
  end

  // The fraction below one tick is dropped by design (that is what the sequence dithers).
  logic unused;
  assign unused = ^sum[3:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt    <= CW'(START);
      idx    <= '0;
      ontime <= '0;
      out    <= 1'b0;
    end else if (tick) begin
      if (cnt == '0) begin
        ontime <= (on_ticks > 13'(PERIOD)) ? (CW+1)'(PERIOD) : (CW+1)'(on_ticks);
        idx    <= idx + 1'b1;
        out    <= (on_ticks != '0);
      end else begin
        out <= ((CW+1)'(cnt) < ontime);
      end
      cnt <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end

endmodule
