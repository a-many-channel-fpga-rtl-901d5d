// preset_ramp: slowly ramped preset for a variable-duty-cycle temperature servo.
//
// The preset is a feed-forward drive that is added to the PID output. To avoid
// thermal shocks it moves by one unit every ramp_div+1 servo ticks (ce), towards
// 'target' while the servo is on and towards zero while it is off. The PID enable is
// raised once the servo is on and the preset has reached its target, so the PID only
// starts after the heater has been brought up gently; it stays enabled if the target
// is changed later. With ramp_div of order 2^20 at a 125 kHz tick, a full-scale ramp
// takes minutes. Step size and downward ramp are this design's choices.
//
// Timing: preset and pid_en are registered and change only on ce.
module preset_ramp (
  input  logic        clk,
  input  logic        rst,
  input  logic        ce,
  input  logic        on,
  input  logic [15:0] target,
  input  logic [23:0] ramp_div,
  output logic [15:0] preset,
  output logic        pid_en
);
  logic [23:0] div;
  logic [15:0] goal;

  assign goal = on ? target : 16'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      preset <= '0;
      div    <= '0;
      pid_en <= 1'b0;
    end else if (ce) begin
      if (!on)                  pid_en <= 1'b0;
      else if (preset == goal)  pid_en <= 1'b1;
      if (preset == goal) begin
        div <= '0;
      end else if (div >= ramp_div) begin
        div    <= '0;
        preset <= (preset < goal) ? preset + 1'b1 : preset - 1'b1;
      end else begin
        div <= div + 1'b1;
      end
    end
  end

endmodule
