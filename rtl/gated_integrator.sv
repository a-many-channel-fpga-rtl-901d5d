// gated_integrator: gated integration of fluorescence with background subtraction.
//
// Driven by the gate of awg_sequencer: during the '+' window the input (fluorescence
// from a fast ADC) is summed into one accumulator, during the '-' window (taken after
// the atoms were cleared from the trap) into another. Each accumulator restarts when
// its window opens. When the '-' window closes, the difference (+ minus -) is the
// background-free signal of that cycle. The difference between it and the previous
// cycle's result is also formed; since the trap's field gradient is reversed every
// cycle, this is the trapping minus anti-trapping signal. Both are written to block
// RAM at wr_ptr (wr_ptr then advances, wrapping at DEPTH) and can be read back through
// rd_addr. Both also drive signal monitors (fast DACs): the result scaled by
// 2^-mon_shift, rounded and saturated to 16 bits.
//
// Timing: 'done' pulses on the clock after the '-' window closes, when the monitors
// update and the RAM is written; RAM reads have one clock of latency.
module gated_integrator
  import mcfs_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned ACC_W = 40
) (
  input  logic                     clk,
  input  logic                     rst,
  input  sample_t                  x,
  input  gate_e                    gate,
  input  logic [5:0]               mon_shift,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic signed [ACC_W-1:0]  rd_diff,
  output logic signed [ACC_W-1:0]  rd_ddiff,
  output logic [$clog2(DEPTH)-1:0] wr_ptr,
  output sample_t                  mon [2],
  output logic                     done
);
  logic signed [ACC_W-1:0] acc_p, acc_m, last_diff, diff, ddiff;
  logic signed [ACC_W-1:0] ram_diff  [DEPTH];
  logic signed [ACC_W-1:0] ram_ddiff [DEPTH];
  gate_e prev;
  logic  close;
  wide_t m0, m1;

  assign close = (prev == GATE_MINUS) && (gate != GATE_MINUS);
  assign diff  = acc_p - acc_m;
  assign ddiff = diff - last_diff;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_p <= '0; acc_m <= '0; last_diff <= '0;
      prev <= GATE_IDLE; wr_ptr <= '0; done <= 1'b0;
      mon[0] <= '0; mon[1] <= '0;
    end else begin
      prev <= gate;
      done <= close;
      if (gate == GATE_PLUS)
        acc_p <= (prev == GATE_PLUS) ? acc_p + ACC_W'(x) : ACC_W'(x);
      if (gate == GATE_MINUS)
        acc_m <= (prev == GATE_MINUS) ? acc_m + ACC_W'(x) : ACC_W'(x);
      if (close) begin
        last_diff <= diff;
        wr_ptr    <= wr_ptr + 1'b1;
        mon[0]    <= m0[ADC_W-1:0];
        mon[1]    <= m1[ADC_W-1:0];
      end
    end
  end

  always_comb begin
    m0 = sat(round_shift(wide_t'(diff), int'(mon_shift)), ADC_W);
    m1 = sat(round_shift(wide_t'(ddiff), int'(mon_shift)), ADC_W);
  end

  // Result memories: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (close) begin
      ram_diff[wr_ptr]  <= diff;
      ram_ddiff[wr_ptr] <= ddiff;
    end
    rd_diff  <= ram_diff[rd_addr];
    rd_ddiff <= ram_ddiff[rd_addr];
  end

  logic unused;
  assign unused = ^{m0[63:ADC_W], m1[63:ADC_W]};

endmodule
