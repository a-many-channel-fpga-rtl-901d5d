// dither_alternator: takes turns between the dithers of two servos.
//
// Two dither locks can disturb each other, for example when one cavity is dithered
// and a laser locked to it is dithered too, and both use the same sum-frequency
// signal. With 'en' set, this block lets only one of the two servos sel_a and sel_b
// dither at a time and inhibits the other. The active servo keeps its turn until it
// has delivered n_periods complete lock-in results (its demod_valid pulses), then the
// turns swap. Counting results rather than clocks gives each servo whole dither
// periods: the inhibited servo's correction simply holds, and the lock-in discards the
// period in which a dither was switched on. Taking turns comes from the published
// system; switching on counted lock-in results is this design's choice.
//
// Interface: valid[s] is the lock-in result strobe of servo s; inhibit[s] is ORed into
// that servo's dither inhibit. active_b shows whose turn it is. With en = 0, or
// sel_a == sel_b, nothing is inhibited.
// Timing: the turn changes on the clock after the n_periods-th result.
module dither_alternator #(
  parameter int unsigned N = 9
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic [3:0]           sel_a,
  input  logic [3:0]           sel_b,
  input  logic [15:0]          n_periods,
  input  logic [N-1:0]         valid,
  output logic [N-1:0]         inhibit,
  output logic                 active_b
);
  logic [15:0] count;
  logic        hit;
  logic        on;

  assign on  = en && (sel_a != sel_b) && (32'(sel_a) < N) && (32'(sel_b) < N);
  assign hit = active_b ? valid[sel_b] : valid[sel_a];

  always_ff @(posedge clk) begin
    if (rst || !on) begin
      count    <= '0;
      active_b <= 1'b0;
    end else if (hit) begin
      if (count + 16'd1 >= n_periods) begin
        count    <= '0;
        active_b <= !active_b;
      end else begin
        count <= count + 16'd1;
      end
    end
  end

  always_comb begin
    inhibit = '0;
    if (on) begin
      if (active_b) inhibit[sel_a] = 1'b1;
      else          inhibit[sel_b] = 1'b1;
    end
  end

endmodule
