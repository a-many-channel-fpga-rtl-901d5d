// lockin_demod: low-resource lock-in amplifier for the slow dither lock.
//
// The input (cavity transmission, reflection or SFG power) is multiplied by six
// three-level demodulation waveforms (-1, 0, +1: an add, a subtract or nothing) and
// summed over one full dither period. The waveforms are the in-phase and quadrature
// components of the 1st, 2nd and 3rd harmonic of the dither, all with the layout of
// mcfs_pkg::demod_level (no 3rd harmonic of their own). Harmonic h at coarse step k
// uses the level at step (h*k) mod 60, quadrature adds a quarter period (15 steps).
// For h = 3 the 120-degree windows fall on a 3-step grid, an approximation.
//
// At period_end the six sums are scaled by 2^-out_shift (rounded, saturated to 16.9)
// and presented on 'demod' with a one-clock 'valid' pulse; the accumulators restart.
// While 'hold' is high (dither inhibited) nothing is accumulated and the period's
// result is discarded. Accumulators are 64 bits wide so the longest periods cannot
// overflow.
module lockin_demod
  import mcfs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        hold,
  input  sample_t     sig,
  input  logic [5:0]  phase,
  input  logic        period_end,
  input  logic [5:0]  out_shift,
  output err_t        demod [6],   // I1, Q1, I2, Q2, I3, Q3
  output logic        valid
);
  wide_t acc [6];
  wide_t term [6];
  wide_t scaled [6];
  logic  spoiled;   // the dither was inhibited during this period

  function automatic int lvl(input int unsigned h, input int unsigned k, input bit quad);
    return demod_level((h * k + (quad ? QUARTER : 0)) % DITHER_STEPS);
  endfunction

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      unique case (lvl(i / 2 + 1, int'(phase), i[0]))
        1:       term[i] = wide_t'(sig);
        -1:      term[i] = -wide_t'(sig);
        default: term[i] = '0;
      endcase
      scaled[i] = sat(round_shift(acc[i] + term[i], int'(out_shift)), ERR_W);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 6; i++) begin acc[i] <= '0; demod[i] <= '0; end
      valid   <= 1'b0;
      spoiled <= 1'b1;
    end else begin
      valid <= 1'b0;
      if (period_end) begin
        for (int i = 0; i < 6; i++) acc[i] <= '0;
        if (!spoiled && !hold) begin
          for (int i = 0; i < 6; i++) demod[i] <= scaled[i][ERR_W-1:0];
          valid <= 1'b1;
        end
        spoiled <= hold;
      end else if (hold) begin
        spoiled <= 1'b1;
      end else begin
        for (int i = 0; i < 6; i++) acc[i] <= acc[i] + term[i];
      end
    end
  end

endmodule
