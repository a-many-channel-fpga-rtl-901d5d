// tb_mcfs_top: end-to-end test of the control system at default sizes except for the
// lock hold time, shortened from 5 s to 200 us so that the steady-lock status is
// reached within the run. Stimulus, plant models and checks are in mcfs_top_env.
module tb_mcfs_top;
  import mcfs_pkg::*;
  logic clk, rst, slow_adc_strobe, s_clk, s_dat, s_cs_n, sr_clk, sr_latch, sr_load;
  logic dither_inhibit, awg_mod_tick, gi_done;
  sample_t fast_adc [10], slow_adc [16], fast_dac [14], slow_dac [16], aux_out [2];
  logic [1:0] sr_do, sr_di;
  logic [21:0] dig_in;
  logic [8:0] locked, dither_active;
  lock_status_e lock_status [9];
  logic [7:0] temp_pid_en;
  logic [3:0] awg_seg;
  logic [9:0] gi_rd_addr, gi_wr_ptr;
  logic signed [39:0] gi_rd_diff, gi_rd_ddiff;

  mcfs_top #(.HOLD_CYCLES(20000)) dut (.*);
  mcfs_top_env #(.CHECK_STEADY(1'b1)) env (.*);
endmodule
