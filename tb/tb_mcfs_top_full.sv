// tb_mcfs_top_full: the whole control system at its default parameters (9 cavity
// servos, 8 temperature servos, 16-segment sequencer, 1024-entry result memory,
// 5 s lock hold time), driven end to end by mcfs_top_env. The steady-lock status
// needs 5 s of simulated time and is not expected here; tb_mcfs_top covers it with a
// short hold time.
module tb_mcfs_top_full;
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

  mcfs_top dut (.*);
  mcfs_top_env #(.CHECK_STEADY(1'b0)) env (.*);
endmodule
