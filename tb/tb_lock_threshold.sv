// tb_lock_threshold: checks lock detection, its polarity, the one-clock enable delay
// and the three-state lock status with a short hold time (HOLD_CYCLES = 20).
module tb_lock_threshold;
  import mcfs_pkg::*;
  localparam int unsigned HOLD = 20;
  logic clk = 0, rst = 1, arm = 0, below = 0, locked;
  sample_t level, threshold;
  lock_status_e status;
  int checks = 0, failures = 0;

  lock_threshold #(.HOLD_CYCLES(HOLD)) dut (.clk, .rst, .arm, .level, .threshold, .below, .locked, .status);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(logic l, lock_status_e s, string what);
    checks++;
    if (locked !== l || status !== s) begin
      failures++;
      $display("FAIL %s: locked=%0d status=%0d expected %0d %0d", what, locked, status, l, s);
    end
  endtask

  initial begin
    level = 100; threshold = 1000;
    repeat (2) @(posedge clk); #1 rst = 0;
    @(posedge clk); #1 expect_state(0, LOCK_UNLOCKED, "below threshold");
    level = 2000; @(posedge clk); #1 expect_state(0, LOCK_UNLOCKED, "not armed");
    arm = 1; #1 expect_state(0, LOCK_UNLOCKED, "registered enable");
    @(posedge clk); #1 expect_state(1, LOCK_RECENT, "locked, recent");
    repeat (HOLD - 2) @(posedge clk); #1 expect_state(1, LOCK_RECENT, "still recent before hold time");
    @(posedge clk); #1 expect_state(1, LOCK_STEADY, "steady after hold time");
    repeat (50) @(posedge clk); #1 expect_state(1, LOCK_STEADY, "stays steady");
    level = 1000; @(posedge clk); #1 expect_state(0, LOCK_UNLOCKED, "equal is not past");
    level = 3000; @(posedge clk); #1 expect_state(1, LOCK_RECENT, "relock is recent");
    // reflection polarity
    below = 1; @(posedge clk); #1 expect_state(0, LOCK_UNLOCKED, "reflection high: unlocked");
    level = -500; @(posedge clk); #1 expect_state(1, LOCK_RECENT, "reflection low: locked");
    arm = 0; @(posedge clk); #1 expect_state(0, LOCK_UNLOCKED, "disarm");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
