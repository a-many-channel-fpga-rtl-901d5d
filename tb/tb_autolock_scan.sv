// tb_autolock_scan: compares the scan with a triangle-wave model clock by clock and
// checks that it holds while run is low and turns at both limits.
module tb_autolock_scan;
  import mcfs_pkg::*;
  logic clk = 0, rst = 1, run = 0;
  sample_t lo, hi, scan;
  logic [31:0] step;
  int checks = 0, failures = 0, turns_hi = 0, turns_lo = 0;
  int m; bit up;

  autolock_scan dut (.clk, .rst, .run, .lo, .hi, .step, .scan);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what);
    checks++;
    if (int'(scan) != m) begin
      failures++;
      if (failures < 10) $display("FAIL %s: scan=%0d model=%0d", what, scan, m);
    end
  endtask

  initial begin
    lo = -1000; hi = 1500; step = 7 << 16;
    repeat (2) @(posedge clk); #1 rst = 0;
    m = 0; up = 1;
    chk("reset value");
    run = 1;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk); #1;
      if (up) begin
        if (m + 7 >= 1500) begin m = 1500; up = 0; turns_hi++; end else m += 7;
      end else begin
        if (m - 7 <= -1000) begin m = -1000; up = 1; turns_lo++; end else m -= 7;
      end
      chk("triangle");
    end
    run = 0;
    repeat (20) begin @(posedge clk); #1 chk("hold"); end
    // fractional step: 1/256 LSB per clock moves 4 LSB in 1024 clocks
    step = 32'd256; run = 1;
    begin
      int s0;
      s0 = scan;
      repeat (1024) @(posedge clk); #1;
      checks++;
      if (int'(scan) - s0 != (up ? 4 : -4)) begin failures++; $display("FAIL fractional step %0d -> %0d", s0, scan); end
    end
    checks++;
    if (turns_hi < 2 || turns_lo < 2) begin failures++; $display("FAIL too few turns"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
