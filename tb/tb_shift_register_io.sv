// tb_shift_register_io: the bus is connected to behavioural models of two 13-bit
// serial-in/parallel-out chains with output latches and two 11-bit
// parallel-in/serial-out chains (load high captures the pins; each rising shift clock
// moves the chain by one, the serial output is the last stage). Random output words
// must appear on the latched outputs one frame later, random input pins must appear in
// din, the frame must repeat every 50 clocks (2 MS/s) and the shift clock must run at
// half the system clock while shifting.
module tb_shift_register_io;
  logic clk = 0, rst = 1;
  logic [25:0] dout, latched;
  logic [21:0] din, pins;
  logic sr_clk, sr_latch, sr_load, update;
  logic [1:0] sr_do, sr_di;
  int checks = 0, failures = 0;

  shift_register_io dut (.clk, .rst, .dout, .din, .sr_clk, .sr_latch, .sr_load, .sr_do, .sr_di, .update);

  // output chains: chain c holds bits c*13 .. c*13+12, stage 0 receives the serial input
  logic [12:0] oshift [2];
  always @(posedge sr_clk) for (int c = 0; c < 2; c++) oshift[c] <= {oshift[c][11:0], sr_do[c]};
  always @(posedge sr_latch) latched <= {oshift[1], oshift[0]};
  // input chains: stage 10 is the serial output
  logic [10:0] ishift [2];
  always @(posedge clk) begin
    if (sr_load) begin ishift[0] <= pins[10:0]; ishift[1] <= pins[21:11]; end
  end
  always @(posedge sr_clk) if (!sr_load) for (int c = 0; c < 2; c++) ishift[c] <= {ishift[c][9:0], 1'b0};
  assign sr_di = {ishift[1][10], ishift[0][10]};

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  logic [25:0] sent;
  logic [21:0] applied;
  int t0, t1;
  initial begin
    dout = 0; pins = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    @(posedge clk iff update); t0 = $time;
    @(posedge clk iff update); t1 = $time;
    expect_true((t1 - t0) / 10 == 50, "frame of 50 clocks = 2 MS/s");
    for (int fr = 0; fr < 40; fr++) begin
      // change both words right after a frame boundary
      #1 dout = 26'($urandom); pins = 22'($urandom);
      sent = dout; applied = pins;
      // wait until the next frame end: din reflects pins loaded this frame
      @(posedge clk iff update); @(posedge clk); #1;
      expect_true(din == applied, "inputs read within the frame");
      pins = 22'($urandom);
      // outputs latched at the start of the following frame
      repeat (3) @(posedge clk); #1;
      expect_true(latched == sent, "outputs latched at the next frame start");
      @(posedge clk iff update);
    end
    // shift clock period: 2 system clocks
    @(posedge sr_clk); t0 = $time; @(posedge sr_clk); t1 = $time;
    expect_true((t1 - t0) / 10 == 2, "50 MHz shift clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
