// tb_gated_integrator: drives gate windows and random samples and checks the
// background-subtracted result, the cycle-to-cycle difference, the RAM contents,
// the write pointer and the scaled monitor outputs against sums computed here.
module tb_gated_integrator;
  import mcfs_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1, done;
  sample_t x;
  gate_e gate;
  logic [5:0] mon_shift;
  logic [3:0] rd_addr, wr_ptr;
  logic signed [39:0] rd_diff, rd_ddiff;
  sample_t mon [2];
  int checks = 0, failures = 0;

  gated_integrator #(.DEPTH(DEPTH)) dut (.clk, .rst, .x, .gate, .mon_shift, .rd_addr, .rd_diff, .rd_ddiff,
    .wr_ptr, .mon, .done);

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

  longint sp, sm, d, prevd, dd;
  longint ed [20], edd [20];
  task automatic window(gate_e g, int n, int base, output longint sum);
    sum = 0;
    for (int i = 0; i < n; i++) begin
      gate = g; x = sample_t'(base + int'($urandom % 2000) - 1000);
      sum += longint'(x);
      @(posedge clk); #1;
    end
  endtask
  initial begin
    gate = GATE_IDLE; x = 0; mon_shift = 4; rd_addr = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    prevd = 0;
    for (int c = 0; c < 20; c++) begin
      window(GATE_IDLE, 7, 0, sp);
      window(GATE_PLUS, 50 + c, (c % 2) ? 3000 : 5000, sp);   // fluorescence alternates with field reversal
      window(GATE_IDLE, 10, 9999, sm);
      window(GATE_MINUS, 50 + c, 1000, sm);
      gate = GATE_IDLE; x = 12345;
      @(posedge clk); #1;          // close is seen this clock
      expect_true(done, "done after '-' window");
      d = sp - sm; dd = d - prevd; prevd = d;
      ed[c] = d; edd[c] = dd;
      expect_true(longint'(mon[0]) == ((d + 8) >>> 4), "monitor 0 = result / 16");
      expect_true(longint'(mon[1]) == ((dd + 8) >>> 4) || (dd > 32767 * 16 && mon[1] == 32767), "monitor 1 = difference / 16");
      expect_true(wr_ptr == 4'((c + 1) % DEPTH), "write pointer");
    end
    // read back the last DEPTH results (entries 4..19 -> addresses 4..15,0..3)
    for (int c = 4; c < 20; c++) begin
      rd_addr = 4'(c % DEPTH);
      @(posedge clk); #1;
      expect_true(longint'(rd_diff) == ed[c], "RAM result");
      expect_true(longint'(rd_ddiff) == edd[c], "RAM cycle difference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
