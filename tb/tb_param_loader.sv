// tb_param_loader: sends random 48-bit frames with a serial clock of 1/8 of the system
// clock, asynchronous to it, and checks every write strobe, address and value, and
// that a short (47-bit) and a long (49-bit) frame produce no write.
module tb_param_loader;
  logic clk = 0, rst = 1, s_clk = 0, s_dat = 0, s_cs_n = 1, wr;
  logic [15:0] addr;
  logic [31:0] data;
  int checks = 0, failures = 0, writes = 0;
  logic [15:0] last_a;
  logic [31:0] last_d;

  param_loader dut (.clk, .rst, .s_clk, .s_dat, .s_cs_n, .wr, .addr, .data);

  always #5 clk = ~clk;
  always @(posedge clk) if (wr) begin writes++; last_a = addr; last_d = data; end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic send(logic [63:0] bits, int nbits);
    #37 s_cs_n = 0;
    for (int i = nbits - 1; i >= 0; i--) begin
      #13 s_dat = bits[i];
      #27 s_clk = 1;
      #40 s_clk = 0;
    end
    #33 s_cs_n = 1;
    #200;
  endtask

  initial begin
    logic [15:0] a; logic [31:0] d; int w0;
    #100 rst = 0;
    for (int i = 0; i < 30; i++) begin
      a = 16'($urandom); d = $urandom;
      w0 = writes;
      send({16'h0, a, d}, 48);
      expect_true(writes == w0 + 1, "one write per frame");
      expect_true(last_a == a && last_d == d, "address and data");
    end
    w0 = writes;
    send(64'h1234_5678_9ABC, 47);
    send(64'h1_2345_6789_ABCD, 49);
    expect_true(writes == w0, "wrong-length frames dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
