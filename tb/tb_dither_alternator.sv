// tb_dither_alternator: drives random lock-in result strobes on nine servos and checks
// against a reference model that exactly one of the two chosen servos is inhibited at
// any time, that the turn passes after n_periods results of the active servo (results
// of the other servos are ignored), and that nothing is inhibited when disabled or when
// both selections name the same servo.
module tb_dither_alternator;
  logic clk = 0, rst = 1, en = 0, active_b;
  logic [3:0] sel_a, sel_b;
  logic [15:0] n_periods;
  logic [8:0] valid, inhibit, exp_inh;
  int checks = 0, failures = 0, turns = 0;
  int m_count;
  bit m_b;

  dither_alternator #(.N(9)) dut (.clk, .rst, .en, .sel_a, .sel_b, .n_periods, .valid, .inhibit, .active_b);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [8:0] model_inh();
    logic [8:0] r;
    r = '0;
    if (en && sel_a != sel_b) r[m_b ? sel_a : sel_b] = 1'b1;
    return r;
  endfunction

  initial begin
    valid = '0; sel_a = 4'd2; sel_b = 4'd5; n_periods = 16'd3;
    repeat (3) @(posedge clk); #1 rst = 0;
    expect_true(inhibit == '0, "disabled: nothing inhibited");
    en = 1; m_count = 0; m_b = 0;
    #1 expect_true(inhibit == 9'b000100000, "servo b waits first");
    for (int i = 0; i < 3000; i++) begin
      valid = 9'($urandom) & 9'($urandom);
      @(posedge clk);
      // reference model update on this edge
      if ((m_b ? valid[sel_b] : valid[sel_a])) begin
        if (m_count + 1 >= int'(n_periods)) begin m_count = 0; m_b = !m_b; turns++; end
        else m_count++;
      end
      #1;
      exp_inh = model_inh();
      expect_true(inhibit == exp_inh && active_b == m_b, "turn-taking");
    end
    expect_true(turns > 20, "turns alternate");
    sel_b = sel_a; #1;
    expect_true(inhibit == '0, "same servo: nothing inhibited");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
