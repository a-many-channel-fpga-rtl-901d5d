// param_loader: serial input that reassigns servo and system parameters at run time.
//
// A host sends frames over three wires: a select (s_cs_n, low during a frame), a
// serial clock (s_clk) and data (s_dat). Each frame is 48 bits, most significant bit
// first, sampled on rising s_clk edges: a 16-bit register address followed by a 32-bit
// value. When s_cs_n returns high after exactly 48 bits, a one-clock write strobe
// (wr, addr, data) is issued to the register file; frames of any other length are
// dropped. The three inputs are asynchronous to the system clock and pass through
// two-flip-flop synchronizers, so the serial clock must stay below a quarter of the
// system clock. The frame format is this design's choice.
//
// Timing: wr pulses three to four system clocks after the rising edge of s_cs_n.
module param_loader (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_clk,
  input  logic        s_dat,
  input  logic        s_cs_n,
  output logic        wr,
  output logic [15:0] addr,
  output logic [31:0] data
);
  logic [2:0] sclk_q, cs_q;
  logic [1:0] dat_q;
  logic [47:0] sh;
  logic [5:0]  n;

  always_ff @(posedge clk) begin
    if (rst) begin
      sclk_q <= '0; cs_q <= '1; dat_q <= '0;
      sh <= '0; n <= '0; wr <= 1'b0; addr <= '0; data <= '0;
    end else begin
      sclk_q <= {sclk_q[1:0], s_clk};
      cs_q   <= {cs_q[1:0], s_cs_n};
      dat_q  <= {dat_q[0], s_dat};
      wr     <= 1'b0;
      if (cs_q[1]) begin
        n <= '0;
        if (!cs_q[2] && n == 6'd48) begin    // select released after a full frame
          wr   <= 1'b1;
          addr <= sh[47:32];
          data <= sh[31:0];
        end
      end else if (sclk_q[1] && !sclk_q[2]) begin
        sh <= {sh[46:0], dat_q[1]};
        if (n != 6'd63) n <= n + 1'b1;
      end
    end
  end

endmodule
