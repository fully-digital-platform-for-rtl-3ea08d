// tb_pi_ctrl: checks the PI controller against a cycle model kept here:
// p = kp*err, I += ki*err (saturating at 48 bits), corr = sat32(p + I>>>16),
// with 2 clocks from err to corr. Covers random gains, the integrator clear,
// zero gains (open loop gives corr = 0) and output saturation.
`timescale 1ns/1ps
module tb_pi_ctrl;
  logic clk = 0, rst = 1;
  logic signed [15:0] err, kp, ki;
  logic int_clr;
  logic signed [31:0] corr;
  int checks = 0, failures = 0, nsat = 0, nclr = 0;
  longint m_p = 0, m_ip = 0, m_i = 0, m_out = 0;
  localparam longint IMAX = (64'sd1 <<< 47) - 1;
  localparam longint IMIN = -(64'sd1 <<< 47);

  always #4 clk = ~clk;

  pi_ctrl dut (.clk, .rst, .err, .kp, .ki, .int_clr, .corr);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, same register structure as described in the spec comment
  always @(posedge clk) begin
    if (rst) begin
      m_p <= 0; m_ip <= 0; m_i <= 0; m_out <= 0;
    end else begin
      longint s, in_;
      m_p  <= longint'(kp) * longint'(err);
      m_ip <= longint'(ki) * longint'(err);
      in_ = m_i + m_ip;
      if (int_clr) m_i <= 0;
      else if (in_ > IMAX) m_i <= IMAX;
      else if (in_ < IMIN) m_i <= IMIN;
      else m_i <= in_;
      s = m_p + (m_i >>> 16);
      if (s > 64'sd2147483647) m_out <= 64'sd2147483647;
      else if (s < -64'sd2147483648) m_out <= -64'sd2147483648;
      else m_out <= s;
    end
  end

  initial begin
    err = 0; kp = 0; ki = 0; int_clr = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // segments of 1000 clocks; the two saturation segments run long enough
    // (ki*err = 2^30 per clock) for the 48-bit integrator to reach its limit
    for (int n = 0; n < 8000 + 2 * 139000; n++) begin
      int seg;
      seg = (n < 3000) ? n / 1000 : (n < 142000) ? 3 : (n < 281000) ? 4 : (n - 281000) / 1000 + 5;
      err = $urandom;
      int_clr = 0;
      case (seg)
        0: begin kp = 0; ki = 0; end                        // open loop
        1: begin kp = $urandom_range(0, 200); ki = 0; end
        2: begin kp = 0; ki = $urandom_range(0, 2000) - 1000; end
        3: begin kp = 16'sd32767; ki = 16'sd32767; err = 16'sd32767; end   // drive to positive limits
        4: begin kp = 16'sd32767; ki = 16'sd32767; err = -16'sd32768; end  // and negative
        5: begin kp = $urandom; ki = $urandom; int_clr = (n % 50 == 0); end
        default: begin kp = 100; ki = 500; int_clr = (n % 300 == 0); end
      endcase
      if (int_clr) nclr++;
      @(posedge clk); #1;
      checks++;
      if (longint'(corr) != m_out) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, corr, m_out);
      end
      if (corr == 32'sh7fff_ffff || corr == 32'sh8000_0000) nsat++;
      if (seg == 0) begin
        checks++;
        if (corr != 0) begin failures++; $display("FAIL open loop output %0d", corr); end
      end
    end
    checks += 2;
    if (nsat == 0) begin failures++; $display("FAIL saturation never reached"); end
    if (nclr == 0) begin failures++; $display("FAIL clear never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
