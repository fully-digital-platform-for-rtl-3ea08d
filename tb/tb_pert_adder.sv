// tb_pert_adder: checks sum = sat32(corr + pert*pert_amp) with the
// perturbation enabled and sum = corr when disabled, 1 clock after inputs,
// including both saturation limits.
`timescale 1ns/1ps
module tb_pert_adder;
  logic clk = 0, rst = 1;
  logic signed [31:0] corr, sum;
  logic signed [15:0] pert;
  logic [15:0] amp;
  logic en;
  int checks = 0, failures = 0, nsat = 0;

  always #4 clk = ~clk;

  pert_adder dut (.clk, .rst, .corr, .pert, .pert_amp(amp), .pert_en(en), .sum);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    corr = 0; pert = 0; amp = 0; en = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      corr = $urandom; pert = $urandom; amp = $urandom; en = $urandom;
      if (n % 7 == 0) corr = 32'sh7fff_0000;
      if (n % 7 == 1) corr = 32'sh8000_ffff;
      e = longint'(corr) + (en ? longint'(pert) * longint'(amp) : 0);
      if (e > 64'sd2147483647) begin e = 64'sd2147483647; nsat++; end
      if (e < -64'sd2147483648) begin e = -64'sd2147483648; nsat++; end
      @(posedge clk); #1;
      checks++;
      if (longint'(sum) != e) begin
        failures++;
        if (failures < 10) $display("FAIL corr %0d pert %0d amp %0d en %0d: got %0d exp %0d", corr, pert, amp, en, sum, e);
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
