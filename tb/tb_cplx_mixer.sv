// tb_cplx_mixer: random ADC and oscillator words; checks prod_i = adc*cos and
// prod_q = -adc*sin, 2 clocks after the inputs, including the extreme values.
`timescale 1ns/1ps
module tb_cplx_mixer;
  logic clk = 0, rst = 1;
  logic signed [15:0] adc, lc, ls;
  logic signed [31:0] pi_o, pq_o;
  longint ei [$], eq [$];
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  cplx_mixer dut (.clk, .rst, .adc, .lo_cos(lc), .lo_sin(ls), .prod_i(pi_o), .prod_q(pq_o));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adc = 0; lc = 0; ls = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 2000; n++) begin
      if (n < 4) begin
        adc = (n[0]) ? -16'sd32768 : 16'sd32767;
        lc  = (n[1]) ? -16'sd32767 : 16'sd32767;
        ls  = -lc;
      end else begin
        adc = $urandom; lc = $urandom; ls = $urandom;
      end
      ei.push_back(longint'(adc) * longint'(lc));
      eq.push_back(-(longint'(adc) * longint'(ls)));
      @(posedge clk); #1;
      if (ei.size() == 2) begin
        longint xi, xq;
        xi = ei.pop_front(); xq = eq.pop_front();
        checks += 2;
        if (longint'(pi_o) != xi) begin failures++; $display("FAIL I got %0d exp %0d", pi_o, xi); end
        if (longint'(pq_o) != xq) begin failures++; $display("FAIL Q got %0d exp %0d", pq_o, xq); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
