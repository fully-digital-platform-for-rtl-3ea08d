// tb_nco: self-checking test of the numerically controlled oscillator.
//
// Two instances run side by side: a 16-bit one (demodulation/perturbation
// width) and a 14-bit one (DAC width). The test checks that the accumulator
// advances by exactly pinc + pinc_offset each clock, that cos/sin match
// cos(2*pi*phase)/sin(2*pi*phase) of the accumulator value 17 (16-bit) or
// 18 (14-bit) clocks earlier within a few LSB, and that a frequency offset
// applied at pinc_offset moves the phase step on the next clock.
`timescale 1ns/1ps
module tb_nco;
  import dopp_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  LAT16 = CORDIC_N + 1;   // clocks from accumulator to output
  localparam int  LAT14 = CORDIC_N + 2;

  logic clk = 0, rst = 1;
  logic [31:0] pinc;
  logic signed [31:0] poff;
  logic [31:0] ph16, ph14;
  logic signed [15:0] c16, s16;
  logic signed [13:0] c14, s14;
  int checks = 0, failures = 0;
  logic [31:0] hist [$];
  logic [31:0] prev_ph;
  int cyc = 0;
  int maxerr = 0;

  always #4 clk = ~clk;

  nco #(.OUT_BITS(16)) dut16 (.clk, .rst, .pinc, .pinc_offset(poff), .phase(ph16), .cos_o(c16), .sin_o(s16));
  nco #(.OUT_BITS(14)) dut14 (.clk, .rst, .pinc, .pinc_offset(poff), .phase(ph14), .cos_o(c14), .sin_o(s14));

  task automatic check_val(input string what, input int got, input real expv, input int tol);
    int e;
    e = (got > $rtoi(expv)) ? got - $rtoi(expv) : $rtoi(expv) - got;
    checks++;
    if (e > maxerr) maxerr = e;
    if (e > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d expected %0.1f (cycle %0d)", what, got, expv, cyc);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pinc = PINC_12M88; poff = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // sweep through several frequencies, including one with an offset
    for (int seg = 0; seg < 4; seg++) begin
      case (seg)
        0: begin pinc = PINC_12M88; poff = 0; end
        1: begin pinc = PINC_25M76; poff = 0; end
        2: begin pinc = 32'd104858; poff = 32'sd7000000; end   // ~3 kHz + offset
        default: begin pinc = $urandom; poff = -32'sd123456789; end
      endcase
      @(posedge clk); #1;
      prev_ph = ph16;
      repeat (1000) begin
        @(posedge clk); #1;
        cyc++;
        // accumulator: exact step of pinc + poff
        checks++;
        if (ph16 != prev_ph + pinc + poff) begin
          failures++;
          if (failures < 10) $display("FAIL phase step %h -> %h", prev_ph, ph16);
        end
        prev_ph = ph16;
        hist.push_back(ph16);
        if (hist.size() > LAT14 + 1) void'(hist.pop_front());
        if (hist.size() == LAT14 + 1) begin
          real a16, a14;
          a16 = 2.0 * PI * real'(hist[LAT14 - LAT16]) / 4294967296.0;   // LAT16 samples before the newest
          a14 = 2.0 * PI * real'(hist[0]) / 4294967296.0;
          check_val("cos16", int'(c16), 32767.0 * $cos(a16), 12);
          check_val("sin16", int'(s16), 32767.0 * $sin(a16), 12);
          check_val("cos14", int'(c14), 8191.75 * $cos(a14), 4);
          check_val("sin14", int'(s14), 8191.75 * $sin(a14), 4);
        end
      end
      hist.delete();
    end
    $display("max abs error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
