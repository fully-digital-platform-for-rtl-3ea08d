// tb_fir_lp: checks the low-pass FIR against a direct convolution computed
// here, sample by sample, for random input; then checks the impulse latency
// (coefficient 0 appears 2 clocks after the impulse), unity DC gain, and that
// a tone at 51.52 MHz (twice the 25.76 MHz demodulation frequency) is
// attenuated by more than 45 dB while a 1 MHz tone passes within 0.5 dB.
`timescale 1ns/1ps
module tb_fir_lp;
  import dopp_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  N  = FIR_NTAPS;
  logic clk = 0, rst = 1;
  logic signed [15:0] din, dout;
  int checks = 0, failures = 0;
  int xs [N];    // xs[0] newest input
  int yexp [$];

  always #4 clk = ~clk;

  fir_lp dut (.clk, .rst, .din, .dout);

  function automatic int conv();
    longint acc = 0;
    for (int k = 0; k < N; k++) acc += longint'(FIR_COEFS[k]) * longint'(xs[k]);
    acc = (acc + 16384) >>> 15;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  // drive one sample; the result for it is visible after the second clock edge
  task automatic push(input int v);
    din = 16'(v);
    for (int k = N-1; k > 0; k--) xs[k] = xs[k-1];
    xs[0] = v;
    yexp.push_back(conv());
    @(posedge clk); #1;
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real amp_hi, amp_lo;
    int peak;
    din = 0;
    for (int k = 0; k < N; k++) xs[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 1. random input vs convolution (2-clock latency)
    for (int n = 0; n < 3000; n++) begin
      push($urandom_range(0, 65535) - 32768);
      if (yexp.size() == 2) begin
        int e;
        e = yexp.pop_front();
        checks++;
        if (int'(dout) != e) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, dout, e);
        end
      end
    end
    // 2. impulse: coefficient k visible at clock k+2 after the impulse
    for (int n = 0; n < N + 4; n++) push(0);
    din = 16'sd32767;
    @(posedge clk); #1;
    din = 0;
    checks++;
    if (dout != 0) begin failures++; $display("FAIL output before latency"); end
    @(posedge clk); #1;
    for (int k = 0; k < N; k++) begin
      int e;
      e = int'((longint'(FIR_COEFS[k]) * 32767 + 16384) >>> 15);
      checks++;
      if (int'(dout) != e) begin failures++; $display("FAIL impulse tap %0d got %0d exp %0d", k, dout, e); end
      @(posedge clk); #1;
    end
    // 3. DC gain
    for (int n = 0; n < N + 4; n++) push(12345);
    checks++;
    if (dout < 12343 || dout > 12347) begin failures++; $display("FAIL DC gain: %0d", dout); end
    // 4. tones
    for (int pass = 0; pass < 2; pass++) begin
      real f;
      f = (pass == 0) ? 51.52e6 : 1.0e6;
      peak = 0;
      for (int n = 0; n < 2000; n++) begin
        push($rtoi(20000.0 * $cos(2.0 * PI * f / 122.88e6 * n)));
        if (n > 100 && (dout > peak)) peak = dout;
      end
      if (pass == 0) amp_hi = real'(peak); else amp_lo = real'(peak);
    end
    $display("51.52 MHz peak %0.0f, 1 MHz peak %0.0f (in 20000)", amp_hi, amp_lo);
    checks += 2;
    if (amp_hi > 20000.0 * 0.0056) begin failures++; $display("FAIL stopband"); end
    if (amp_lo < 20000.0 * 0.944 || amp_lo > 20000.0 * 1.06) begin failures++; $display("FAIL passband"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
