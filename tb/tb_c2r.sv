// tb_c2r: checks that the real part is kept and scaled by 2^-15 with
// round-half-up and saturation to 16 bits, 1 clock after the input; the
// imaginary part must have no effect.
`timescale 1ns/1ps
module tb_c2r;
  logic clk = 0, rst = 1;
  logic signed [31:0] re, im;
  logic signed [15:0] out;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  c2r dut (.clk, .rst, .in_re(re), .in_im(im), .out);

  function automatic int model(input longint x);
    longint y;
    y = (x + 16384) >>> 15;      // floor((x + 2^14) / 2^15)
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    return int'(y);
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv;
    re = 0; im = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      case (n % 6)
        0: re = 32'sh7fff_ffff;
        1: re = 32'sh8000_0000;
        2: re = 32'sd16384;          // exactly half an LSB: rounds up
        3: re = -32'sd16384;         // -0.5 LSB: rounds up to 0
        default: re = $urandom >>> ($urandom % 16);
      endcase
      if ($urandom % 2) re = -re;
      im = $urandom;
      expv = model(longint'(re));
      @(posedge clk); #1;
      checks++;
      if (int'(out) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL in %0d got %0d exp %0d", re, out, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
