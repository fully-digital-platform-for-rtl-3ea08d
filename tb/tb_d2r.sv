// tb_d2r: captures a counting stream with decimations 0 and 2, then reads the
// RAM back. Checks that sample k is din of clock (start + 1 + k*(decim+1)),
// that busy lasts (DEPTH-1)*(decim+1)+1 clocks, that done then stays high, that a
// start while busy is ignored, and the 1-clock read latency.
`timescale 1ns/1ps
module tb_d2r;
  localparam int DEPTH = 256;
  logic clk = 0, rst = 1;
  logic [31:0] din, rd_data;
  logic start;
  logic [15:0] decim;
  logic busy, done;
  logic [7:0] rd_addr;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign din = 32'(cyc) * 32'd7 + 32'h1234_0000;   // value tied to the clock count

  d2r #(.DATA_BITS(32), .DEPTH(DEPTH), .DEC_BITS(16)) dut (
    .clk, .rst, .din, .start, .decim, .busy, .done, .rd_addr, .rd_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; decim = 0; rd_addr = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int pass = 0; pass < 2; pass++) begin
      int c0, nbusy;
      decim = (pass == 0) ? 16'd0 : 16'd2;
      @(posedge clk); #1;
      start = 1;
      c0 = cyc;            // the edge that follows samples start
      @(posedge clk); #1;
      start = 0;
      nbusy = 0;
      while (busy) begin
        nbusy++;
        if (nbusy == 10) start = 1;     // ignored while busy
        if (nbusy == 11) start = 0;
        @(posedge clk); #1;
      end
      checks += 2;
      if (nbusy != (DEPTH - 1) * (decim + 1) + 1) begin failures++; $display("FAIL busy for %0d clocks", nbusy); end
      if (!done) begin failures++; $display("FAIL done not set"); end
      repeat (5) @(posedge clk);
      #1;
      checks++;
      if (!done || busy) begin failures++; $display("FAIL done not held"); end
      for (int k = 0; k < DEPTH; k++) begin
        logic [31:0] e;
        rd_addr = 8'(k);
        @(posedge clk); #1;
        e = 32'(c0 + 1 + k * (decim + 1)) * 32'd7 + 32'h1234_0000;
        checks++;
        if (rd_data != e) begin
          failures++;
          if (failures < 10) $display("FAIL pass %0d addr %0d got %h exp %h", pass, k, rd_data, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
