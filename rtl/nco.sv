// nco: numerically controlled oscillator (phase accumulator + CORDIC).
//
// Every clock the accumulator advances by pinc + pinc_offset (modulo 2^ACC_BITS),
// so the output frequency is (pinc + pinc_offset) / 2^ACC_BITS * fclock. The
// top PHASE_W bits of the accumulator feed cordic_sincos; its 16-bit result is
// rounded to OUT_BITS. The same module serves as the demodulation oscillator
// (cos and sin used), the perturbation oscillator (sin used) and the output
// oscillator, whose pinc_offset carries the loop correction, i.e. the loop
// acts on the output frequency.
//
// Interface: pinc (unsigned) and pinc_offset (signed) in; phase, cos_o, sin_o out.
// Timing: a change of pinc_offset moves the accumulator on the next clock;
// cos_o/sin_o lag the accumulator by CORDIC_N + 1 clocks (+1 for rounding
// when OUT_BITS < 16). The accumulator width and the CORDIC are this design's
// choices; the three oscillators and their roles come from the loop diagram.
module nco
  import dopp_pkg::*;
#(
  parameter int ACC_BITS = ACC_W,
  parameter int OUT_BITS = SIN_W
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [ACC_BITS-1:0]         pinc,
  input  logic signed [ACC_BITS-1:0]  pinc_offset,
  output logic [ACC_BITS-1:0]         phase,
  output logic signed [OUT_BITS-1:0]  cos_o,
  output logic signed [OUT_BITS-1:0]  sin_o
);
  logic signed [SIN_W-1:0] c16, s16;

  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + pinc + ACC_BITS'(pinc_offset);
  end

  cordic_sincos #(.PHASE_BITS(PHASE_W), .OUT_BITS(SIN_W)) u_cordic (
    .clk, .rst,
    .phase(phase[ACC_BITS-1 -: PHASE_W]),
    .cos_o(c16), .sin_o(s16)
  );

  if (OUT_BITS >= SIN_W) begin : g_full
    assign cos_o = OUT_BITS'(c16);
    assign sin_o = OUT_BITS'(s16);
  end else begin : g_round
    localparam int SH = SIN_W - OUT_BITS;
    // round half up, then clip: |c16| <= 2^15-1 so only the top can overflow
    function automatic logic signed [OUT_BITS-1:0] rnd(input logic signed [SIN_W-1:0] v);
      logic signed [SIN_W:0] t;
      t = (SIN_W+1)'(v) + (SIN_W+1)'(1 << (SH-1));
      t = t >>> SH;
      if (t > (SIN_W+1)'((1 << (OUT_BITS-1)) - 1)) return OUT_BITS'((1 << (OUT_BITS-1)) - 1);
      return OUT_BITS'(t);
    endfunction
    always_ff @(posedge clk) begin
      if (rst) begin cos_o <= '0; sin_o <= '0; end
      else begin cos_o <= rnd(c16); sin_o <= rnd(s16); end
    end
  end

endmodule
