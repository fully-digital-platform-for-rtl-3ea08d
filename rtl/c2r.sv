// c2r: complex-to-real conversion with word-size reduction.
//
// Keeps the real part of the mixer product and brings it down to the FIR
// input width: arithmetic shift right by SHIFT with round-half-up, then
// saturation to OUT_BITS signed. The imaginary part is not used by the
// cosine demodulation and is dropped.
//
// Interface: in_re, in_im (signed, IN_BITS) in; out (signed, OUT_BITS).
// Timing: 1 clock.
// Taking the real part follows the demodulation scheme; the shift, rounding
// and saturation are this design's choices.
module c2r
  import dopp_pkg::*;
#(
  parameter int IN_BITS  = ADC_W + SIN_W,
  parameter int OUT_BITS = ERR_W,
  parameter int SHIFT    = SIN_W - 1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic signed [IN_BITS-1:0]   in_re,
  input  logic signed [IN_BITS-1:0]   in_im,
  output logic signed [OUT_BITS-1:0]  out
);
  localparam logic signed [IN_BITS:0] MAXV = (IN_BITS+1)'((64'sd1 <<< (OUT_BITS-1)) - 1);
  localparam logic signed [IN_BITS:0] MINV = -(IN_BITS+1)'(64'sd1 <<< (OUT_BITS-1));

  logic signed [IN_BITS:0] rounded;
  logic unused_im;

  assign unused_im = ^in_im;   // imaginary part intentionally discarded
  assign rounded   = ((IN_BITS+1)'(in_re) + (IN_BITS+1)'(64'sd1 <<< (SHIFT-1))) >>> SHIFT;

  always_ff @(posedge clk) begin
    if (rst)                 out <= '0;
    else if (rounded > MAXV) out <= OUT_BITS'(MAXV);
    else if (rounded < MINV) out <= OUT_BITS'(MINV);
    else                     out <= OUT_BITS'(rounded);
  end

endmodule
