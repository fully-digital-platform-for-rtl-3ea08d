// cplx_mixer: multiplies the real ADC sample by the complex demodulation
// oscillator.
//
// The ADC delivers the undersampled beatnote as a real signed word. It is
// multiplied by the conjugate reference exp(-j*phi_demod) = cos - j*sin,
// giving prod_i = adc*cos and prod_q = -adc*sin at full precision. The next
// stage (c2r) keeps the real part; keeping the product complex here mirrors
// the structure of the loop, where a complex oscillator feeds the mixer.
//
// Interface: adc, lo_cos, lo_sin in (signed); prod_i, prod_q out (signed,
// IN_BITS + LO_BITS wide).
// Timing: inputs registered, then products registered: latency 2 clocks.
// The sign convention and register placement are this design's choices.
module cplx_mixer
  import dopp_pkg::*;
#(
  parameter int IN_BITS = ADC_W,
  parameter int LO_BITS = SIN_W
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic signed [IN_BITS-1:0]          adc,
  input  logic signed [LO_BITS-1:0]          lo_cos,
  input  logic signed [LO_BITS-1:0]          lo_sin,
  output logic signed [IN_BITS+LO_BITS-1:0]  prod_i,
  output logic signed [IN_BITS+LO_BITS-1:0]  prod_q
);
  logic signed [IN_BITS-1:0] adc_r;
  logic signed [LO_BITS-1:0] cos_r, sin_r;

  always_ff @(posedge clk) begin
    if (rst) begin
      adc_r  <= '0; cos_r <= '0; sin_r <= '0;
      prod_i <= '0; prod_q <= '0;
    end else begin
      adc_r  <= adc;
      cos_r  <= lo_cos;
      sin_r  <= lo_sin;
      prod_i <= adc_r * cos_r;
      prod_q <= -(adc_r * sin_r);
    end
  end

endmodule
