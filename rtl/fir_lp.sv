// fir_lp: low-pass FIR filter of the demodulated phase error.
//
// The real part of the mixer product holds the phase error near DC plus a
// term at twice the demodulation frequency. This filter removes the latter.
// It is a transposed direct-form FIR: each input sample is multiplied by all
// coefficients at once and the products are added into a chain of partial
// sums, so the critical path is one multiply and one add whatever NTAPS is.
// The output is the sum scaled back by 2^COEF_FRAC, rounded and saturated.
//
// Interface: din in, dout out, both DATA_BITS signed; coefficients are a
// parameter (default: 21-tap windowed sinc, 5 MHz cutoff at 122.88 MS/s,
// unity DC gain, from dopp_pkg).
// Timing: one sample per clock; an impulse at din shows at dout 2 clocks
// later for coefficient 0; group delay of the default filter is 10 samples.
// A FIR low-pass at this place follows the loop diagram; its length and
// coefficients are this design's choices.
module fir_lp
  import dopp_pkg::*;
#(
  parameter int NTAPS     = FIR_NTAPS,
  parameter int DATA_BITS = ERR_W,
  parameter int COEF_BITS = FIR_COEF_W,
  parameter int COEF_FRAC = 15,
  parameter logic signed [COEF_BITS-1:0] COEFS [NTAPS] = FIR_COEFS
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic signed [DATA_BITS-1:0]   din,
  output logic signed [DATA_BITS-1:0]   dout
);
  localparam int ACC_BITS = DATA_BITS + COEF_BITS + $clog2(NTAPS) + 1;
  localparam logic signed [ACC_BITS-1:0] MAXV = ACC_BITS'((64'sd1 <<< (DATA_BITS-1)) - 1);
  localparam logic signed [ACC_BITS-1:0] MINV = -ACC_BITS'(64'sd1 <<< (DATA_BITS-1));

  logic signed [DATA_BITS-1:0] x;
  logic signed [ACC_BITS-1:0]  acc [NTAPS];
  logic signed [ACC_BITS-1:0]  y;

  // acc[k] holds sum_{j>=k} c[j]*x[n-(j-k)]; acc[0] is the full output.
  always_ff @(posedge clk) begin
    if (rst) begin
      x <= '0;
      for (int k = 0; k < NTAPS; k++) acc[k] <= '0;
    end else begin
      x <= din;
      for (int k = 0; k < NTAPS - 1; k++)
        acc[k] <= acc[k+1] + ACC_BITS'(COEFS[k] * x);
      acc[NTAPS-1] <= ACC_BITS'(COEFS[NTAPS-1] * x);
    end
  end

  assign y = (acc[0] + ACC_BITS'(64'sd1 <<< (COEF_FRAC-1))) >>> COEF_FRAC;

  always_comb begin
    if (y > MAXV)      dout = DATA_BITS'(MAXV);
    else if (y < MINV) dout = DATA_BITS'(MINV);
    else               dout = DATA_BITS'(y);
  end

endmodule
