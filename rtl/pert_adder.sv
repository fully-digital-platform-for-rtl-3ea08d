// pert_adder: injects the test perturbation into the loop correction.
//
// For the disturbance-rejection measurement a sinusoid from the perturbation
// oscillator, scaled by pert_amp, is added to the PI output before it reaches
// the output oscillator: sum = sat(corr + pert*pert_amp) when pert_en is set,
// sum = corr otherwise. Since the correction is a frequency offset, this
// frequency-modulates the output, like a disturbance in the fiber would.
//
// Interface: corr (CORR_BITS), pert (PERT_BITS, signed), pert_amp (AMP_BITS,
// unsigned), pert_en in; sum (CORR_BITS) out.
// Timing: 1 clock.
// The adder and its place follow the loop diagram; the amplitude multiplier
// and the saturation are this design's choices.
module pert_adder
  import dopp_pkg::*;
#(
  parameter int CORR_BITS = CORR_W,
  parameter int PERT_BITS = SIN_W,
  parameter int AMP_BITS  = 16
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic signed [CORR_BITS-1:0]   corr,
  input  logic signed [PERT_BITS-1:0]   pert,
  input  logic [AMP_BITS-1:0]           pert_amp,
  input  logic                          pert_en,
  output logic signed [CORR_BITS-1:0]   sum
);
  localparam int MB = PERT_BITS + AMP_BITS + 1;
  localparam int SB = ((MB > CORR_BITS) ? MB : CORR_BITS) + 1;
  localparam logic signed [SB-1:0] SMAX = SB'((65'sd1 <<< (CORR_BITS-1)) - 1);
  localparam logic signed [SB-1:0] SMIN = -SB'(65'sd1 <<< (CORR_BITS-1));

  logic signed [MB-1:0] scaled;
  logic signed [SB-1:0] s;

  assign scaled = pert_en ? MB'(pert * $signed({1'b0, pert_amp})) : '0;
  assign s      = SB'(corr) + SB'(scaled);

  always_ff @(posedge clk) begin
    if (rst)           sum <= '0;
    else if (s > SMAX) sum <= CORR_BITS'(SMAX);
    else if (s < SMIN) sum <= CORR_BITS'(SMIN);
    else               sum <= CORR_BITS'(s);
  end

endmodule
