// dopp_cancel_top: all-digital Doppler-cancellation PLL for a short fiber link,
// with a built-in disturbance-rejection test.
//
// Signal path, one sample per 122.88 MHz clock:
//   adc_data -> cplx_mixer (x NCO_demod) -> c2r (real part) -> fir_lp
//            -> pi_ctrl -> [split: d2r capture] -> pert_adder (+ NCO_pert)
//            -> NCO_out frequency offset -> dac_data
// The beatnote of the fiber interferometer (220 MHz) reaches the ADC directly
// and is undersampled at 2*fclock - 220 MHz = 25.76 MHz; NCO_demod runs there
// and the real part of the product, low-pass filtered, is the cosine phase
// detector. The PI output is a frequency offset for NCO_out at 12.88 MHz,
// whose DAC image at fclock - 12.88 MHz = 110 MHz is picked by an external
// band-pass filter to drive the acousto-optic modulator. For the rejection
// test, NCO_pert adds a sinusoidal frequency modulation after the PI, and d2r
// records the PI output so its response can be compared in open loop
// (kp = ki = 0) and in closed loop.
//
// Interface: converter samples (adc_data in, dac_data out, signed); run-time
// settings a processor would write (oscillator increments f/fclock*2^32, PI
// gains, perturbation amplitude/enable, capture control); capture read port;
// monitors of the phase error, of the PI output and of the output
// oscillator's phase accumulator.
// Timing: from adc_data to a change in the NCO_out increment the pipeline is
// 2 (mixer) + 1 (c2r) + 2 (FIR registers) + 2 (PI) + 1 (adder) clocks; the
// accumulator then moves on the next clock and the CORDIC plus rounding add
// 18 clocks to dac_data. With the FIR group delay of 10 samples the loop
// delay is about 37 clocks (301 ns), inside the 345 ns of digital delay
// reported for the original platform.
// The block order follows the published loop diagram; widths, filter,
// oscillator internals and the control ports are this design's choices.
module dopp_cancel_top
  import dopp_pkg::*;
#(
  parameter int D2R_DEPTH = 16384,
  localparam int D2R_AW   = $clog2(D2R_DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst,
  // converters
  input  logic signed [ADC_W-1:0]   adc_data,
  output logic signed [DAC_W-1:0]   dac_data,
  // oscillator settings
  input  logic [ACC_W-1:0]          pinc_demod,
  input  logic [ACC_W-1:0]          pinc_out,
  input  logic [ACC_W-1:0]          pinc_pert,
  // PI settings
  input  logic signed [GAIN_W-1:0]  kp,
  input  logic signed [GAIN_W-1:0]  ki,
  input  logic                      int_clr,
  // perturbation
  input  logic [15:0]               pert_amp,
  input  logic                      pert_en,
  // correction capture
  input  logic                      d2r_start,
  input  logic [15:0]               d2r_decim,
  output logic                      d2r_busy,
  output logic                      d2r_done,
  input  logic [D2R_AW-1:0]         d2r_rd_addr,
  output logic [CORR_W-1:0]         d2r_rd_data,
  // monitors
  output logic signed [ERR_W-1:0]   err_mon,
  output logic signed [CORR_W-1:0]  corr_mon,
  output logic [ACC_W-1:0]          out_phase_mon
);
  logic signed [SIN_W-1:0]         demod_cos, demod_sin;
  logic signed [SIN_W-1:0]         pert_cos, pert_sin;
  logic signed [DAC_W-1:0]         out_sin;
  logic signed [ADC_W+SIN_W-1:0]   mix_i, mix_q;
  logic signed [ERR_W-1:0]         c2r_out, fir_out;
  logic signed [CORR_W-1:0]        pi_out, corr_total;
  logic [ACC_W-1:0]                demod_phase, pert_phase, out_phase;
  logic                            unused;

  assign unused = ^{demod_phase, pert_phase, pert_cos, out_sin};

  nco #(.ACC_BITS(ACC_W), .OUT_BITS(SIN_W)) u_nco_demod (
    .clk, .rst, .pinc(pinc_demod), .pinc_offset('0),
    .phase(demod_phase), .cos_o(demod_cos), .sin_o(demod_sin));

  cplx_mixer #(.IN_BITS(ADC_W), .LO_BITS(SIN_W)) u_mixer (
    .clk, .rst, .adc(adc_data), .lo_cos(demod_cos), .lo_sin(demod_sin),
    .prod_i(mix_i), .prod_q(mix_q));

  c2r #(.IN_BITS(ADC_W+SIN_W), .OUT_BITS(ERR_W), .SHIFT(SIN_W-1)) u_c2r (
    .clk, .rst, .in_re(mix_i), .in_im(mix_q), .out(c2r_out));

  fir_lp u_fir (.clk, .rst, .din(c2r_out), .dout(fir_out));

  pi_ctrl u_pi (.clk, .rst, .err(fir_out), .kp, .ki, .int_clr, .corr(pi_out));

  // split: the PI output goes both to the capture RAM and to the adder
  d2r #(.DATA_BITS(CORR_W), .DEPTH(D2R_DEPTH), .DEC_BITS(16)) u_d2r_corr (
    .clk, .rst, .din(pi_out), .start(d2r_start), .decim(d2r_decim),
    .busy(d2r_busy), .done(d2r_done), .rd_addr(d2r_rd_addr), .rd_data(d2r_rd_data));

  nco #(.ACC_BITS(ACC_W), .OUT_BITS(SIN_W)) u_nco_pert (
    .clk, .rst, .pinc(pinc_pert), .pinc_offset('0),
    .phase(pert_phase), .cos_o(pert_cos), .sin_o(pert_sin));

  pert_adder u_adder (
    .clk, .rst, .corr(pi_out), .pert(pert_sin), .pert_amp, .pert_en, .sum(corr_total));

  nco #(.ACC_BITS(ACC_W), .OUT_BITS(DAC_W)) u_nco_out (
    .clk, .rst, .pinc(pinc_out), .pinc_offset(corr_total),
    .phase(out_phase), .cos_o(dac_data), .sin_o(out_sin));

  assign err_mon  = fir_out;
  assign corr_mon = pi_out;
  assign out_phase_mon = out_phase;   // NCO_out accumulator, leads dac_data by 18 clocks

endmodule
