// dopp_pkg: shared widths and constants of the digital Doppler-cancellation PLL.
//
// The sample clock is 122.88 MHz and every block takes one sample per clock.
// Converter widths (16-bit ADC, 14-bit DAC) and the default frequencies
// (f'_in = 25.76 MHz undersampled beatnote, f_out = 12.88 MHz correction
// oscillator) follow the hardware platform. Internal word sizes, the FIR
// coefficients and the CORDIC table are this design's own choices.
package dopp_pkg;

  // Converters
  localparam int ADC_W  = 16;
  localparam int DAC_W  = 14;

  // Oscillators: 32-bit phase accumulators, 16-bit signed sine/cosine
  localparam int ACC_W   = 32;
  localparam int PHASE_W = 20;   // phase bits fed to the CORDIC
  localparam int SIN_W   = 16;

  // Loop datapath
  localparam int ERR_W   = 16;   // C2R / FIR output
  localparam int GAIN_W  = 16;   // PI gains
  localparam int CORR_W  = 32;   // correction word (offset of the NCO_out increment)

  // Phase increments, round(f / 122.88 MHz * 2^32)
  localparam logic [ACC_W-1:0] PINC_25M76 = 32'd900377259;  // 25.76 MHz
  localparam logic [ACC_W-1:0] PINC_12M88 = 32'd450188629;  // 12.88 MHz

  // CORDIC: atan(2^-i) in units of 2^-PHASE_W turn
  localparam int CORDIC_N = 16;
  localparam int signed CORDIC_ATAN [CORDIC_N] = '{
    131072, 77376, 40884, 20753, 10417, 5213, 2607, 1304,
    652, 326, 163, 81, 41, 20, 10, 5};
  // Start vector: (2^15 - 1) / 1.64676 so the rotated vector ends near full scale
  localparam int CORDIC_X0 = 19898;

  // Low-pass FIR: 21-tap Hamming-windowed sinc, cutoff 5 MHz at 122.88 MS/s,
  // coefficients scaled so they sum to 2^15 (unity DC gain).
  localparam int FIR_NTAPS = 21;
  localparam int FIR_COEF_W = 16;
  localparam logic signed [FIR_COEF_W-1:0] FIR_COEFS [FIR_NTAPS] = '{
    16'sd62,   16'sd119,  16'sd261,  16'sd526,  16'sd928,  16'sd1448, 16'sd2038,
    16'sd2625, 16'sd3125, 16'sd3461, 16'sd3582, 16'sd3461, 16'sd3125, 16'sd2625,
    16'sd2038, 16'sd1448, 16'sd928,  16'sd526,  16'sd261,  16'sd119,  16'sd62};

endpackage
