// tb_rejection_sweep: disturbance-rejection curves of the closed loop, in the
// way they are measured on hardware, for four PI gain sets in the ratio
// 1 : 5 : 10 : 20, with f_pert swept from 3 kHz to 10.24 MHz.
//
// Plant: the fiber model of tb_dopp_cancel_top (phase doubling, 608 clocks
// from the NCO_out accumulator to the ADC, no fiber noise). For each point
// the perturbation oscillator is set to f_pert = fclk / M, the loop settles,
// the PI output is captured in the on-chip RAM and read back. The testbench
// knows the injected term P (it keeps its own copy of the NCO_pert
// accumulator) and fits the captured PI output C at f_pert. The rejection is
// |P + C| / |P|: the part of the injected frequency modulation that still
// reaches the output oscillator.
//
// Each point is compared with a discrete-time model of the loop,
//   L(z) = 2 * 2*pi * A/2^32 * H_fir(z) * (kp + ki/2^16 * z^-1/(1-z^-1))
//          * z^-1/(1-z^-1) * z^-D,   S = 1/(1+L),
// with the detector slope A = 15000 LSB/rad and D = 619 clocks. Checks:
// rejection matches the model within 2 dB up to 1 MHz; rejection below
// -10 dB at 3 kHz for the three highest gain sets; 0 +/- 1 dB at 3.84 and
// 10.24 MHz; the 3 kHz rejection improves with gain; the highest gain set
// shows an overshoot above 0 dB; the bandwidth (first point above -3 dB)
// does not decrease with gain.
`timescale 1ns/1ps
module tb_rejection_sweep;
  import dopp_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real FS = 122.88e6;
  localparam int  DAC_PIPE     = 18;
  localparam int  ANALOG_DELAY = 590;
  localparam int  DEPTH        = 16384;
  localparam int  NPTS         = 14;
  localparam int  NSETS        = 4;
  localparam real A_DET        = 15000.0;
  localparam int  D_LOOP       = 619;
  // f_pert = fclk / M, and the capture decimation giving whole periods
  localparam int  M     [NPTS] = '{40960, 24576, 12288, 6144, 4096, 3072, 2048, 1536, 1024, 512, 256, 128, 32, 12};
  localparam int  DEC   [NPTS] = '{4,     2,     2,     2,    0,    2,    0,    2,    0,    0,   0,   0,   0,  0};
  localparam int  GSCALE [NSETS] = '{1, 5, 10, 20};
  localparam int  KP0 = 2, KI0 = 20;

  logic clk = 0, rst = 1;
  logic signed [15:0] adc_data;
  logic signed [13:0] dac_data;
  logic [31:0] pinc_demod, pinc_out, pinc_pert;
  logic signed [15:0] kp, ki;
  logic int_clr, pert_en, d2r_start, d2r_busy, d2r_done;
  logic [15:0] pert_amp, d2r_decim;
  logic [13:0] d2r_rd_addr;
  logic [31:0] d2r_rd_data;
  logic signed [15:0] err_mon;
  logic signed [31:0] corr_mon;
  logic [31:0] out_phase_mon;

  int checks = 0, failures = 0;
  logic [31:0] ph_hist [1024];
  int wr = 0;
  longint cyc = 0;
  logic [31:0] pacc;                 // copy of the NCO_pert accumulator
  real rej_db [NSETS][NPTS];
  real mod_db [NSETS][NPTS];
  int  n_points = 0, n_overshoot = 0;

  always #4.069 clk = ~clk;

  dopp_cancel_top dut (
    .clk, .rst, .adc_data, .dac_data, .pinc_demod, .pinc_out, .pinc_pert,
    .kp, .ki, .int_clr, .pert_amp, .pert_en, .d2r_start, .d2r_decim,
    .d2r_busy, .d2r_done, .d2r_rd_addr, .d2r_rd_data, .err_mon, .corr_mon,
    .out_phase_mon);

  always @(posedge clk) begin
    logic [31:0] ph2;
    cyc <= cyc + 1;
    pacc <= rst ? 32'd0 : pacc + pinc_pert;
    ph_hist[wr % 1024] <= out_phase_mon;
    wr <= wr + 1;
    ph2 = ph_hist[(wr + 1024 - (DAC_PIPE + ANALOG_DELAY) + 1) % 1024] << 1;
    adc_data <= 16'($rtoi(30000.0 * $cos(2.0 * PI * real'(ph2) / 4294967296.0)));
  end

  task automatic clocks(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // model rejection in dB at angular frequency w (rad/clock)
  function automatic real model_db(input real w, input real kpr, input real kir);
    real hr, hi, pr, pi_, ir, ii, lr, li, tr, ti, mag, ph, den;
    hr = 0.0; hi = 0.0;
    for (int k = 0; k < FIR_NTAPS; k++) begin
      hr += real'(FIR_COEFS[k]) / 32768.0 * $cos(w * k);
      hi -= real'(FIR_COEFS[k]) / 32768.0 * $sin(w * k);
    end
    // z^-1/(1-z^-1) = 1/(z-1)
    den = ($cos(w) - 1.0) ** 2 + $sin(w) ** 2;
    ir = ($cos(w) - 1.0) / den; ii = -$sin(w) / den;
    // PI(z) = kp + ki/2^16 * I(z)
    pr = kpr + kir / 65536.0 * ir; pi_ = kir / 65536.0 * ii;
    // L = K * H * PI * I * exp(-j w D)
    tr = hr * pr - hi * pi_; ti = hr * pi_ + hi * pr;
    lr = tr * ir - ti * ii;  li = tr * ii + ti * ir;
    mag = 2.0 * 2.0 * PI * A_DET / 4294967296.0;
    tr = mag * (lr * $cos(w * D_LOOP) + li * $sin(w * D_LOOP));
    ti = mag * (li * $cos(w * D_LOOP) - lr * $sin(w * D_LOOP));
    // S = 1/(1+L)
    return -10.0 * $log10((1.0 + tr) ** 2 + ti ** 2);
  endfunction

  task automatic measure(input int decim, input real amp_inj, output real db);
    longint c0, n;
    logic [31:0] acc0, pinc;
    real w, pr, pim, cr, cim, pv, cv, ang, mc;
    real cbuf [DEPTH];
    pinc = pinc_pert;
    w = 2.0 * PI * real'(pinc) / 4294967296.0;
    d2r_decim = 16'(decim);
    d2r_start = 1;
    c0 = cyc; acc0 = pacc;
    clocks(1);
    d2r_start = 0;
    while (!d2r_done) clocks(1);
    mc = 0.0;
    for (int k = 0; k < DEPTH; k++) begin
      d2r_rd_addr = 14'(k); clocks(1);
      cbuf[k] = real'($signed(d2r_rd_data));
      mc += cbuf[k];
    end
    mc /= DEPTH;
    pr = 0.0; pim = 0.0; cr = 0.0; cim = 0.0;
    for (int k = 0; k < DEPTH; k++) begin
      logic [31:0] a;
      n = c0 + 1 + longint'(k) * (decim + 1);
      // injected term aligned with the PI output: sin of the accumulator 17 clocks earlier
      a = acc0 + 32'(pinc * 32'(n - 17 - c0));
      pv = amp_inj * $sin(2.0 * PI * real'(a) / 4294967296.0);
      cv = cbuf[k] - mc;
      ang = w * real'(n);
      pr += pv * $cos(ang); pim -= pv * $sin(ang);
      cr += cv * $cos(ang); cim -= cv * $sin(ang);
    end
    db = 10.0 * $log10(((pr + cr) ** 2 + (pim + cim) ** 2) / (pr ** 2 + pim ** 2));
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pinc_demod = PINC_25M76; pinc_out = PINC_12M88; pinc_pert = 0;
    kp = 0; ki = 0; int_clr = 0; pert_amp = 16'd1; pert_en = 0;
    d2r_start = 0; d2r_decim = 0; d2r_rd_addr = 0;
    for (int i = 0; i < 1024; i++) ph_hist[i] = 0;
    clocks(5);
    rst = 0;
    for (int s = 0; s < NSETS; s++) begin
      int bw_idx;
      kp = 16'(KP0 * GSCALE[s]); ki = 16'(KI0 * GSCALE[s]);
      int_clr = 1; clocks(1); int_clr = 0;
      pert_en = 0;
      clocks(60000);                 // lock
      pert_en = 1;
      $display("gain set x%0d (kp %0d, ki %0d)", GSCALE[s], kp, ki);
      bw_idx = -1;
      for (int p = 0; p < NPTS; p++) begin
        real db, f, md;
        pinc_pert = 32'($rtoi(4294967296.0 / M[p] + 0.5));
        f = real'(pinc_pert) / 4294967296.0 * FS;
        clocks(40000);               // settle at the new frequency
        measure(DEC[p], 32767.0 * real'(pert_amp), db);
        md = model_db(2.0 * PI * real'(pinc_pert) / 4294967296.0, real'(kp), real'(ki));
        rej_db[s][p] = db; mod_db[s][p] = md;
        n_points++;
        $display("  f_pert %10.1f Hz  rejection %7.2f dB  model %7.2f dB", f, db, md);
        if (f <= 1.0e6) check(db - md < 2.0 && md - db < 2.0, $sformatf("x%0d at %0.0f Hz: matches model", GSCALE[s], f));
        if (f > 3.0e6) check(db < 1.0 && db > -1.0, $sformatf("x%0d at %0.0f Hz: 0 dB far above bandwidth", GSCALE[s], f));
        if (bw_idx < 0 && db > -3.0) bw_idx = p;
        if (db > 0.5) n_overshoot++;
      end
      $display("  first point above -3 dB: %0.0f Hz", FS / M[bw_idx < 0 ? 0 : bw_idx]);
      if (s > 0) check(rej_db[s][0] < rej_db[s-1][0], $sformatf("x%0d rejects better at 3 kHz than the previous set", GSCALE[s]));
      if (s > 0) check(rej_db[s][0] < -10.0, $sformatf("x%0d rejection at 3 kHz below -10 dB", GSCALE[s]));
    end
    // bandwidth grows with gain: compare the -3 dB crossing of sets x1 and x20
    begin
      int b1, b20;
      b1 = NPTS; b20 = NPTS;
      for (int p = NPTS - 1; p >= 0; p--) begin
        if (rej_db[0][p] > -3.0) b1 = p;
        if (rej_db[NSETS-1][p] > -3.0) b20 = p;
      end
      check(b20 >= b1, "bandwidth does not decrease with gain");
    end
    check(n_overshoot > 0, "overshoot seen for a high gain set");
    check(n_points == NSETS * NPTS, "every point measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
