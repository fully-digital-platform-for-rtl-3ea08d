// tb_dopp_cancel_top: end-to-end test of the Doppler-cancellation loop at the
// default parameters (16384-word capture RAM).
//
// A behavioural plant closes the loop around the design:
//  * reference loopback: the DAC word, 15 clocks later (converter delay), is
//    fed back to the ADC and demodulated at the output frequency 12.88 MHz;
//  * fiber link: the AOM double pass and the undersampling double the output
//    phase, so the ADC sees cos(2*phi_out - theta_fiber) at 25.76 MHz, with
//    phi_out delayed by the DAC pipeline plus 590 clocks of analog delay
//    (converters 125 ns, SAW filter 1.3 us, AOM 2.5 us, 2 x 90 m fiber 880 ns)
//    and theta_fiber a 2 kHz, 1.5 rad phase disturbance.
// Steps and what each checks:
//  1. latency: ADC step to the first change of the NCO_out phase step is
//     9 clocks, then 18 more to the DAC; with the FIR group delay (10) the
//     total must stay within the 345 ns (42 clocks) digital budget;
//  2. lock in reference loopback: the phase error settles near zero;
//  3. fiber link, open loop (kp = ki = 0): the error swings over most of its
//     range; closed loop: it stays within 20 % of the detector amplitude;
//  4. rejection measurement: a perturbation from NCO_pert is added to the
//     correction and the PI output is recorded in the capture RAM (decimated
//     by 5 at 3 kHz, by 1 at 960 kHz) and read back; its amplitude at f_pert,
//     relative to the injected one, is near 1 well inside the loop bandwidth
//     (the loop cancels the perturbation) and small far above it; in open
//     loop the captured PI output is zero.
// Each mechanism is counted and a mechanism never seen counts as a failure.
`timescale 1ns/1ps
module tb_dopp_cancel_top;
  import dopp_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real FS = 122.88e6;
  localparam int  CONV_DELAY   = 15;    // 125 ns ADC + DAC
  localparam int  DAC_PIPE     = 18;    // NCO_out accumulator to dac_data
  localparam int  ANALOG_DELAY = 590;   // 125 ns + 1.3 us + 2.5 us + 880 ns at 122.88 MHz
  localparam int  DEPTH        = 16384;

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
  // mechanism counters
  int n_latency = 0, n_lock_ref = 0, n_open_swing = 0, n_fiber_cancel = 0;
  int n_capture = 0, n_decim_capture = 0, n_track_low = 0, n_reject_high = 0;
  int n_open_capture = 0, n_int_clr = 0;

  // plant
  typedef enum logic [1:0] {PLANT_DIRECT, PLANT_LOOPBACK, PLANT_FIBER} plant_e;
  plant_e plant = PLANT_DIRECT;
  logic signed [15:0] direct_adc = 0;
  logic signed [13:0] dac_hist [64];
  logic [31:0] ph_hist [1024];
  int  wr = 0;
  real theta_amp = 0.0, theta_f = 2.0e3;
  longint cyc = 0;

  always #4.069 clk = ~clk;   // 122.88 MHz

  dopp_cancel_top dut (
    .clk, .rst, .adc_data, .dac_data, .pinc_demod, .pinc_out, .pinc_pert,
    .kp, .ki, .int_clr, .pert_amp, .pert_en, .d2r_start, .d2r_decim,
    .d2r_busy, .d2r_done, .d2r_rd_addr, .d2r_rd_data, .err_mon, .corr_mon,
    .out_phase_mon);

  // behavioural plant: drives adc_data right after each clock edge
  always @(posedge clk) begin
    logic [31:0] ph2;
    real theta, a;
    cyc <= cyc + 1;
    dac_hist[wr % 64] <= dac_data;
    ph_hist[wr % 1024] <= out_phase_mon;
    wr <= wr + 1;
    case (plant)
      PLANT_DIRECT:   adc_data <= direct_adc;
      PLANT_LOOPBACK: adc_data <= 16'(dac_hist[(wr + 64 - CONV_DELAY + 1) % 64]) <<< 2;
      default: begin
        ph2   = ph_hist[(wr + 1024 - (DAC_PIPE + ANALOG_DELAY) + 1) % 1024] << 1;
        theta = theta_amp * $sin(2.0 * PI * theta_f * real'(cyc) / FS);
        a     = 2.0 * PI * real'(ph2) / 4294967296.0 - theta;
        adc_data <= 16'($rtoi(30000.0 * $cos(a)));
      end
    endcase
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic clocks(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // peak-to-peak and max |err| over n clocks
  task automatic err_stats(input int n, output int pp, output int amax);
    int lo, hi;
    lo = 32767; hi = -32768; amax = 0;
    repeat (n) begin
      @(posedge clk); #1;
      if (err_mon < lo) lo = err_mon;
      if (err_mon > hi) hi = err_mon;
      if ((err_mon < 0 ? -err_mon : err_mon) > amax) amax = (err_mon < 0 ? -err_mon : err_mon);
    end
    pp = hi - lo;
  endtask

  // capture the PI output and return its amplitude at f (in correction units)
  task automatic capture_amp(input int decim, input real f, output real amp);
    real si, co, m, x, t;
    longint c0;
    d2r_decim = 16'(decim);
    d2r_start = 1;
    c0 = cyc;              // value of cyc while start is sampled
    clocks(1);
    d2r_start = 0;
    while (!d2r_done) clocks(1);
    n_capture++;
    if (decim > 0) n_decim_capture++;
    // mean first, then correlation
    m = 0.0;
    for (int k = 0; k < DEPTH; k++) begin
      d2r_rd_addr = 14'(k); clocks(1);
      m += real'(d2r_rd_data_s());
    end
    m /= DEPTH;
    si = 0.0; co = 0.0;
    for (int k = 0; k < DEPTH; k++) begin
      d2r_rd_addr = 14'(k); clocks(1);
      x = real'(d2r_rd_data_s()) - m;
      t = real'(c0 + 1 + longint'(k) * (decim + 1));
      si += x * $sin(2.0 * PI * f * t / FS);
      co += x * $cos(2.0 * PI * f * t / FS);
    end
    amp = 2.0 * $sqrt(si * si + co * co) / DEPTH;
  endtask

  function automatic int d2r_rd_data_s();
    return int'($signed(d2r_rd_data));
  endfunction

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pp, amax, lat, plat;
    logic [31:0] prev_ph;
    logic signed [13:0] pat [4];
    real amp, inj;
    pinc_demod = 0; pinc_out = 32'h4000_0000; pinc_pert = 0;
    kp = 0; ki = 0; int_clr = 0; pert_amp = 0; pert_en = 0;
    d2r_start = 0; d2r_decim = 0; d2r_rd_addr = 0;
    for (int i = 0; i < 64; i++) dac_hist[i] = 0;
    for (int i = 0; i < 1024; i++) ph_hist[i] = 0;
    clocks(5);
    rst = 0;

    // ---- 1. latency: DAC at fclock/4 (steepest steps), ADC step, kp max
    kp = 16'sd32767;
    clocks(100);
    for (int i = 0; i < 4; i++) begin pat[i] = dac_data; clocks(1); end
    direct_adc = 16'sd32767;     // enters adc_data at the next edge
    lat = -1; plat = -1;
    prev_ph = out_phase_mon;
    for (int n = 1; n <= 60 && lat < 0; n++) begin
      int d;
      clocks(1);
      // exact: first clock at which the NCO_out accumulator step differs from pinc_out
      if (plat < 0 && (out_phase_mon - prev_ph) != pinc_out) plat = n - 1;   // minus the plant register
      prev_ph = out_phase_mon;
      // at the DAC: the first deviating sample may sit on a flat part of the cosine
      d = int'(dac_data) - int'(pat[n % 4]);
      if (d > 4 || d < -4) lat = n - 1;
    end
    $display("ADC to NCO_out accumulator %0d clocks; + %0d to the DAC = %0d; + FIR group delay 10 = %0d clocks (%0.0f ns)",
             plat, DAC_PIPE, plat + DAC_PIPE, plat + DAC_PIPE + 10, real'(plat + DAC_PIPE + 10) / FS * 1e9);
    $display("first visible DAC change after %0d clocks", lat);
    check(plat == 9, "ADC to NCO_out accumulator is 9 clocks");
    check(lat == plat + DAC_PIPE || lat == plat + DAC_PIPE + 1, "DAC changes 18 clocks after the accumulator");
    check(plat + DAC_PIPE + 10 <= 42, "digital delay within 345 ns");
    if (plat > 0) n_latency++;

    // ---- 2. reference loopback at 12.88 MHz
    kp = 0; direct_adc = 0;
    pinc_out = PINC_12M88; pinc_demod = PINC_12M88;
    plant = PLANT_LOOPBACK;
    int_clr = 1; clocks(1); int_clr = 0; n_int_clr++;
    kp = 16'sd60; ki = 16'sd100;
    clocks(40000);
    err_stats(20000, pp, amax);
    $display("reference loopback: max |err| %0d (detector amplitude ~16383)", amax);
    check(amax < 800, "reference loopback locks");
    if (amax < 800) n_lock_ref++;

    // ---- 3. fiber link with phase disturbance, open then closed loop
    kp = 0; ki = 0;
    int_clr = 1; clocks(1); int_clr = 0; n_int_clr++;
    pinc_demod = PINC_25M76;
    theta_amp = 1.5;
    plant = PLANT_FIBER;
    clocks(2000);
    err_stats(123000, pp, amax);
    $display("fiber, open loop: err peak-to-peak %0d", pp);
    check(pp > 15000, "open loop: disturbance visible in the error");
    if (pp > 15000) n_open_swing++;
    kp = 16'sd18; ki = 16'sd180;
    clocks(150000);
    err_stats(123000, pp, amax);
    $display("fiber, closed loop: max |err| %0d (%0.3f of detector amplitude)", amax, real'(amax) / 15000.0);
    check(amax < 3000, "closed loop cancels the fiber disturbance");
    if (amax < 3000) n_fiber_cancel++;

    // ---- 4. disturbance-rejection measurement, no fiber noise
    theta_amp = 0.0;
    pert_amp = 16'd2; pert_en = 1;
    inj = 2.0 * 32767.0;
    // 4a. 3 kHz, decimation 5: 16384 * 5 clocks = two periods exactly
    pinc_pert = 32'd104858;
    clocks(100000);
    capture_amp(4, real'(pinc_pert) / 4294967296.0 * FS, amp);
    $display("f_pert 3 kHz: captured PI amplitude / injected = %0.3f", amp / inj);
    check(amp / inj > 0.8 && amp / inj < 1.3, "low-frequency perturbation tracked by the PI");
    if (amp / inj > 0.8 && amp / inj < 1.3) n_track_low++;
    // 4b. 960 kHz, no decimation: 128 periods
    pinc_pert = 32'd33554432;
    clocks(20000);
    capture_amp(0, 960.0e3, amp);
    $display("f_pert 960 kHz: captured PI amplitude / injected = %0.3f", amp / inj);
    check(amp / inj < 0.2, "high-frequency perturbation not followed by the loop");
    if (amp / inj < 0.2) n_reject_high++;
    // 4c. open loop: no PI gain, the PI output is zero
    kp = 0; ki = 0;
    int_clr = 1; clocks(1); int_clr = 0; n_int_clr++;
    clocks(100);
    capture_amp(0, 960.0e3, amp);
    $display("open loop: captured PI amplitude %0.3f", amp);
    check(amp == 0.0, "open loop: PI output zero");
    if (amp == 0.0) n_open_capture++;

    // ---- mechanism coverage
    $display("mechanisms: latency %0d, ref lock %0d, open swing %0d, fiber cancel %0d, captures %0d (decimated %0d), low-f track %0d, high-f reject %0d, open-loop capture %0d, integrator clears %0d",
             n_latency, n_lock_ref, n_open_swing, n_fiber_cancel, n_capture, n_decim_capture,
             n_track_low, n_reject_high, n_open_capture, n_int_clr);
    check(n_latency > 0 && n_lock_ref > 0 && n_open_swing > 0 && n_fiber_cancel > 0 &&
          n_capture > 0 && n_decim_capture > 0 && n_track_low > 0 && n_reject_high > 0 &&
          n_open_capture > 0 && n_int_clr > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
