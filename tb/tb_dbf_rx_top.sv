// tb_dbf_rx_top -- end-to-end test of the beamforming back-end at its
// default size (4 channels, 8 phases, 1024-clock energy window).
//
// A plane wave at a 300 MHz IF (1966.08 MS/s per rail) falls on a 4-element
// uniform linear array with 0.75-wavelength spacing.  Each channel's front
// end is given a gain and phase error; the calibration constants undo it,
// and the weights steer the beam to +20 degrees.  For each arrival angle
// the array factor scan:
//   * checks every beam sample of every phase bit-exactly against an
//     integer reference model (calibrate, round, saturate, weight, sum),
//     and the 4-clock latency, with random bubbles in adc_valid;
//   * checks the window energy bit-exactly against the sum of the reference
//     beam powers, and its arrival 2 clocks after the window's last word;
//   * compares the normalised energy with the theoretical array factor
//     |sum_i exp(j*2*pi*0.75*i*(sin(theta) - sin(20 deg)))|^2 / 16:
//     within 0.5 dB where the pattern is above -12 dB, below -18 dB at the
//     predicted nulls, and the peak at 20 degrees.
// Further segments run the beam with calibration bypassed (identity
// constants), which must lose energy at 20 degrees, and with overdriven
// inputs and large weights, which must raise both clip flags.
// Mechanisms counted (each must occur): calibration correcting a sample,
// all 8 lanes checked, valid bubbles, energy windows, energy clears,
// calibration clipping, beam clipping.
module tb_dbf_rx_top;
  import dbf_pkg::*;

  localparam int    NCH = 4;
  localparam int    NPH = 8;
  localparam int    ACC = 1024;
  localparam real   PI  = 3.14159265358979;
  localparam real   FS  = 1966.08e6;
  localparam real   FIF = 300.0e6;
  localparam real   D   = 0.75;              // element spacing, wavelengths
  localparam real   TH0 = 20.0;              // look direction, degrees

  logic        clk = 1'b0;
  logic        rst = 1'b1;
  logic        adc_valid = 1'b0;
  sample_t     adc [NPH][NCH];
  coef_t       cal [NCH];
  coef_t       w   [NCH];
  logic        energy_clear = 1'b0;
  logic        beam_valid;
  beam_t       beam [NPH];
  logic        cal_sat, bf_sat;
  logic        energy_valid;
  logic [63:0] energy;

  dbf_rx_top dut (.*);

  always #5 clk = ~clk;

  // front-end errors of the four channels
  real gain [NCH] = '{1.0, 0.8, 1.2, 0.9};
  real phs  [NCH] = '{0.0, 30.0, -45.0, 60.0};   // degrees

  int checks = 0, failures = 0, cyc = 0;
  int n_calfix = 0, n_lane = 0, n_bubble = 0, n_win = 0, n_clear = 0;
  int n_calsat = 0, n_bfsat = 0;
  longint ksamp = 0;

  typedef struct { longint re [NPH]; longint im [NPH]; bit cs, bs; int due; } exp_t;
  exp_t q[$];
  longint eacc;
  int     ecnt;
  longint e_exp;
  int     e_due;

  function automatic longint rs(input longint v, input int bits, output bit clipped);
    longint r, hi, lo;
    hi = (64'sd1 <<< (bits - 1)) - 1;
    lo = -(64'sd1 <<< (bits - 1));
    r = (v + 64'sd8192) >>> 14;
    clipped = 1'b0;
    if (r > hi) begin r = hi; clipped = 1'b1; end
    if (r < lo) begin r = lo; clipped = 1'b1; end
    return r;
  endfunction

  function automatic logic signed [15:0] q16(input real v);
    real r;
    r = (v >= 0.0) ? v + 0.5 : v - 0.5;
    if (r > 32767.0)  r = 32767.0;
    if (r < -32768.0) r = -32768.0;
    return 16'($rtoi(r));
  endfunction

  function automatic coef_t polar_coef(input real mag, input real deg);
    coef_t c;
    c.re = q16(mag * 16384.0 * $cos(deg * PI / 180.0));
    c.im = q16(mag * 16384.0 * $sin(deg * PI / 180.0));
    return c;
  endfunction

  // Compare beam outputs due this clock; compare the energy result.
  task automatic check_outputs();
    if (q.size() > 0 && q[0].due == cyc) begin
      exp_t e;
      bit   bad;
      e = q.pop_front();
      bad = !beam_valid || (cal_sat != e.cs) || (bf_sat != e.bs);
      for (int p = 0; p < NPH; p++) begin
        checks++;
        n_lane++;
        if (bad || beam[p].re != 18'(e.re[p]) || beam[p].im != 18'(e.im[p])) begin
          failures++;
          if (failures < 10)
            $display("BEAM MISMATCH cyc %0d phase %0d: got v=%b %0d %0d cs=%b bs=%b exp %0d %0d cs=%b bs=%b",
                     cyc, p, beam_valid, beam[p].re, beam[p].im, cal_sat, bf_sat,
                     e.re[p], e.im[p], e.cs, e.bs);
        end
      end
      if (cal_sat) n_calsat++;
      if (bf_sat)  n_bfsat++;
    end else begin
      checks++;
      if (beam_valid) begin failures++; $display("UNEXPECTED beam_valid at %0d", cyc); end
    end
    if (e_due == cyc) begin
      checks++;
      n_win++;
      if (!energy_valid || energy != 64'(e_exp)) begin
        failures++;
        $display("ENERGY MISMATCH cyc %0d: got v=%b %0d exp %0d", cyc, energy_valid, energy, e_exp);
      end
      e_due = -1;
    end else if (energy_valid) begin
      checks++;
      failures++;
      $display("UNEXPECTED energy_valid at %0d", cyc);
    end
  endtask

  task automatic tick();
    @(negedge clk);
    cyc++;
    check_outputs();
  endtask

  // Drive one clock of samples from a plane wave at theta with amplitude amp
  // (or a bubble), and queue the reference result.
  task automatic drive(input real theta, input real amp, input bit valid);
    adc_valid = valid;
    if (!valid) begin
      n_bubble++;
      return;
    end
    begin
      exp_t e;
      bit   c1, c2;
      longint sr, si;
      longint yr [NCH];
      longint yi [NCH];
      e.cs = 1'b0;
      e.bs = 1'b0;
      for (int p = 0; p < NPH; p++) begin
        for (int i = 0; i < NCH; i++) begin
          real ph;
          ph = 2.0 * PI * FIF * real'(ksamp) / FS
             + 2.0 * PI * D * i * $sin(theta * PI / 180.0)
             + phs[i] * PI / 180.0;
          adc[p][i].re = q16(amp * gain[i] * $cos(ph));
          adc[p][i].im = q16(amp * gain[i] * $sin(ph));
          yr[i] = rs(longint'(adc[p][i].re) * longint'(cal[i].re)
                   - longint'(adc[p][i].im) * longint'(cal[i].im), 16, c1);
          yi[i] = rs(longint'(adc[p][i].re) * longint'(cal[i].im)
                   + longint'(adc[p][i].im) * longint'(cal[i].re), 16, c2);
          e.cs |= c1 | c2;
          if (yr[i] != longint'(adc[p][i].re) || yi[i] != longint'(adc[p][i].im)) n_calfix++;
        end
        sr = 0;
        si = 0;
        for (int i = 0; i < NCH; i++) begin
          sr += yr[i] * longint'(w[i].re) - yi[i] * longint'(w[i].im);
          si += yr[i] * longint'(w[i].im) + yi[i] * longint'(w[i].re);
        end
        e.re[p] = rs(sr, 18, c1);
        e.im[p] = rs(si, 18, c2);
        e.bs |= c1 | c2;
        ksamp++;
      end
      e.due = cyc + 4;
      // energy reference
      for (int p = 0; p < NPH; p++) eacc += e.re[p] * e.re[p] + e.im[p] * e.im[p];
      ecnt++;
      if (ecnt == ACC) begin
        e_exp = eacc;
        e_due = cyc + 6;
        eacc  = 0;
        ecnt  = 0;
      end
      q.push_back(e);
    end
  endtask

  // Drain the pipeline, clear the energy window.
  task automatic restart_window();
    drive(0.0, 0.0, 1'b0);
    repeat (8) tick();
    energy_clear = 1'b1;
    tick();
    energy_clear = 1'b0;
    n_clear++;
    eacc = 0;
    ecnt = 0;
  endtask

  // One energy measurement at angle theta: ACC valid clocks with bubbles.
  task automatic measure(input real theta, input real amp, output longint en);
    int got;
    restart_window();
    got = 0;
    while (got < ACC) begin
      bit v;
      v = ($urandom_range(15) != 0);
      drive(theta, amp, v);
      if (v) got++;
      tick();
    end
    drive(0.0, 0.0, 1'b0);
    while (e_due >= 0) tick();
    en = e_exp;
  endtask

  function automatic real af_db(input real theta);
    real re, im, u;
    re = 0.0;
    im = 0.0;
    u = 2.0 * PI * D * ($sin(theta * PI / 180.0) - $sin(TH0 * PI / 180.0));
    for (int i = 0; i < NCH; i++) begin
      re += $cos(u * i);
      im += $sin(u * i);
    end
    return 10.0 * $log10((re * re + im * im) / 16.0 + 1.0e-12);
  endfunction

  initial begin : stim
    real    angles [14];
    longint en, e_ref, e_uncal;
    real    s0;
    e_due = -1;
    eacc  = 0;
    ecnt  = 0;
    for (int p = 0; p < NPH; p++)
      for (int i = 0; i < NCH; i++) adc[p][i] = '0;
    for (int i = 0; i < NCH; i++) begin
      cal[i] = polar_coef(1.0 / gain[i], -phs[i]);
      w[i]   = polar_coef(1.0, -360.0 * D * i * $sin(TH0 * PI / 180.0));
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // reference: the look direction itself
    measure(TH0, 6000.0, e_ref);
    $display("energy at %0.1f deg: %0d", TH0, e_ref);

    // array factor scan, including the predicted nulls
    s0 = $sin(TH0 * PI / 180.0);
    angles = '{-60.0, -50.0, -30.0, -10.0, 5.0, 10.0, 15.0, 25.0, 30.0, 40.0, 60.0,
               $asin(s0 - 1.0 / 3.0) * 180.0 / PI,
               $asin(s0 - 2.0 / 3.0) * 180.0 / PI,
               $asin(s0 + 1.0 / 3.0) * 180.0 / PI};
    for (int a = 0; a < 14; a++) begin
      real db, th;
      th = angles[a];
      measure(th, 6000.0, en);
      db = 10.0 * $log10(real'(en) / real'(e_ref) + 1.0e-12);
      $display("angle %7.2f deg: measured %7.2f dB, theory %7.2f dB", th, db, af_db(th));
      checks++;
      if (af_db(th) > -12.0) begin
        if (db > af_db(th) + 0.5 || db < af_db(th) - 0.5) begin
          failures++;
          $display("  array factor off by more than 0.5 dB");
        end
      end else if (af_db(th) < -30.0) begin
        if (db > -18.0) begin failures++; $display("  null not deep enough"); end
      end
      checks++;
      if (en >= e_ref) begin failures++; $display("  not below the 20 deg peak"); end
    end

    // calibration bypassed: the mismatched channels no longer add coherently
    for (int i = 0; i < NCH; i++) cal[i] = polar_coef(1.0, 0.0);
    measure(TH0, 6000.0 / 1.2, e_uncal);
    $display("uncalibrated energy at %0.1f deg: %0d (%0.2f dB)", TH0, e_uncal,
             10.0 * $log10(real'(e_uncal) / real'(e_ref)));
    checks++;
    if (real'(e_uncal) > 0.8 * real'(e_ref)) begin
      failures++;
      $display("calibration made no difference");
    end

    // overdrive: clipping in the calibration multipliers and the beam sum
    for (int i = 0; i < NCH; i++) begin
      cal[i] = polar_coef(1.5 / gain[i], -phs[i]);
      w[i]   = polar_coef(1.5, -360.0 * D * i * $sin(TH0 * PI / 180.0));
    end
    measure(TH0, 26000.0, en);

    drive(0.0, 0.0, 1'b0);
    repeat (8) tick();
    checks++;
    if (q.size() != 0) begin failures++; $display("beam words never came out"); end

    $display("mechanisms: calibration corrections %0d, lane samples checked %0d, bubbles %0d,",
             n_calfix, n_lane, n_bubble);
    $display("            energy windows %0d, clears %0d, cal clips %0d, beam clips %0d",
             n_win, n_clear, n_calsat, n_bfsat);
    checks++;
    if (n_calfix == 0 || n_lane == 0 || n_bubble == 0 || n_win == 0 || n_clear == 0 ||
        n_calsat == 0 || n_bfsat == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
