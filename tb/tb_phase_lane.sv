// tb_phase_lane -- self-checking test of one polyphase lane.
//
// Random raw samples, calibration constants and weights (the constants are
// held for stretches of clocks, as software would hold them).  The
// reference first calibrates each channel, y_i = rs16(x_i * c_i / 2^14),
// then beamforms, b = rs18(sum w_i * y_i / 2^14), both computed here in
// 64-bit integers.  Checks data, the 4-clock latency and both clip flags.
module tb_phase_lane;
  import dbf_pkg::*;

  localparam int N = 4;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    in_valid = 1'b0;
  sample_t x   [N];
  coef_t   cal [N];
  coef_t   w   [N];
  logic    out_valid;
  beam_t   b;
  logic    cal_sat, bf_sat;

  int checks = 0, failures = 0, n_csat = 0, n_bsat = 0, cyc = 0;

  phase_lane #(.N_CH(N)) dut (.*);

  always #5 clk = ~clk;

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

  typedef struct { longint re, im; bit cs, bs; int due; } exp_t;
  exp_t q[$];

  initial begin : stim
    for (int i = 0; i < N; i++) begin x[i] = '0; cal[i] = '0; w[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 4006; n++) begin
      @(negedge clk);
      cyc++;
      if (q.size() > 0 && q[0].due == cyc) begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (!out_valid || b.re != 18'(e.re) || b.im != 18'(e.im) ||
            cal_sat != e.cs || bf_sat != e.bs) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH cyc %0d: got v=%b %0d %0d cs=%b bs=%b exp %0d %0d cs=%b bs=%b",
                     cyc, out_valid, b.re, b.im, cal_sat, bf_sat, e.re, e.im, e.cs, e.bs);
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("UNEXPECTED out_valid at %0d", cyc); end
      end
      // the weights are sampled two clocks after the calibration constants,
      // so the lane is drained before the constants change
      in_valid = (n < 4000) && (n % 50 < 48) && ($urandom_range(5) != 0);
      if (n % 50 == 0)
        for (int i = 0; i < N; i++) begin
          cal[i].re = 16'($signed($urandom_range(32767)) - 16384) + ((n % 200 == 100) ? 16'sh7000 : 16'sh0);
          cal[i].im = 16'($signed($urandom_range(16383)) - 8192);
          w[i].re   = 16'($signed($urandom_range(32767)) - 16384);
          w[i].im   = 16'($signed($urandom_range(32767)) - 16384);
        end
      for (int i = 0; i < N; i++) begin
        x[i].re = 16'($urandom);
        x[i].im = 16'($urandom);
      end
      if (in_valid) begin
        exp_t e;
        bit c1, c2;
        longint yr [N], yi [N];
        longint sr, si;
        e.cs = 1'b0;
        for (int i = 0; i < N; i++) begin
          yr[i] = rs(longint'(x[i].re) * longint'(cal[i].re) - longint'(x[i].im) * longint'(cal[i].im), 16, c1);
          yi[i] = rs(longint'(x[i].re) * longint'(cal[i].im) + longint'(x[i].im) * longint'(cal[i].re), 16, c2);
          e.cs |= c1 | c2;
        end
        sr = 0; si = 0;
        for (int i = 0; i < N; i++) begin
          sr += yr[i] * longint'(w[i].re) - yi[i] * longint'(w[i].im);
          si += yr[i] * longint'(w[i].im) + yi[i] * longint'(w[i].re);
        end
        e.re = rs(sr, 18, c1);
        e.im = rs(si, 18, c2);
        e.bs = c1 | c2;
        e.due = cyc + 4;
        if (e.cs) n_csat++;
        if (e.bs) n_bsat++;
        q.push_back(e);
      end
    end
    checks++;
    if (q.size() != 0) failures++;
    checks++;
    if (n_csat == 0 || n_bsat == 0) begin failures++; $display("a clip path was not exercised"); end
    $display("calibration clips: %0d, beam clips: %0d", n_csat, n_bsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
