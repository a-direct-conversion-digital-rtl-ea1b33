// tb_cal_cmul -- self-checking test of the calibration complex multiplier.
//
// Drives random I/Q samples and random constants (including full-scale
// values that force clipping) with random gaps in in_valid, and compares
// every output with a reference computed here in 64-bit integer arithmetic:
// y = round_half_up((x * c) / 2^14), saturated to 16 bits.  Checks the
// 2-clock latency, the valid alignment and the clip flag.
module tb_cal_cmul;
  import dbf_pkg::*;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    in_valid = 1'b0;
  sample_t x = '0;
  coef_t   coef = '0;
  logic    out_valid;
  sample_t y;
  logic    sat;

  int checks = 0, failures = 0, n_sat = 0;

  cal_cmul dut (.*);

  always #5 clk = ~clk;

  function automatic longint rs16(input longint v, output bit clipped);
    longint r;
    r = (v + 64'sd8192) >>> 14;
    clipped = 1'b0;
    if (r > 32767)  begin r = 32767;  clipped = 1'b1; end
    if (r < -32768) begin r = -32768; clipped = 1'b1; end
    return r;
  endfunction

  typedef struct { longint re, im; bit s; int due; } exp_t;
  exp_t q[$];
  int cyc = 0;

  function automatic logic signed [15:0] rnd16(input bit big);
    if (big) return ($urandom_range(1) != 0) ? 16'sh7fff : 16'sh8000;
    return 16'($urandom);
  endfunction

  initial begin : stim
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 4004; n++) begin
      @(negedge clk);
      cyc++;
      // check outputs produced by earlier inputs
      if (q.size() > 0 && q[0].due == cyc) begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (!out_valid || y.re != 16'(e.re) || y.im != 16'(e.im) || sat != e.s) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH cyc %0d: got v=%b %0d %0d s=%b exp %0d %0d s=%b", cyc,
                     out_valid, y.re, y.im, sat, e.re, e.im, e.s);
        end
      end else begin
        checks++;
        if (out_valid) begin
          failures++;
          $display("UNEXPECTED out_valid at cyc %0d", cyc);
        end
      end
      // drive the next input
      in_valid = (n < 4000) && ($urandom_range(3) != 0);
      x.re    = rnd16($urandom_range(15) == 0);
      x.im    = rnd16($urandom_range(15) == 0);
      coef.re = (n < 2000) ? 16'($signed($urandom_range(32767)) - 16384) : rnd16($urandom_range(7) == 0);
      coef.im = (n < 2000) ? 16'($signed($urandom_range(32767)) - 16384) : rnd16($urandom_range(7) == 0);
      if (in_valid) begin
        exp_t e;
        bit c1, c2;
        longint xr, xi, ar, ai;
        xr = longint'(x.re);  xi = longint'(x.im);
        ar = longint'(coef.re); ai = longint'(coef.im);
        e.re  = rs16(xr * ar - xi * ai, c1);
        e.im  = rs16(xr * ai + xi * ar, c2);
        e.s   = c1 | c2;
        e.due = cyc + 2;
        if (e.s) n_sat++;
        q.push_back(e);
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0) failures++;
    checks++;
    if (n_sat == 0) begin failures++; $display("no clipping exercised"); end
    $display("clipped results: %0d", n_sat);
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
