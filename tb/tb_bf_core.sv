// tb_bf_core -- self-checking test of the weight-and-sum beamformer.
//
// Drives random channel samples and random weights with gaps in in_valid.
// The reference, computed here in 64-bit integers, is
//   b = round_half_up(sum_i w_i * x_i / 2^14), saturated to 18 bits.
// Part of the run uses full-scale samples and weights near +-2 so that
// the clip path is exercised.  Checks the 2-clock latency and sat flag.
module tb_bf_core;
  import dbf_pkg::*;

  localparam int N = 4;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    in_valid = 1'b0;
  sample_t x [N];
  coef_t   w [N];
  logic    out_valid;
  beam_t   b;
  logic    sat;

  int checks = 0, failures = 0, n_sat = 0, cyc = 0;

  bf_core #(.N_CH(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic longint rs18(input longint v, output bit clipped);
    longint r;
    r = (v + 64'sd8192) >>> 14;
    clipped = 1'b0;
    if (r > 131071)  begin r = 131071;  clipped = 1'b1; end
    if (r < -131072) begin r = -131072; clipped = 1'b1; end
    return r;
  endfunction

  typedef struct { longint re, im; bit s; int due; } exp_t;
  exp_t q[$];

  initial begin : stim
    for (int i = 0; i < N; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 3004; n++) begin
      @(negedge clk);
      cyc++;
      if (q.size() > 0 && q[0].due == cyc) begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (!out_valid || b.re != 18'(e.re) || b.im != 18'(e.im) || sat != e.s) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH cyc %0d: got v=%b %0d %0d s=%b exp %0d %0d s=%b", cyc,
                     out_valid, b.re, b.im, sat, e.re, e.im, e.s);
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("UNEXPECTED out_valid at %0d", cyc); end
      end
      in_valid = (n < 3000) && ($urandom_range(4) != 0);
      for (int i = 0; i < N; i++) begin
        if (n < 1500) begin
          x[i].re = 16'($signed($urandom_range(16383)) - 8192);
          x[i].im = 16'($signed($urandom_range(16383)) - 8192);
          w[i].re = 16'($signed($urandom_range(32767)) - 16384);
          w[i].im = 16'($signed($urandom_range(32767)) - 16384);
        end else begin
          x[i].re = 16'($urandom);
          x[i].im = 16'($urandom);
          w[i].re = ($urandom_range(1) != 0) ? 16'sh7fff : 16'sh8000;
          w[i].im = 16'($urandom);
        end
      end
      if (in_valid) begin
        exp_t e;
        bit c1, c2;
        longint sr, si;
        sr = 0; si = 0;
        for (int i = 0; i < N; i++) begin
          sr += longint'(x[i].re) * longint'(w[i].re) - longint'(x[i].im) * longint'(w[i].im);
          si += longint'(x[i].re) * longint'(w[i].im) + longint'(x[i].im) * longint'(w[i].re);
        end
        e.re = rs18(sr, c1);
        e.im = rs18(si, c2);
        e.s  = c1 | c2;
        e.due = cyc + 2;
        if (e.s) n_sat++;
        q.push_back(e);
      end
    end
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
