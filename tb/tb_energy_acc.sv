// tb_energy_acc -- self-checking test of the energy meter.
//
// Runs a small window (ACC_CYCLES = 16) with random beam words and random
// gaps in the valid stream, and checks each window result against the sum
// of re^2 + im^2 over all phases and the window's valid clocks, computed
// here.  Also checks that a result arrives exactly 2 clocks after the
// window's last valid clock, that nothing else pulses energy_valid, and
// that clear drops a partly filled window.
module tb_energy_acc;
  import dbf_pkg::*;

  localparam int NP = 8;
  localparam int AC = 16;

  logic        clk = 1'b0;
  logic        rst = 1'b1;
  logic        clear = 1'b0;
  logic        in_valid = 1'b0;
  beam_t       b [NP];
  logic        energy_valid;
  logic [63:0] energy;

  int checks = 0, failures = 0, cyc = 0, n_win = 0, n_clear = 0;

  energy_acc #(.N_PHASE(NP), .ACC_CYCLES(AC), .ENERGY_W(64)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { longint e; int due; } exp_t;
  exp_t   q[$];
  longint acc = 0;
  int     cnt = 0;

  initial begin : stim
    for (int p = 0; p < NP; p++) b[p] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      cyc++;
      checks++;
      if (q.size() > 0 && q[0].due == cyc) begin
        exp_t e;
        e = q.pop_front();
        if (!energy_valid || energy != 64'(e.e)) begin
          failures++;
          $display("MISMATCH cyc %0d: got v=%b %0d exp %0d", cyc, energy_valid, energy, e.e);
        end
      end else if (energy_valid) begin
        failures++;
        $display("UNEXPECTED energy_valid at %0d", cyc);
      end
      // drive
      clear    = (n % 700 == 350);
      in_valid = (n < 2990) && ($urandom_range(3) != 0);
      for (int p = 0; p < NP; p++) begin
        b[p].re = 18'($urandom);
        b[p].im = 18'($urandom);
      end
      if (clear) begin
        // clear also drops the clock still in the squaring stage, which
        // may be the last one of a window
        if (q.size() > 0 && q[$].due == cyc + 1) void'(q.pop_back());
        if (cnt != 0) n_clear++;
        acc = 0; cnt = 0;
      end else if (in_valid) begin
        for (int p = 0; p < NP; p++)
          acc += longint'(b[p].re) * longint'(b[p].re) + longint'(b[p].im) * longint'(b[p].im);
        cnt++;
        if (cnt == AC) begin
          exp_t e;
          e.e = acc; e.due = cyc + 2;
          q.push_back(e);
          n_win++;
          acc = 0; cnt = 0;
        end
      end
    end
    checks++;
    if (q.size() != 0) failures++;
    checks++;
    if (n_win < 10 || n_clear == 0) begin failures++; $display("too few windows or clears"); end
    $display("windows: %0d, clears of a partial window: %0d", n_win, n_clear);
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
