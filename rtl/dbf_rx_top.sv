// dbf_rx_top -- digital back-end of a 4-element, 28 GHz direct-conversion
// digital beamforming array receiver.
//
// Each array element has its own I/Q front end; the I and Q rails are
// digitised by separate ADCs at 1966.08 MS/s.  The data-converter FIFOs
// (outside this module) hand the fabric N_PHASE = 8 consecutive samples of
// every rail per 245.76 MHz clock, all rails aligned to that one clock.
// This module takes those words and processes the 8 sampling phases in 8
// identical parallel lanes (phase_lane): per channel a calibration complex
// multiply by alpha_i + j*beta_i, then a weight-and-sum beamformer.  The
// 8 beam samples of each clock are output in time order (beam[0] first)
// and also fed to an energy meter (energy_acc) that reports the received
// energy over a window, used to plot the array factor while the array is
// rotated.
//
// Interface: adc[p][i] is sample p (p = 0 earliest) of channel i in the
// current clock, I in .re and Q in .im, qualified by adc_valid.  cal[i] and
// w[i] are the calibration constant and beamforming weight of channel i in
// Q2.14, written by software; they are shared by all lanes and are meant
// to be changed between measurements (see phase_lane for the timing).
// Timing: beam/beam_valid follow adc/adc_valid by 4 clocks; energy_valid
// pulses 2 clocks after the last beam word of a window of ACC_CYCLES valid
// clocks.  Throughput: 8 complex samples per channel per clock, i.e. the
// full 1966.08 MS/s of every rail.
//
// Follows the paper: 4 channels, 8 polyphase lanes, per-phase per-channel
// calibration multipliers, weight-and-sum beamforming on every phase,
// energy per direction.  This design's choice: word widths, rounding and
// saturation, pipelining, the energy window and the clip flags.
module dbf_rx_top
  import dbf_pkg::*;
#(
  parameter int unsigned N_CH       = 4,      // array elements (paper: 4)
  parameter int unsigned N_PHASE    = 8,      // polyphase lanes (paper: 8)
  parameter int unsigned ACC_CYCLES = 1024,   // energy window, clocks
  parameter int unsigned ENERGY_W   = 64
)(
  input  logic                clk,            // 245.76 MHz fabric clock
  input  logic                rst,            // synchronous, active high
  input  logic                adc_valid,
  input  sample_t             adc [N_PHASE][N_CH],
  input  coef_t               cal [N_CH],
  input  coef_t               w   [N_CH],
  input  logic                energy_clear,
  output logic                beam_valid,
  output beam_t               beam [N_PHASE],
  output logic                cal_sat,        // some calibrated sample clipped
  output logic                bf_sat,         // some beam sample clipped
  output logic                energy_valid,
  output logic [ENERGY_W-1:0] energy
);

  logic [N_PHASE-1:0] lvalid, lcal_sat, lbf_sat;

  for (genvar p = 0; p < N_PHASE; p++) begin : g_phase
    phase_lane #(.N_CH(N_CH)) u_lane (
      .clk, .rst,
      .in_valid  (adc_valid),
      .x         (adc[p]),
      .cal       (cal),
      .w         (w),
      .out_valid (lvalid[p]),
      .b         (beam[p]),
      .cal_sat   (lcal_sat[p]),
      .bf_sat    (lbf_sat[p])
    );
  end

  assign beam_valid = lvalid[0];
  assign cal_sat    = beam_valid & (|lcal_sat);
  assign bf_sat     = beam_valid & (|lbf_sat);

  energy_acc #(
    .N_PHASE    (N_PHASE),
    .ACC_CYCLES (ACC_CYCLES),
    .ENERGY_W   (ENERGY_W)
  ) u_energy (
    .clk, .rst,
    .clear        (energy_clear),
    .in_valid     (beam_valid),
    .b            (beam),
    .energy_valid (energy_valid),
    .energy       (energy)
  );

  a_lanes_lockstep : assert property (@(posedge clk) disable iff (rst)
                                      lvalid == '0 || lvalid == '1);

endmodule
