// phase_lane -- one of the parallel polyphase beamforming lanes.
//
// The ADC streams are split into N_PHASE phases: in every fabric clock each
// channel delivers N_PHASE consecutive samples, and lane p always receives
// sample p of each group.  A lane holds everything one phase needs: a
// calibration complex multiplier (cal_cmul) on each of the N_CH channels
// followed by one weight-and-sum beamformer (bf_core).  All lanes use the
// same calibration constants and the same weights, because the weights
// only depend on the channel, not on the sampling phase.
//
// The weights are read two clocks after the calibration constants (when
// the calibrated samples reach bf_core), so a constant or weight change
// takes effect on whole samples only if it is made while no valid data is
// in flight; samples in the pipeline at a change may mix old and new.
//
// Latency: 4 clocks (2 in cal_cmul, 2 in bf_core); one beam sample per
// clock.  cal_sat / bf_sat pulse with an output whose calibration or
// beamforming stage clipped (cal_sat is aligned with the beam sample that
// the clipped calibrated sample went into).
//
// Follows the paper's back-end figure: per phase, one complex multiplier
// per channel feeding a digital beamforming block.
module phase_lane
  import dbf_pkg::*;
#(
  parameter int unsigned N_CH = 4
)(
  input  logic    clk,
  input  logic    rst,
  input  logic    in_valid,
  input  sample_t x    [N_CH],    // raw ADC I/Q samples of this phase
  input  coef_t   cal  [N_CH],    // alpha_i + j*beta_i
  input  coef_t   w    [N_CH],    // beamforming weights
  output logic    out_valid,
  output beam_t   b,
  output logic    cal_sat,
  output logic    bf_sat
);

  sample_t          xc      [N_CH];
  logic [N_CH-1:0]  cvalid;
  logic [N_CH-1:0]  csat;
  logic             csat_d1, csat_d2;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    cal_cmul u_cal (
      .clk, .rst,
      .in_valid  (in_valid),
      .x         (x[i]),
      .coef      (cal[i]),
      .out_valid (cvalid[i]),
      .y         (xc[i]),
      .sat       (csat[i])
    );
  end

  bf_core #(.N_CH(N_CH)) u_bf (
    .clk, .rst,
    .in_valid  (cvalid[0]),
    .x         (xc),
    .w         (w),
    .out_valid (out_valid),
    .b         (b),
    .sat       (bf_sat)
  );

  // Delay the calibration clip flag to line up with the beam output.
  always_ff @(posedge clk) begin
    csat_d1 <= |csat;
    csat_d2 <= csat_d1;
  end
  assign cal_sat = csat_d2;

  // All channel multipliers run in lock step.
  a_lockstep : assert property (@(posedge clk) disable iff (rst)
                                cvalid == '0 || cvalid == '1);

endmodule
