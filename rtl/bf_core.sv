// bf_core -- weight-and-sum digital beamformer for one polyphase lane.
//
// Forms one beam sample from the N_CH calibrated channel samples taken at
// the same instant:
//
//   b = sum_{i=0}^{N_CH-1} w_i * x_i         (complex, weights not conjugated)
//
// The weights w_i set the look direction: for a uniform linear array with
// spacing d and a plane wave from angle theta, channel i sees a phase of
// 2*pi*(d/lambda)*i*sin(theta); choosing w_i = exp(-j*2*pi*(d/lambda)*i*
// sin(theta0)) aligns the channels for a wave from theta0 so they add
// coherently.  Weights are Q2.14 and may change at any time.
//
// Stage 1 registers the 4*N_CH real products; stage 2 adds them across the
// channels, rounds half up by COEF_FRAC bits, saturates to BEAM_W and
// registers.  Latency: 2 clocks; one beam sample per clock.
//
// Follows the paper: a simple weight-and-sum beamformer on each of the 8
// phases.  This design's choice: widths, rounding, saturation, pipelining.
module bf_core
  import dbf_pkg::*;
#(
  parameter int unsigned N_CH = 4           // array elements
)(
  input  logic    clk,
  input  logic    rst,                      // synchronous, active high
  input  logic    in_valid,
  input  sample_t x [N_CH],                 // calibrated channel samples
  input  coef_t   w [N_CH],                 // beamforming weights, Q2.14
  output logic    out_valid,
  output beam_t   b,
  output logic    sat                       // b was clipped
);

  localparam int unsigned PW = DATA_W + COEF_W;
  localparam int unsigned SW = PW + 1 + $clog2(N_CH + 1);   // sum width

  logic signed [PW-1:0] p_rr [N_CH];
  logic signed [PW-1:0] p_ii [N_CH];
  logic signed [PW-1:0] p_ri [N_CH];
  logic signed [PW-1:0] p_ir [N_CH];
  logic                 v1;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_CH; i++) begin
      p_rr[i] <= PW'(x[i].re) * PW'(w[i].re);
      p_ii[i] <= PW'(x[i].im) * PW'(w[i].im);
      p_ri[i] <= PW'(x[i].re) * PW'(w[i].im);
      p_ir[i] <= PW'(x[i].im) * PW'(w[i].re);
    end
  end

  function automatic logic [BEAM_W:0] round_sat(input logic signed [SW-1:0] v);
    logic signed [SW-1:0] r;
    logic signed [SW-1:0] hi, lo;
    r  = (v + (SW'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    hi = SW'((1 <<< (BEAM_W - 1)) - 1);
    lo = -(SW'(1) <<< (BEAM_W - 1));
    if (r > hi)      return {1'b1, hi[BEAM_W-1:0]};
    else if (r < lo) return {1'b1, lo[BEAM_W-1:0]};
    else             return {1'b0, r[BEAM_W-1:0]};
  endfunction

  logic signed [SW-1:0] acc_re, acc_im;
  logic [BEAM_W:0]      re_rs, im_rs;
  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int i = 0; i < N_CH; i++) begin
      acc_re = acc_re + SW'(p_rr[i]) - SW'(p_ii[i]);
      acc_im = acc_im + SW'(p_ri[i]) + SW'(p_ir[i]);
    end
    re_rs = round_sat(acc_re);
    im_rs = round_sat(acc_im);
  end

  always_ff @(posedge clk) begin
    b.re <= re_rs[BEAM_W-1:0];
    b.im <= im_rs[BEAM_W-1:0];
    sat  <= v1 & (re_rs[BEAM_W] | im_rs[BEAM_W]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
