// cal_cmul -- calibration complex multiplier for one channel in one
// polyphase lane.
//
// Computes y = x * (alpha + j*beta), where x = I + jQ is one calibrated-to-be
// ADC sample pair and alpha + j*beta the channel's gain/phase correction
// constant.  One such multiplier sits at every phase of every channel: it
// removes the gain and phase mismatch of the channel's analog front-end
// relative to a reference receiver.  The constants are measured offline and
// held on the coef input; they may change at any time.
//
//   y.re = I*alpha - Q*beta          y.im = I*beta + Q*alpha
//
// The four 32-bit products are registered (stage 1); the sums are then
// rounded half up by COEF_FRAC bits, saturated to DATA_W and registered
// (stage 2).  Latency: 2 clocks; throughput: one sample pair per clock.
// out_valid follows in_valid with the same latency; sat pulses with a
// result that was clipped.
//
// Follows the paper: a complex multiplier per phase per channel, constants
// alpha_i + j*beta_i per channel.  This design's choice: the word widths,
// the rounding, the saturation and the two-stage pipeline.
module cal_cmul
  import dbf_pkg::*;
(
  input  logic    clk,
  input  logic    rst,        // synchronous, active high; clears valids
  input  logic    in_valid,
  input  sample_t x,
  input  coef_t   coef,       // alpha + j*beta, Q2.14
  output logic    out_valid,
  output sample_t y,
  output logic    sat         // y was clipped (qualified by out_valid)
);

  localparam int unsigned PW = DATA_W + COEF_W;      // product width
  localparam int unsigned SW = PW + 1;               // sum width

  logic signed [PW-1:0] p_rr, p_ii, p_ri, p_ir;
  logic                 v1;

  always_ff @(posedge clk) begin
    p_rr <= PW'(x.re) * PW'(coef.re);
    p_ii <= PW'(x.im) * PW'(coef.im);
    p_ri <= PW'(x.re) * PW'(coef.im);
    p_ir <= PW'(x.im) * PW'(coef.re);
  end

  function automatic logic [DATA_W:0] round_sat(input logic signed [SW-1:0] v);
    // returns {clipped, value}
    logic signed [SW-1:0] r;
    logic signed [SW-1:0] hi, lo;
    r  = (v + (SW'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    hi = SW'((1 <<< (DATA_W - 1)) - 1);
    lo = -(SW'(1) <<< (DATA_W - 1));
    if (r > hi)      return {1'b1, hi[DATA_W-1:0]};
    else if (r < lo) return {1'b1, lo[DATA_W-1:0]};
    else             return {1'b0, r[DATA_W-1:0]};
  endfunction

  logic [DATA_W:0] re_rs, im_rs;
  always_comb begin
    re_rs = round_sat(SW'(p_rr) - SW'(p_ii));
    im_rs = round_sat(SW'(p_ri) + SW'(p_ir));
  end

  always_ff @(posedge clk) begin
    y.re <= re_rs[DATA_W-1:0];
    y.im <= im_rs[DATA_W-1:0];
    sat  <= v1 & (re_rs[DATA_W] | im_rs[DATA_W]);
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
