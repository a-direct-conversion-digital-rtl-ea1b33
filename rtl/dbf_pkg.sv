// dbf_pkg -- word formats shared by the digital beamforming back-end.
//
// Every signal in the datapath is a complex number carried as a packed
// struct of two signed two's-complement words (real part = I, imaginary
// part = Q).  Three formats are used:
//   * sample_t : one ADC word per I or Q rail, DATA_W bits, integer scale.
//   * coef_t   : a calibration constant or beamforming weight, COEF_W bits,
//                fixed point with COEF_FRAC fraction bits (Q2.14: range
//                [-2, 2) so a gain correction above unity is possible).
//   * beam_t   : a beam sample, BEAM_W bits, two guard bits above sample_t
//                so the coherent sum of four channels has headroom.
// The widths are this design's choice: the paper gives no word widths.
// DATA_W = 16 matches the 16-bit words in which the RF-SoC ADCs deliver
// their samples.  All narrowing steps round half up and saturate.
package dbf_pkg;

  localparam int unsigned DATA_W    = 16;
  localparam int unsigned COEF_W    = 16;
  localparam int unsigned COEF_FRAC = 14;
  localparam int unsigned BEAM_W    = DATA_W + 2;

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } sample_t;

  typedef struct packed {
    logic signed [COEF_W-1:0] re;
    logic signed [COEF_W-1:0] im;
  } coef_t;

  typedef struct packed {
    logic signed [BEAM_W-1:0] re;
    logic signed [BEAM_W-1:0] im;
  } beam_t;

endpackage
