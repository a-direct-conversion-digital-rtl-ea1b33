// energy_acc -- received-energy meter on the beamformer output.
//
// Each clock carries N_PHASE beam samples (one per polyphase lane).  The
// meter adds |b|^2 = re^2 + im^2 over all phases of a clock (stage 1,
// registered), then accumulates those sums over ACC_CYCLES valid clocks,
// i.e. over ACC_CYCLES*N_PHASE beam samples (stage 2).  When a window is
// complete it presents the window energy on `energy` with a one-clock
// `energy_valid` pulse and starts the next window at zero.  `clear` drops
// the window in progress (and anything in stage 1) and starts a new one;
// it is meant for the moment the look direction or the array changes.
//
// Timing: energy_valid rises 2 clocks after the clock that brought the
// last valid beam word of a window.  Invalid clocks are skipped, not
// counted.  The accumulator is ENERGY_W bits wide, which holds a window of
// full-scale samples as long as 2*BEAM_W + log2(N_PHASE*ACC_CYCLES) <=
// ENERGY_W; the 64-bit default covers windows up to 2^22 clocks.
//
// Follows the paper: the beamformed outputs of all phases are used to
// compute the received energy for each direction of arrival.  This
// design's choice: the window length, its default, and the clear input.
module energy_acc
  import dbf_pkg::BEAM_W, dbf_pkg::beam_t;
#(
  parameter int unsigned N_PHASE    = 8,
  parameter int unsigned ACC_CYCLES = 1024,
  parameter int unsigned ENERGY_W   = 64
)(
  input  logic                clk,
  input  logic                rst,
  input  logic                clear,
  input  logic                in_valid,
  input  beam_t               b [N_PHASE],
  output logic                energy_valid,
  output logic [ENERGY_W-1:0] energy
);

  localparam int unsigned SQ_W  = 2 * BEAM_W;                 // re^2 + im^2
  localparam int unsigned PWR_W = SQ_W + $clog2(N_PHASE + 1); // sum of phases
  localparam int unsigned CNT_W = $clog2(ACC_CYCLES + 1);

  logic [PWR_W-1:0]    pwr_c, pwr;
  logic                v1;
  logic [ENERGY_W-1:0] acc;
  logic [CNT_W-1:0]    cnt;

  always_comb begin
    pwr_c = '0;
    for (int p = 0; p < N_PHASE; p++) begin
      logic signed [SQ_W-1:0] sq_re, sq_im;
      sq_re = SQ_W'(b[p].re) * SQ_W'(b[p].re);
      sq_im = SQ_W'(b[p].im) * SQ_W'(b[p].im);
      pwr_c = pwr_c + PWR_W'(unsigned'(sq_re)) + PWR_W'(unsigned'(sq_im));
    end
  end

  always_ff @(posedge clk) begin
    pwr <= pwr_c;
    if (rst || clear) v1 <= 1'b0;
    else              v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      acc          <= '0;
      cnt          <= '0;
      energy_valid <= 1'b0;
      energy       <= '0;
    end else begin
      energy_valid <= 1'b0;
      if (v1) begin
        if (cnt == CNT_W'(ACC_CYCLES - 1)) begin
          energy       <= acc + ENERGY_W'(pwr);
          energy_valid <= 1'b1;
          acc          <= '0;
          cnt          <= '0;
        end else begin
          acc <= acc + ENERGY_W'(pwr);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // A window needs ACC_CYCLES valid clocks, so results never come back to
  // back unless the window is a single clock.
  a_spacing : assert property (@(posedge clk) disable iff (rst)
                               energy_valid && ACC_CYCLES > 1 |=> !energy_valid);

endmodule
