// comb_generator: the excitation path, a comb of N_BANDS x N_TONES tones.
//
// Each of the N_BANDS subbands (10 in the readout) has N_TONES tone generators
// (40) whose sum, a 250 MS/s complex signal between 12.5 and 112.5 MHz, is
// shifted by -62.5 MHz (down_shifter) to [-50, +50] MHz, interpolated by 8 to
// 2 GS/s (upsampler) and shifted by (2*b + 1) * 50 MHz to its place
// (band_shifter, iband = b). The N_BANDS band signals are added lane by lane
// and divided by 2^ceil(log2(N_BANDS)) to fit 16 bits, giving one complex
// waveform that spans 0 to 1 GHz, 8 samples per 250 MHz clock, for the DAC
// interface.
//
// The per-tone I/Q samples are brought out as references for the down
// converters of the analysis path. wrap_any is high when any tone's phase
// accumulator wrapped.
//
// The chain of operations follows the readout firmware; the final scaling is
// this design's choice.
//
// Timing: tone sample to output lanes: 1 (sum) + 1 (down-shift) + 1
// (up-sample) + 1 (band shift) + 1 (band sum) clocks after the CORDIC output.
module comb_generator
  import kid_pkg::*;
#(
  parameter int unsigned N_BANDS = 10,
  parameter int unsigned N_TONES = 40,
  parameter int unsigned MODULUS = 65520
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHASE_W-1:0] fcw   [N_BANDS][N_TONES],
  output sample_t            out_i [LANES],
  output sample_t            out_q [LANES],
  output sample_t            ref_i [N_BANDS][N_TONES],
  output sample_t            ref_q [N_BANDS][N_TONES],
  output logic               wrap_any
);
  localparam int SHIFT = (N_BANDS > 1) ? $clog2(N_BANDS) : 0;
  localparam int SW    = SAMPLE_W + SHIFT + 1;

  sample_t sb_i [N_BANDS], sb_q [N_BANDS];
  sample_t c_i  [N_BANDS], c_q  [N_BANDS];
  sample_t up_i [N_BANDS][LANES], up_q [N_BANDS][LANES];
  sample_t sh_i [N_BANDS][LANES], sh_q [N_BANDS][LANES];
  logic [N_BANDS-1:0] wrap;

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    subband_generator #(.N_TONES(N_TONES), .MODULUS(MODULUS)) u_sub (
      .clk, .rst_n, .fcw(fcw[b]), .sum_i(sb_i[b]), .sum_q(sb_q[b]),
      .ref_i(ref_i[b]), .ref_q(ref_q[b]), .wrap_any(wrap[b])
    );
    down_shifter u_down (
      .clk, .rst_n, .in_i(sb_i[b]), .in_q(sb_q[b]), .out_i(c_i[b]), .out_q(c_q[b])
    );
    upsampler u_up (
      .clk, .rst_n, .in_i(c_i[b]), .in_q(c_q[b]), .out_i(up_i[b]), .out_q(up_q[b])
    );
    band_shifter u_shift (
      .clk, .rst_n, .iband(4'(b)), .in_i(up_i[b]), .in_q(up_q[b]),
      .out_i(sh_i[b]), .out_q(sh_q[b])
    );
  end

  logic signed [SW-1:0] acc_i [LANES], acc_q [LANES];
  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      acc_i[k] = '0;
      acc_q[k] = '0;
      for (int b = 0; b < N_BANDS; b++) begin
        acc_i[k] += SW'(sh_i[b][k]);
        acc_q[k] += SW'(sh_q[b][k]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= '0;
        out_q[k] <= '0;
      end
    end else begin
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= sat16(40'(acc_i[k] >>> SHIFT));
        out_q[k] <= sat16(40'(acc_q[k] >>> SHIFT));
      end
    end
  end

  assign wrap_any = |wrap;
endmodule
