// subband_generator: the tones of one 100 MHz subband and their sum.
//
// N_TONES tone generators (40 in the readout) run in parallel, each with its own
// frequency control word. Their I and Q samples are summed and the sum is
// divided by 2^ceil(log2(N_TONES)) (an arithmetic shift) so that it fits in a
// 16-bit sample whatever the phases of the tones. Each tone's own I/Q pair is
// also brought out: the analysis chain uses it as the reference for that
// tone's down-converter.
//
// Summing per subband follows the readout firmware; the scaling shift is this
// design's choice.
//
// Timing: sum_i/sum_q are registered, one clock after the tone samples.
module subband_generator
  import kid_pkg::*;
#(
  parameter int unsigned N_TONES = 40,
  parameter int unsigned MODULUS = 65520
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHASE_W-1:0] fcw [N_TONES],
  output sample_t            sum_i,
  output sample_t            sum_q,
  output sample_t            ref_i [N_TONES],
  output sample_t            ref_q [N_TONES],
  output logic               wrap_any
);
  localparam int SHIFT = (N_TONES > 1) ? $clog2(N_TONES) : 0;
  localparam int SW    = SAMPLE_W + SHIFT + 1;

  logic [N_TONES-1:0] wrap;

  for (genvar t = 0; t < N_TONES; t++) begin : g_tone
    tone_generator #(.MODULUS(MODULUS)) u_tone (
      .clk, .rst_n, .fcw(fcw[t]), .tone_i(ref_i[t]), .tone_q(ref_q[t]), .wrap(wrap[t])
    );
  end

  logic signed [SW-1:0] acc_i, acc_q;
  always_comb begin
    acc_i = '0;
    acc_q = '0;
    for (int t = 0; t < N_TONES; t++) begin
      acc_i += SW'(ref_i[t]);
      acc_q += SW'(ref_q[t]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum_i <= '0;
      sum_q <= '0;
    end else begin
      sum_i <= sat16(40'(acc_i >>> SHIFT));
      sum_q <= sat16(40'(acc_q >>> SHIFT));
    end
  end

  assign wrap_any = |wrap;
endmodule
