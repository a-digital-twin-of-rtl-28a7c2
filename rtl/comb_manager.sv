// comb_manager: digital comb manager of an MKID readout board (top level).
//
// The comb generator synthesizes N_BANDS x N_TONES excitation tones (400 in
// the readout: 10 subbands of 100 MHz with 40 tones each) as one 2 GS/s
// complex waveform, 8 samples per 250 MHz clock, for the DAC interface. The
// comb analyzer takes the real 2 GS/s signal back from the ADC interface,
// splits it into subbands and demodulates every tone to 0 Hz against the
// generator's own reference for that tone, giving one I/Q pair per tone every
// MODULUS clocks.
//
// MODULUS sets both the period of the tone phase accumulators and the
// averaging window of the tone analyzers. With 65520 (default), a multiple of
// the 40-sample band-shift phasor period, the whole loop repeats every 65520
// clocks and every analyzer output is free of the spurs at f_out/5 and
// 2*f_out/5 that 65536 produces.
//
// loopback = 1 feeds the analyzer with the Q part of the generator output
// (the digital loop-back used to test the DSP chain without the analog part);
// loopback = 0 feeds it from adc_x.
//
// Interface: fcw[b][t] is the frequency control word of tone t of band b
// (tone frequency fcw * 250 MHz / MODULUS, to be placed in 12.5 to 112.5 MHz;
// it must be below MODULUS). i_ddc/q_ddc hold the last window's sums;
// ddc_valid pulses once per window. x_poly is each subband's
// filter-bank output (250 MS/s), for observation. phase_wrap is high when any tone's
// phase accumulator wrapped.
module comb_manager
  import kid_pkg::*;
#(
  parameter int unsigned N_BANDS = 10,
  parameter int unsigned N_TONES = 40,
  parameter int unsigned MODULUS = 65520,
  parameter int unsigned ACC_W   = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [PHASE_W-1:0]      fcw   [N_BANDS][N_TONES],
  input  logic                    loopback,
  input  sample_t                 adc_x [LANES],
  output sample_t                 dac_i [LANES],
  output sample_t                 dac_q [LANES],
  output logic signed [ACC_W-1:0] i_ddc [N_BANDS][N_TONES],
  output logic signed [ACC_W-1:0] q_ddc [N_BANDS][N_TONES],
  output sample_t                 x_poly [N_BANDS],
  output logic                    ddc_valid,
  output logic                    phase_wrap
);
  sample_t ref_i [N_BANDS][N_TONES];
  sample_t ref_q [N_BANDS][N_TONES];
  sample_t ana_x [LANES];

  comb_generator #(.N_BANDS(N_BANDS), .N_TONES(N_TONES), .MODULUS(MODULUS)) u_gen (
    .clk, .rst_n, .fcw, .out_i(dac_i), .out_q(dac_q), .ref_i, .ref_q, .wrap_any(phase_wrap)
  );

  always_comb begin
    for (int k = 0; k < LANES; k++)
      ana_x[k] = loopback ? dac_q[k] : adc_x[k];
  end

  comb_analyzer #(.N_BANDS(N_BANDS), .N_TONES(N_TONES), .WINDOW(MODULUS), .ACC_W(ACC_W)) u_ana (
    .clk, .rst_n, .x(ana_x), .ref_i, .ref_q, .i_ddc, .q_ddc, .x_poly, .valid(ddc_valid)
  );
endmodule
