// comb_analyzer: the analysis path, N_BANDS x N_TONES I/Q streams.
//
// The real 2 GS/s input (8 lanes per 250 MHz clock) is split into N_BANDS
// subbands by the filter bank (one pfb_channel per band, iband = b), and each
// 250 MS/s subband signal feeds N_TONES tone analyzers (ddc), one per tone of
// that subband, each using the reference I/Q of its tone from the comb
// generator. All analyzers share the same window timing (they start together
// at reset), so valid is common to all of them.
//
// 10 bands x 40 tones and the window of 65520 follow the readout firmware.
//
// Timing: x_poly lags the input by 3 clocks; see ddc for the outputs.
module comb_analyzer
  import kid_pkg::*;
#(
  parameter int unsigned N_BANDS = 10,
  parameter int unsigned N_TONES = 40,
  parameter int unsigned WINDOW  = 65520,
  parameter int unsigned ACC_W   = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sample_t                 x     [LANES],
  input  sample_t                 ref_i [N_BANDS][N_TONES],
  input  sample_t                 ref_q [N_BANDS][N_TONES],
  output logic signed [ACC_W-1:0] i_ddc [N_BANDS][N_TONES],
  output logic signed [ACC_W-1:0] q_ddc [N_BANDS][N_TONES],
  output sample_t                 x_poly [N_BANDS],
  output logic                    valid
);
  logic vld [N_BANDS][N_TONES];

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    pfb_channel u_pfb (.clk, .rst_n, .iband(4'(b)), .x, .x_poly(x_poly[b]));
    for (genvar t = 0; t < N_TONES; t++) begin : g_tone
      ddc #(.WINDOW(WINDOW), .ACC_W(ACC_W)) u_ddc (
        .clk, .rst_n, .x(x_poly[b]), .ref_i(ref_i[b][t]), .ref_q(ref_q[b][t]),
        .i_ddc(i_ddc[b][t]), .q_ddc(q_ddc[b][t]), .valid(vld[b][t])
      );
    end
  end

  assign valid = vld[0][0];
endmodule
