// pfb_channel: one subband of the analysis filter bank.
//
// Input: the real 2 GS/s signal from the ADC (or the digital loop-back), 8
// lanes per 250 MHz clock. Output: the real 250 MS/s signal of subband iband,
// with its tones back at 12.5 to 112.5 MHz. Five steps:
//   1. complex down-shift: z[n] = x[n] * exp(-j*alpha*n),
//      alpha = (2*iband+1)/40 * 2*pi, from the same 40-entry phasor table as
//      the band shifter (a real signal times a complex phasor);
//   2. low-pass filter (128 taps, kid_pkg::FIR_COEF, flat to 50 MHz,
//      below -85 dB from 175 MHz);
//   3. down-sampling by 8: the filter is only evaluated for every 8th sample,
//      y[m] = sum_j h[j] * z[8m + 7 - j];
//   4. up-conversion by +62.5 MHz: y[m] * exp(+j*pi*m/2);
//   5. real part of the result.
// Step 1 also moves the negative-frequency image of each tone, at
// -(f + 2*f_shift), into the band; its remains, after the filter, are what the
// tone analyzers must reject.
//
// The five steps follow the readout firmware's description. Its filter and
// its polyphase (FFT-based) arrangement are not published: here each band has
// its own direct-form decimating filter, a Blackman-windowed sinc with
// 77 to 90 dB of stopband rejection. Truncating shifts and saturation are this
// design's choices.
//
// Timing: three registers (demodulation, filter, up-conversion): x_poly
// follows the input lanes by 3 clocks; one output sample per clock.
module pfb_channel
  import kid_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] iband,
  input  sample_t    x [LANES],
  output sample_t    x_poly
);
  localparam int DEPTH = FIR_TAPS / LANES;   // clocks of history held
  localparam int AW    = 40;

  logic [5:0] step, base;
  logic [5:0] p [LANES];
  logic [1:0] m;                            // up-conversion phase
  sample_t    z_i [DEPTH][LANES];           // z_i[d][k]: sample 8(m-d)+k
  sample_t    z_q [DEPTH][LANES];
  sample_t    y_i, y_q;

  always_comb begin
    step = band_step(iband);
    for (int k = 0; k < LANES; k++)
      p[k] = mod40(8'(base), 8'(step) * 8'(k));
  end

  // 1. demodulation, into the newest row of the history
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base <= '0;
      for (int d = 0; d < DEPTH; d++)
        for (int k = 0; k < LANES; k++) begin
          z_i[d][k] <= '0;
          z_q[d][k] <= '0;
        end
    end else begin
      base <= mod40(8'(base), 8'(step) * 8'(LANES));
      for (int k = 0; k < LANES; k++) begin
        z_i[0][k] <= sat16((40'(x[k]) * 40'(phasor_cos(p[k]))) >>> 15);
        z_q[0][k] <= sat16(-((40'(x[k]) * 40'(phasor_sin(p[k]))) >>> 15));
      end
      for (int d = 1; d < DEPTH; d++) begin
        z_i[d] <= z_i[d-1];
        z_q[d] <= z_q[d-1];
      end
    end
  end

  // 2.+3. filter evaluated once per 8 input samples
  logic signed [AW-1:0] f_i, f_q;
  always_comb begin
    f_i = '0;
    f_q = '0;
    for (int d = 0; d < DEPTH; d++)
      for (int k = 0; k < LANES; k++) begin
        // tap j = 8d + 7 - k multiplies sample 8(m-d) + k
        f_i += AW'(z_i[d][k]) * AW'(FIR_COEF[LANES*d + LANES-1 - k]);
        f_q += AW'(z_q[d][k]) * AW'(FIR_COEF[LANES*d + LANES-1 - k]);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_i    <= '0;
      y_q    <= '0;
      m      <= '0;
      x_poly <= '0;
    end else begin
      y_i <= sat16(f_i >>> 15);
      y_q <= sat16(f_q >>> 15);
      // 4.+5. Re{ y * exp(j*pi*m/2) }
      m <= m + 2'd1;
      unique case (m)
        2'd0: x_poly <= y_i;
        2'd1: x_poly <= sat16(-40'(y_q));
        2'd2: x_poly <= sat16(-40'(y_i));
        2'd3: x_poly <= y_q;
      endcase
    end
  end
endmodule
