// kid_pkg: types, constants and small constant tables shared by the comb
// generator and comb analyzer of the MKID readout DSP chain.
//
// The chain runs in one 250 MHz clock domain. The 2 GS/s part of the chain
// (after the x8 up-sampler and before the /8 decimation in the filter bank) is
// carried as LANES = 8 parallel samples per clock; lane k of clock m holds
// sample 8*m + k. All samples are signed 16-bit two's-complement integers.
//
// Tables here are tiny and carry their formulas:
//  * COS_QUARTER[p] = round(32767 * cos(2*pi*p/40)), p = 0..10. The 40-point
//    band-shift phasor cos/sin(2*pi*p/40) is folded out of this quarter wave.
//  * CORDIC_ATAN[i] = round(atan(2^-i) / (2*pi) * 2^24): CORDIC rotation
//    angles with a full turn equal to 2^24.
//  * FIR_COEF[j]: 128-tap low-pass of the analysis filter bank, a
//    Blackman-windowed sinc with cutoff 90 MHz at 2 GS/s,
//    h[j] = 2*fc*sinc(2*fc*(j-63.5)) * blackman(j), fc = 0.045,
//    blackman(j) = 0.42 - 0.5 cos(2 pi j/127) + 0.08 cos(4 pi j/127),
//    rounded after scaling so that the taps sum to 32768 (unity gain at DC,
//    Q1.15), the rounding residue added to the two centre taps. Response:
//    flat (< 0.01 dB) to 50 MHz, -77 dB at 150 MHz, below -85 dB from
//    175 MHz on, so nothing aliases into +-50 MHz after decimation by 8. This filter is this
//    design's own choice: the filter of the original firmware is not published.
package kid_pkg;

  localparam int SAMPLE_W  = 16;        // sample width throughout
  localparam int LANES     = 8;         // 2 GS/s carried as 8 lanes at 250 MHz
  localparam int PHASE_W   = 16;        // phase accumulator width
  localparam int CORDIC_IN_W = 10;      // MSBs of the phase used by the CORDIC
  localparam int ANGLE_W   = 24;        // CORDIC internal angle, 2^24 per turn
  localparam int FIR_TAPS  = 128;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef sample_t lanes_t [LANES];

  typedef struct packed {
    sample_t i;
    sample_t q;
  } iq_t;

  localparam logic signed [SAMPLE_W-1:0] COS_QUARTER [11] = '{
    16'sd32767, 16'sd32364, 16'sd31163, 16'sd29196, 16'sd26509, 16'sd23170,
    16'sd19260, 16'sd14876, 16'sd10126, 16'sd5126,  16'sd0 };

  localparam logic signed [ANGLE_W:0] CORDIC_ATAN [16] = '{
    25'sd2097152, 25'sd1238021, 25'sd654136, 25'sd332050, 25'sd166669,
    25'sd83416,   25'sd41718,   25'sd20860,  25'sd10430,  25'sd5215,
    25'sd2608,    25'sd1304,    25'sd652,    25'sd326,    25'sd163,  25'sd81 };

  localparam logic signed [SAMPLE_W-1:0] FIR_COEF [FIR_TAPS] = '{
    16'sd0, 16'sd0, 16'sd0, 16'sd0, -16'sd1, -16'sd1, -16'sd1, -16'sd1,
    16'sd0, 16'sd1, 16'sd3, 16'sd4, 16'sd7, 16'sd9, 16'sd10, 16'sd11,
    16'sd11, 16'sd10, 16'sd6, 16'sd0, -16'sd7, -16'sd16, -16'sd26, -16'sd37,
    -16'sd46, -16'sd52, -16'sd55, -16'sd52, -16'sd43, -16'sd27, -16'sd4, 16'sd24,
    16'sd57, 16'sd91, 16'sd124, 16'sd152, 16'sd171, 16'sd176, 16'sd166, 16'sd137,
    16'sd88, 16'sd22, -16'sd61, -16'sd154, -16'sd252, -16'sd345, -16'sd424, -16'sd478,
    -16'sd498, -16'sd475, -16'sd401, -16'sd273, -16'sd87, 16'sd153, 16'sd441, 16'sd768,
    16'sd1120, 16'sd1483, 16'sd1839, 16'sd2171, 16'sd2460, 16'sd2692, 16'sd2855, 16'sd2939,
    16'sd2939, 16'sd2855, 16'sd2692, 16'sd2460, 16'sd2171, 16'sd1839, 16'sd1483, 16'sd1120,
    16'sd768, 16'sd441, 16'sd153, -16'sd87, -16'sd273, -16'sd401, -16'sd475, -16'sd498,
    -16'sd478, -16'sd424, -16'sd345, -16'sd252, -16'sd154, -16'sd61, 16'sd22, 16'sd88,
    16'sd137, 16'sd166, 16'sd176, 16'sd171, 16'sd152, 16'sd124, 16'sd91, 16'sd57,
    16'sd24, -16'sd4, -16'sd27, -16'sd43, -16'sd52, -16'sd55, -16'sd52, -16'sd46,
    -16'sd37, -16'sd26, -16'sd16, -16'sd7, 16'sd0, 16'sd6, 16'sd10, 16'sd11,
    16'sd11, 16'sd10, 16'sd9, 16'sd7, 16'sd4, 16'sd3, 16'sd1, 16'sd0,
    -16'sd1, -16'sd1, -16'sd1, -16'sd1, 16'sd0, 16'sd0, 16'sd0, 16'sd0 };

  // cos(2*pi*p/40) in Q1.15, for p = 0..39, folded out of the quarter wave.
  function automatic sample_t phasor_cos(input logic [5:0] p);
    logic [3:0] k;
    if (p <= 6'd10)      k = 4'(p);
    else if (p <= 6'd20) k = 4'(6'd20 - p);
    else if (p <= 6'd30) k = 4'(p - 6'd20);
    else                 k = 4'(6'd40 - p);
    if (p > 6'd10 && p <= 6'd30) return -COS_QUARTER[k];
    else                         return COS_QUARTER[k];
  endfunction

  // sin(2*pi*p/40) = cos(2*pi*(p-10)/40).
  function automatic sample_t phasor_sin(input logic [5:0] p);
    return phasor_cos((p >= 6'd10) ? p - 6'd10 : p + 6'd30);
  endfunction

  // (a + b) mod 40 for a < 40 and b < 216.
  function automatic logic [5:0] mod40(input logic [7:0] a, input logic [7:0] b);
    logic [8:0] s;
    s = {1'b0, a} + {1'b0, b};
    for (int n = 0; n < 6; n++)
      if (s >= 9'd40) s = s - 9'd40;
    return s[5:0];
  endfunction

  // Saturate a wide signed value to a 16-bit sample.
  function automatic sample_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return v[SAMPLE_W-1:0];
  endfunction

  // Band-shift step per 2 GS/s sample: 2*iband + 1 (alpha = step/40 * 2*pi).
  function automatic logic [5:0] band_step(input logic [3:0] iband);
    return {1'b0, iband, 1'b1};
  endfunction

endpackage
