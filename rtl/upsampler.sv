// upsampler: x8 interpolator from 250 MS/s to 2 GS/s.
//
// Takes one complex sample per 250 MHz clock and delivers eight, one per lane,
// lane k of clock m being output sample 8*m + k. The interpolation is linear
// between the previous input x[m-1] and the current input x[m]:
//   y[8m + k] = x[m-1] + ((x[m] - x[m-1]) * k) / 8,   k = 0..7
// (division by an arithmetic shift). This is a 15-tap triangular
// interpolation filter whose response falls as sinc^2(f / 250 MHz): about
// -1 dB at 50 MHz.
//
// The factor 8 and the lane layout follow the readout firmware. Its actual
// interpolation filter is not published; linear interpolation is this
// design's choice of the simplest interpolator.
//
// Timing: registered, lane values of clock m+1 are based on x[m]; one clock
// of latency.
module upsampler
  import kid_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in_i,
  input  sample_t in_q,
  output sample_t out_i [LANES],
  output sample_t out_q [LANES]
);
  sample_t prev_i, prev_q;

  function automatic sample_t interp(input sample_t a, input sample_t b, input logic [2:0] k);
    logic signed [SAMPLE_W+4:0] d;
    d = (SAMPLE_W+5)'(b) - (SAMPLE_W+5)'(a);
    return sat16(40'(a) + 40'((d * signed'((SAMPLE_W+5)'({1'b0, k}))) >>> 3));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_i <= '0;
      prev_q <= '0;
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= '0;
        out_q[k] <= '0;
      end
    end else begin
      prev_i <= in_i;
      prev_q <= in_q;
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= interp(prev_i, in_i, 3'(k));
        out_q[k] <= interp(prev_q, in_q, 3'(k));
      end
    end
  end
endmodule
