// band_shifter: places a centred subband at its position in the 1 GHz comb.
//
// Multiplies the 2 GS/s complex signal (8 lanes per clock) by
// exp(j*alpha*n), alpha = (2*iband + 1)/40 * 2*pi, a shift by
// (2*iband + 1) * 50 MHz: band 0 lands on [0, 100] MHz, band 9 on
// [900, 1000] MHz. The phasor is read from a 40-entry table of
// cos/sin(2*pi*p/40) with p = (2*iband+1)*n mod 40; the table is stored as a
// quarter wave (kid_pkg::COS_QUARTER). Per lane:
//   I_s = (I cos - Q sin) >>> 15,   Q_s = (Q cos + I sin) >>> 15
// saturated to 16 bits.
//
// The phasor period of 40 samples is what lengthens the signal period to
// LCM(8*65536, 40) = 5 * 2^19 samples with a 2^16 phase accumulator, and
// leaves it at 8*65520 with the 65520 accumulator.
//
// The 40-entry phasor table and the shift formula follow the readout firmware;
// Q1.15 phasors, truncation and the run-time iband input are this design's
// choices. The sample index n counts from reset.
//
// Timing: registered output, one clock of latency.
module band_shifter
  import kid_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] iband,
  input  sample_t    in_i  [LANES],
  input  sample_t    in_q  [LANES],
  output sample_t    out_i [LANES],
  output sample_t    out_q [LANES]
);
  logic [5:0] step;     // 2*iband + 1
  logic [5:0] base;     // phasor index of lane 0: step * 8m mod 40
  logic [5:0] p [LANES];

  always_comb begin
    step = band_step(iband);
    for (int k = 0; k < LANES; k++)
      p[k] = mod40(8'(base), 8'(step) * 8'(k));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base <= '0;
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= '0;
        out_q[k] <= '0;
      end
    end else begin
      base <= mod40(8'(base), 8'(step) * 8'(LANES));
      for (int k = 0; k < LANES; k++) begin
        out_i[k] <= sat16((40'(in_i[k]) * 40'(phasor_cos(p[k])) - 40'(in_q[k]) * 40'(phasor_sin(p[k]))) >>> 15);
        out_q[k] <= sat16((40'(in_q[k]) * 40'(phasor_cos(p[k])) + 40'(in_i[k]) * 40'(phasor_sin(p[k]))) >>> 15);
      end
    end
  end

  a_iband: assert property (@(posedge clk) disable iff (!rst_n) iband <= 4'd9)
    else $error("iband %0d out of range", iband);
endmodule
