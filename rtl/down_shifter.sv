// down_shifter: moves a subband from [12.5, 112.5] MHz to [-50, +50] MHz.
//
// Multiplies the complex 250 MS/s subband signal by exp(-j*pi*n/2), a shift by
// -Fs/4 = -62.5 MHz. Because the phasor only takes the values 1, -j, -1, +j,
// the multiplication reduces to swapping and negating I and Q:
//   n mod 4 = 0: ( I,  Q)    1: ( Q, -I)    2: (-I, -Q)    3: (-Q,  I)
// i.e. I_c = I cos(pi n/2) + Q sin(pi n/2), Q_c = Q cos(pi n/2) - I sin(pi n/2).
// The phasor has period 4, which divides the tone period, so the signal's
// periodicity is unchanged.
//
// The operation follows the readout firmware. The sample index n counts
// clocks from reset, and negation saturates (-32768 becomes +32767); both are
// this design's choices.
//
// Timing: registered output, one clock of latency, one sample per clock.
module down_shifter
  import kid_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in_i,
  input  sample_t in_q,
  output sample_t out_i,
  output sample_t out_q
);
  logic [1:0] n;

  function automatic sample_t neg(input sample_t v);
    return sat16(-40'(v));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n     <= '0;
      out_i <= '0;
      out_q <= '0;
    end else begin
      n <= n + 2'd1;
      unique case (n)
        2'd0: begin out_i <= in_i;     out_q <= in_q;     end
        2'd1: begin out_i <= in_q;     out_q <= neg(in_i); end
        2'd2: begin out_i <= neg(in_i); out_q <= neg(in_q); end
        2'd3: begin out_i <= neg(in_q); out_q <= in_i;     end
      endcase
    end
  end
endmodule
