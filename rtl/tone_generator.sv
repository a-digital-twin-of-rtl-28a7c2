// tone_generator: one excitation tone of the digital comb.
//
// A phase accumulator advanced by the frequency control word fcw (modulo
// MODULUS), whose 16-bit phase is shifted right by 6 bits so that its 10 MSBs
// drive a CORDIC. The CORDIC returns the tone's in-phase and quadrature
// samples I(n) = A*cos(2*pi*fcw*n/MODULUS), Q(n) = A*sin(...), A ~ 32112.
// The tone frequency is fcw * 250 MHz / MODULUS; with MODULUS = 65520 the
// frequency step is about 3815.6 Hz.
//
// The structure (accumulator, 6-bit shift, 10-bit CORDIC) follows the readout
// firmware. Because only the 10 MSBs reach the CORDIC, the phase values 65520
// to 65535 skipped by the modulo-65520 accumulator would have produced no new
// CORDIC input anyway. The 6 LSBs of the phase are deliberately unused (a
// lint tool reports them as unused bits).
//
// Timing: I/Q follow the accumulator by the CORDIC latency (17 clocks); one
// sample per 250 MHz clock. wrap marks the accumulator wrapping.
module tone_generator
  import kid_pkg::*;
#(
  parameter int unsigned MODULUS = 65520
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHASE_W-1:0] fcw,
  output sample_t            tone_i,
  output sample_t            tone_q,
  output logic               wrap
);
  logic [PHASE_W-1:0] phase;

  phase_accumulator #(.PHASE_W(PHASE_W), .MODULUS(MODULUS)) u_acc (
    .clk, .rst_n, .fcw, .phase, .wrap
  );

  cordic #(.PHASE_IN_W(CORDIC_IN_W)) u_cordic (
    .clk, .rst_n,
    .phase (phase[PHASE_W-1 -: CORDIC_IN_W]),   // phase >> 6
    .cos_o (tone_i),
    .sin_o (tone_q)
  );
endmodule
