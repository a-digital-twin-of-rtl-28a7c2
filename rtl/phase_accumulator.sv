// phase_accumulator: the phase register of one excitation tone.
//
// Every 250 MHz clock the phase advances by the frequency control word and
// wraps modulo MODULUS: phase <= (phase + fcw) mod MODULUS. The tone frequency
// is fcw * 250 MHz / MODULUS and the phase sequence repeats every MODULUS
// clocks at most. With MODULUS = 65520 (the default) the period is a multiple
// of 40, the period of the band-shift phasor, which keeps the excitation
// signal periodic over 8*65520 samples at 2 GS/s; MODULUS = 65536 gives the
// plain 16-bit wrap of the original firmware. The explicit modulo (one compare
// and one subtract) follows the published firmware change; reset to zero is
// this design's choice.
//
// Interface: fcw must be below MODULUS. phase is registered; wrap is high in the
// cycle after an update that passed MODULUS (the excess is kept).
module phase_accumulator #(
  parameter int unsigned PHASE_W = 16,
  parameter int unsigned MODULUS = 65520
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHASE_W-1:0] fcw,
  output logic [PHASE_W-1:0] phase,
  output logic               wrap
);
  logic [PHASE_W:0] sum;
  logic             over;

  always_comb begin
    sum  = {1'b0, phase} + {1'b0, fcw};
    over = (sum >= (PHASE_W+1)'(MODULUS));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= '0;
      wrap  <= 1'b0;
    end else begin
      phase <= over ? PHASE_W'(sum - (PHASE_W+1)'(MODULUS)) : sum[PHASE_W-1:0];
      wrap  <= over;
    end
  end

  a_fcw_range: assert property (@(posedge clk) disable iff (!rst_n) {1'b0, fcw} < (PHASE_W+1)'(MODULUS))
    else $error("fcw %0d not below MODULUS %0d", fcw, MODULUS);
endmodule
