// cordic: phase-to-I/Q converter of one excitation tone.
//
// A fully pipelined CORDIC in rotation mode. The input is a PHASE_IN_W-bit
// phase (a full turn is 2^PHASE_IN_W), the outputs are cos and sin of that
// phase with an amplitude of about 32112 LSB (START_X times the CORDIC gain
// 1.6468). The phase is first folded into [-90, +90) degrees by a 180-degree
// rotation of the start vector, then ITER micro-rotations by atan(2^-i) drive
// the residual angle to zero. The angle is carried with 2^24 units per turn,
// x and y with 4 fraction bits that are rounded off at the output (error
// within 3 LSB).
//
// The readout chain feeds it the 10 MSBs of the 16-bit phase accumulator. That
// the tone comes from a CORDIC, and that it sees 10 phase bits, follows the
// readout firmware; its internal structure, word widths and amplitude are this
// design's choices.
//
// Timing: one register per micro-rotation plus an input register: latency
// ITER + 1 clocks, one result per clock.
module cordic
  import kid_pkg::*;
#(
  parameter int unsigned PHASE_IN_W = 10,
  parameter int unsigned ITER       = 16,
  parameter int          START_X    = 19500
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PHASE_IN_W-1:0] phase,
  output sample_t               cos_o,
  output sample_t               sin_o
);
  localparam int FRAC = 4;         // extra fraction bits against truncation
  localparam int XW = 18 + FRAC;   // headroom for the CORDIC gain
  localparam int ZW = ANGLE_W + 1; // signed angle

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic signed [ZW-1:0] z [ITER+1];

  // Input stage: fold into [-1/4, +1/4) turn.
  // The angle as a signed 24-bit fraction of a turn; flipping its MSB adds
  // half a turn modulo one turn.
  logic signed [ANGLE_W-1:0] a, a_flip;
  always_comb begin
    a      = {phase, {(ANGLE_W-PHASE_IN_W){1'b0}}};
    a_flip = {~a[ANGLE_W-1], a[ANGLE_W-2:0]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x[0] <= '0;
      y[0] <= '0;
      z[0] <= '0;
    end else if (phase[PHASE_IN_W-1] ^ phase[PHASE_IN_W-2]) begin
      // second or third quadrant: start from -START_X, rotate by a - 1/2 turn
      x[0] <= -(XW'(START_X) <<< FRAC);
      y[0] <= '0;
      z[0] <= ZW'(a_flip);
    end else begin
      x[0] <= XW'(START_X) <<< FRAC;
      y[0] <= '0;
      z[0] <= ZW'(a);
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        x[i+1] <= '0;
        y[i+1] <= '0;
        z[i+1] <= '0;
      end else if (!z[i][ZW-1]) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - CORDIC_ATAN[i];
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + CORDIC_ATAN[i];
      end
    end
  end

  // drop the extra fraction bits with rounding
  assign cos_o = sat16((40'(x[ITER]) + 40'(1 << (FRAC-1))) >>> FRAC);
  assign sin_o = sat16((40'(y[ITER]) + 40'(1 << (FRAC-1))) >>> FRAC);
endmodule
