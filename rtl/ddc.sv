// ddc: tone analyzer (digital down-converter) of one tone.
//
// Multiplies the real subband signal x by the tone's own reference I/Q pair
// (the CORDIC output of the matching tone generator), which moves the tone to
// 0 Hz, and averages the products over WINDOW consecutive samples, keeping one
// result per window (integrate and dump). A boxcar of WINDOW samples has
// nulls at every multiple of 250 MHz / WINDOW, which is the tone frequency
// grid when WINDOW equals the phase accumulator's modulus: all other tones,
// and any component that repeats with that period, are rejected exactly.
// WINDOW = 65520 gives one I/Q pair every 65520 clocks (about 3815.6 Hz at
// 250 MHz).
//
// Outputs: i_ddc = sum(x * ref_i), q_ddc = sum(x * ref_q) over the window,
// not divided by WINDOW, with valid high for one clock per window.
//
// The multiply, the boxcar average of length 65520 and the decimation by the
// same factor follow the readout firmware; output scaling, the sign of the Q
// product and the absence of latency matching of the reference are this
// design's choices.
//
// Timing: the window starts at reset; valid rises WINDOW clocks after reset
// and every WINDOW clocks after that, with the window's sums.
module ddc
  import kid_pkg::*;
#(
  parameter int unsigned WINDOW = 65520,
  parameter int unsigned ACC_W  = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sample_t                 x,
  input  sample_t                 ref_i,
  input  sample_t                 ref_q,
  output logic signed [ACC_W-1:0] i_ddc,
  output logic signed [ACC_W-1:0] q_ddc,
  output logic                    valid
);
  localparam int CW = (WINDOW > 1) ? $clog2(WINDOW) : 1;

  logic [CW-1:0]          count;
  logic signed [ACC_W-1:0] acc_i, acc_q, p_i, p_q;

  always_comb begin
    p_i = ACC_W'(x) * ACC_W'(ref_i);
    p_q = ACC_W'(x) * ACC_W'(ref_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count <= '0;
      acc_i <= '0;
      acc_q <= '0;
      i_ddc <= '0;
      q_ddc <= '0;
      valid <= 1'b0;
    end else if (count == CW'(WINDOW - 1)) begin
      count <= '0;
      acc_i <= '0;
      acc_q <= '0;
      i_ddc <= acc_i + p_i;
      q_ddc <= acc_q + p_q;
      valid <= 1'b1;
    end else begin
      count <= count + 1'b1;
      acc_i <= acc_i + p_i;
      acc_q <= acc_q + p_q;
      valid <= 1'b0;
    end
  end
endmodule
