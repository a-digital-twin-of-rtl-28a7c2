// Workload testbench: the full 400-tone comb (10 bands x 40 tones, the same
// tone plan as tb_comb_manager_full) built with the original 16-bit phase
// accumulator and 65536-sample analyzer window (MODULUS = 65536), in digital
// loop-back. It runs seven analyzer windows and checks, for every one of the
// 400 I/Q streams, that the output repeats with a period of exactly five
// windows (window 6 equals window 1) while not being constant: the
// five-sample fluctuation that shows up as spurs at f_out/5 and 2*f_out/5
// (763 Hz and 1526 Hz at a 3.8 kHz output rate). It also reports how many
// streams vary and the largest variation relative to the tone magnitude.
module tb_concerto_spurs;
  import kid_pkg::*;
  localparam int NB = 10, NT = 40, M = 65536;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw [NB][NT];
  logic loopback = 1'b1;
  sample_t adc_x [8];
  sample_t dac_i [8], dac_q [8];
  logic signed [47:0] i_ddc [NB][NT], q_ddc [NB][NT];
  sample_t x_poly [NB];
  logic valid, wrap;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  comb_manager #(.MODULUS(M)) dut (.clk, .rst_n, .fcw, .loopback, .adc_x, .dac_i, .dac_q,
                    .i_ddc, .q_ddc, .x_poly, .ddc_valid(valid), .phase_wrap(wrap));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * (7 * M + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [47:0] h_i [7][NB][NT], h_q [7][NB][NT];

  initial begin
    int nv = 0, varying = 0;
    real worst = 0, dev, mag;
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) fcw[b][t] = 16'(3400 + 600 * t + 7 * b);
    for (int k = 0; k < 8; k++) adc_x[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (nv < 7) begin
      @(posedge clk); #1;
      if (valid) begin
        h_i[nv] = i_ddc;
        h_q[nv] = q_ddc;
        nv++;
      end
    end
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) begin
        bit var_ = 0;
        check(h_i[6][b][t] == h_i[1][b][t] && h_q[6][b][t] == h_q[1][b][t],
              $sformatf("band %0d tone %0d: no 5-window period", b, t));
        mag = $sqrt(real'(h_i[1][b][t]) ** 2 + real'(h_q[1][b][t]) ** 2);
        for (int w = 2; w < 6; w++) begin
          if (h_i[w][b][t] != h_i[1][b][t] || h_q[w][b][t] != h_q[1][b][t]) var_ = 1;
          dev = $sqrt(real'(h_i[w][b][t] - h_i[1][b][t]) ** 2 + real'(h_q[w][b][t] - h_q[1][b][t]) ** 2) / mag;
          if (dev > worst) worst = dev;
        end
        varying += var_;
      end
    $display("streams with a 5-window fluctuation: %0d of %0d, largest relative excursion %e",
             varying, NB * NT, worst);
    check(varying == NB * NT, $sformatf("only %0d streams fluctuate", varying));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
