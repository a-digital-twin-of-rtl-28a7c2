// Full-size testbench of comb_manager: all defaults, 10 bands x 40 tones,
// MODULUS 65520, in digital loop-back. Tone t of band b has
// FCW = 3400 + 600*t + 7*b (13.0 to 102.6 MHz before the band shift). After
// reset it runs three analyzer windows (about 197,000 clocks) and checks,
// for all 400 tones, that window 2 equals window 1 bit for bit (no spur
// from periodicity mismatch), and that each |I + jQ| lies within 10% of
// W*A'*R/4, A' = 32112 / 64 (40-tone sum) / 16 (10-band sum) * G(fc),
// R = 32112, G the linear-interpolation gain at the centred frequency.
module tb_comb_manager_full;
  import kid_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam int NB = 10, NT = 40, M = 65520;
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
  comb_manager dut (.clk, .rst_n, .fcw, .loopback, .adc_x, .dac_i, .dac_q,
                    .i_ddc, .q_ddc, .x_poly, .ddc_valid(valid), .phase_wrap(wrap));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * (3 * M + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [47:0] w1_i [NB][NT], w1_q [NB][NT];

  initial begin
    int nv = 0, nwrap = 0;
    real fc, g, ex, mag, worst;
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) fcw[b][t] = 16'(3400 + 600 * t + 7 * b);
    for (int k = 0; k < 8; k++) adc_x[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    worst = 0;
    while (nv < 3) begin
      @(posedge clk); #1;
      nwrap += wrap;
      if (valid) begin
        nv++;
        if (nv == 2) begin
          w1_i = i_ddc;
          w1_q = q_ddc;
        end
        if (nv == 3)
          for (int b = 0; b < NB; b++)
            for (int t = 0; t < NT; t++) begin
              check(i_ddc[b][t] == w1_i[b][t] && q_ddc[b][t] == w1_q[b][t],
                    $sformatf("band %0d tone %0d changes between windows", b, t));
              fc = (3400.0 + 600.0 * t + 7.0 * b) * 250.0 / M - 62.5;
              g = $sin(8.0 * PI * fc / 2000.0) / $sin(PI * fc / 2000.0);
              g = g * g / 64.0;
              ex = real'(M) * (AMP / 64.0 / 16.0 * g) * AMP / 4.0;
              mag = $sqrt(real'(i_ddc[b][t]) ** 2 + real'(q_ddc[b][t]) ** 2);
              if ((mag / ex - 1.0) > worst) worst = mag / ex - 1.0;
              if ((1.0 - mag / ex) > worst) worst = 1.0 - mag / ex;
              check(mag > 0.9 * ex && mag < 1.1 * ex,
                    $sformatf("band %0d tone %0d magnitude %e expected %e", b, t, mag, ex));
            end
      end
    end
    check(nwrap > 0, "phase accumulators wrapped");
    $display("400 tones: worst magnitude error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
