// Testbench for comb_generator, reduced to 2 bands of 2 tones (the default
// MODULUS of 65520). Over one full period (65520 clocks, 8*65520 samples at
// 2 GS/s) the complex output I + jQ is correlated with exp(j*2*pi*f*n/2000)
// at each tone's expected position
//   f = fcw*250/65520 - 62.5 + (2*b + 1)*50   [MHz],
// which must show an amplitude of 32112 / 2 (tone sum) / 2 (band sum) times the
// gain of linear interpolation at the centred frequency fc = f_tone - 62.5,
// (sin(8*pi*fc/2000) / sin(pi*fc/2000))^2 / 64, within 2%. A grid frequency
// carrying no tone must show less than 1% of that amplitude.
module tb_comb_generator;
  localparam real PI = 3.14159265358979;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam int NB = 2, NT = 2, M = 65520;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw [NB][NT];
  logic signed [15:0] oi [8], oq [8];
  logic signed [15:0] ri [NB][NT], rq [NB][NT];
  logic wrap_any;
  int checks = 0, failures = 0;
  localparam int FCW_T [NB][NT] = '{'{4000, 20000}, '{7000, 12000}};

  always #2 clk = ~clk;
  comb_generator #(.N_BANDS(NB), .N_TONES(NT)) dut (
    .clk, .rst_n, .fcw, .out_i(oi), .out_q(oq), .ref_i(ri), .ref_q(rq), .wrap_any);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * (M + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // correlation bins, in units of 2000 MHz / (8*65520): 5 frequencies
  longint bin [5];
  real ci [5], cq [5];

  initial begin
    real g, fc, a, expect_amp, mag;
    int nwrap = 0;
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) begin
        fcw[b][t] = 16'(FCW_T[b][t]);
        // f*8*65520/2000 = fcw - 16380 + (2b+1)*13104
        bin[b * NT + t] = FCW_T[b][t] - 16380 + (2 * b + 1) * 13104;
      end
    bin[4] = 9000 - 16380 + 13104;   // a band-0 grid frequency with no tone
    for (int i = 0; i < 5; i++) begin ci[i] = 0; cq[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (100) @(posedge clk);
    for (int c = 0; c < M; c++) begin
      @(posedge clk); #1;
      nwrap += wrap_any;
      for (int k = 0; k < 8; k++) begin
        longint n;
        n = 8 * c + k;
        for (int i = 0; i < 5; i++) begin
          longint ph;
          ph = (n * bin[i]) % (8 * M);
          if (ph < 0) ph += 8 * M;
          a = -2.0 * PI * ph / (8.0 * M);
          // (oi + j oq) * exp(-j a')
          ci[i] += oi[k] * $cos(a) - oq[k] * $sin(a);
          cq[i] += oq[k] * $cos(a) + oi[k] * $sin(a);
        end
      end
    end
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) begin
        fc = FCW_T[b][t] * 250.0 / M - 62.5;
        g = $sin(8.0 * PI * fc / 2000.0) / $sin(PI * fc / 2000.0);
        g = g * g / 64.0;
        expect_amp = AMP / 4.0 * g;
        mag = $sqrt(ci[b * NT + t] ** 2 + cq[b * NT + t] ** 2) / (8.0 * M);
        check(mag > 0.98 * expect_amp && mag < 1.02 * expect_amp,
              $sformatf("band %0d tone %0d amplitude %f expected %f", b, t, mag, expect_amp));
      end
    mag = $sqrt(ci[4] ** 2 + cq[4] ** 2) / (8.0 * M);
    check(mag < 0.01 * AMP / 4.0, $sformatf("empty bin amplitude %f", mag));
    check(nwrap > 0, "phase accumulators wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
