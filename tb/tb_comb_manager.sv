// End-to-end testbench of comb_manager in digital loop-back, reduced to 7
// bands of one tone each (band 6 carries the 15.26 MHz tone, FCW 4000, as in
// the single-tone study of the chain). Two copies run side by side:
//   new: MODULUS = 65520 (the default),   old: MODULUS = 65536.
// Checks and mechanisms exercised:
//   * phase accumulator wraps (counted);
//   * window dumps of the tone analyzers every MODULUS clocks (counted);
//   * new: every analyzer output is identical from window to window
//     (no spur), and band 6 gives |I + jQ| = W*A'*R/4 within 3%, with
//     R = 32112, A' = 32112 * G(fc) / 8 (band sum of 7 divided by 8; G the
//     linear-interpolation gain at fc = -47.24 MHz);
//   * old: the band-6 output changes from window to window but repeats every
//     5 windows: the f_out/5 spur (763 Hz at 3.8 kHz output rate);
//   * loop-back switched off (analyzer fed from a silent ADC input): the
//     next full window gives exactly zero (mode switch).
module tb_comb_manager;
  localparam real PI = 3.14159265358979;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam int NB = 7, NT = 1;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw [NB][NT];
  logic loopback;
  logic signed [15:0] adc_x [8];
  logic signed [15:0] dn_i [8], dn_q [8], do_i [8], do_q [8];
  logic signed [47:0] in_ [NB][NT], qn [NB][NT], io [NB][NT], qo [NB][NT];
  logic signed [15:0] xpn [NB], xpo [NB];
  logic vn, vo, wn, wo;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  comb_manager #(.N_BANDS(NB), .N_TONES(NT)) dut_new (
    .clk, .rst_n, .fcw, .loopback, .adc_x, .dac_i(dn_i), .dac_q(dn_q),
    .i_ddc(in_), .q_ddc(qn), .x_poly(xpn), .ddc_valid(vn), .phase_wrap(wn));
  comb_manager #(.N_BANDS(NB), .N_TONES(NT), .MODULUS(65536)) dut_old (
    .clk, .rst_n, .fcw, .loopback, .adc_x, .dac_i(do_i), .dac_q(do_q),
    .i_ddc(io), .q_ddc(qo), .x_poly(xpo), .ddc_valid(vo), .phase_wrap(wo));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * 10 * 65536);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [47:0] hn_i [8][NB], hn_q [8][NB];   // new, per window
  logic signed [47:0] ho_i [8], ho_q [8];           // old, band 6

  initial begin
    int n_new = 0, n_old = 0, wraps = 0, spur_windows = 0, switches = 0, zero_windows = 0;
    int c;
    real fc, g, ex, mag;
    for (int b = 0; b < NB; b++) fcw[b][0] = (b == 6) ? 16'd4000 : 16'(6000 + 1500 * b);
    loopback = 1'b1;
    for (int k = 0; k < 8; k++) adc_x[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    c = 0;
    // loop-back run: 7 windows of the old design, 7 of the new
    while (n_old < 7) begin
      @(posedge clk); #1;
      c++;
      wraps += wn + wo;
      if (vn && n_new < 7) begin
        for (int b = 0; b < NB; b++) begin hn_i[n_new][b] = in_[b][0]; hn_q[n_new][b] = qn[b][0]; end
        n_new++;
      end
      if (vo) begin
        ho_i[n_old] = io[6][0];
        ho_q[n_old] = qo[6][0];
        n_old++;
      end
    end
    check(wraps > 0, "phase accumulators wrapped");
    check(n_new == 7, $sformatf("new windows %0d", n_new));
    // new design: constant outputs from window 1 on
    for (int w = 2; w < 7; w++)
      for (int b = 0; b < NB; b++)
        check(hn_i[w][b] == hn_i[1][b] && hn_q[w][b] == hn_q[1][b],
              $sformatf("new design band %0d window %0d differs", b, w));
    fc = 4000.0 * 250.0 / 65520.0 - 62.5;
    g = $sin(8.0 * PI * fc / 2000.0) / $sin(PI * fc / 2000.0);
    g = g * g / 64.0;
    ex = 65520.0 * (AMP * g / 8.0) * AMP / 4.0;
    mag = $sqrt(real'(hn_i[1][6]) ** 2 + real'(hn_q[1][6]) ** 2);
    check(mag > 0.97 * ex && mag < 1.03 * ex, $sformatf("band 6 magnitude %e expected %e", mag, ex));
    // old design: varies, with period 5 windows
    for (int w = 2; w < 6; w++)
      if (ho_i[w] != ho_i[1] || ho_q[w] != ho_q[1]) spur_windows++;
    check(spur_windows > 0, "old design shows no window-to-window variation");
    check(ho_i[6] == ho_i[1] && ho_q[6] == ho_q[1], "old design variation does not repeat after 5 windows");
    $display("old design band 6: window 1..5 I = %0d %0d %0d %0d %0d", ho_i[1], ho_i[2], ho_i[3], ho_i[4], ho_i[5]);
    // mode switch: analyzer fed from a silent ADC input
    loopback = 1'b0;
    switches++;
    n_new = 0;
    while (n_new < 2) begin
      @(posedge clk); #1;
      if (vn) begin
        n_new++;
        if (n_new == 2) begin
          zero_windows++;
          for (int b = 0; b < NB; b++)
            check(in_[b][0] == 0 && qn[b][0] == 0, $sformatf("band %0d not silent after switch", b));
        end
      end
    end
    $display("mechanisms: wraps=%0d windows_new=%0d spur_windows=%0d loopback_switches=%0d zero_windows=%0d",
             wraps, 7, spur_windows, switches, zero_windows);
    check(switches > 0 && zero_windows > 0, "mode switch exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
