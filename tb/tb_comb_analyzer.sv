// Testbench for comb_analyzer, reduced to 2 bands of 2 tone analyzers with the
// default 65520-sample window. The 2 GS/s input, built here, carries two
// real tones of amplitude 6000: band 0 tone 0 (fcw 9000) and band 1 tone 0
// (fcw 5000), at f = fcw*250/65520 - 62.5 + (2b+1)*50 MHz. The references
// are ideal 30000*cos/sin(2*pi*fcw*n/65520) for the four tones (fcw 9000,
// 15000 in band 0; 5000, 11000 in band 1). In the second window the two
// matched analyzers must give |I + jQ| = W*6000*30000/4 within 1%, the two
// analyzers without a tone less than 0.1% of that, and valid must come every
// 65520 clocks.
module tb_comb_analyzer;
  localparam real PI = 3.14159265358979;
  localparam int NB = 2, NT = 2, M = 65520;
  localparam int FCW_T [NB][NT] = '{'{9000, 15000}, '{5000, 11000}};
  logic clk = 0, rst_n = 0;
  logic signed [15:0] x [8];
  logic signed [15:0] ri [NB][NT], rq [NB][NT];
  logic signed [47:0] oi [NB][NT], oq [NB][NT];
  logic signed [15:0] xp [NB];
  logic valid;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  comb_analyzer #(.N_BANDS(NB), .N_TONES(NT)) dut (
    .clk, .rst_n, .x, .ref_i(ri), .ref_q(rq), .i_ddc(oi), .q_ddc(oq), .x_poly(xp), .valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * (2 * M + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nv = 0, lastv = -1;
    real ex, mag;
    // bins of the two input tones in units of 2000 MHz / (8*65520)
    longint b0, b1;
    b0 = 9000 - 16380 + 13104;
    b1 = 5000 - 16380 + 3 * 13104;
    for (int k = 0; k < 8; k++) x[k] = 0;
    for (int b = 0; b < NB; b++) for (int t = 0; t < NT; t++) begin ri[b][t] = 0; rq[b][t] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 2 * M + 10; c++) begin
      for (int k = 0; k < 8; k++) begin
        longint n, p0, p1;
        n = 8 * c + k;
        p0 = (n * b0) % (8 * M); if (p0 < 0) p0 += 8 * M;
        p1 = (n * b1) % (8 * M); if (p1 < 0) p1 += 8 * M;
        x[k] = 16'(int'(6000.0 * $cos(2.0 * PI * p0 / (8.0 * M)) + 6000.0 * $cos(2.0 * PI * p1 / (8.0 * M))));
      end
      for (int b = 0; b < NB; b++)
        for (int t = 0; t < NT; t++) begin
          longint p;
          p = (longint'(c) * FCW_T[b][t]) % M;
          ri[b][t] = 16'(int'(30000.0 * $cos(2.0 * PI * p / M)));
          rq[b][t] = 16'(int'(30000.0 * $sin(2.0 * PI * p / M)));
        end
      @(posedge clk); #1;
      if (valid) begin
        nv++;
        if (lastv >= 0) check(c - lastv == M, $sformatf("valid period %0d", c - lastv));
        lastv = c;
        if (nv == 2) begin
          ex = real'(M) * 6000.0 * 30000.0 / 4.0;
          for (int b = 0; b < NB; b++)
            for (int t = 0; t < NT; t++) begin
              mag = $sqrt(real'(oi[b][t]) ** 2 + real'(oq[b][t]) ** 2);
              if (t == 0)
                check(mag > 0.99 * ex && mag < 1.01 * ex, $sformatf("band %0d tone %0d: %e expected %e", b, t, mag, ex));
              else
                check(mag < 0.001 * ex, $sformatf("band %0d tone %0d (no tone): %e", b, t, mag));
            end
        end
      end
    end
    check(nv == 2, $sformatf("windows %0d", nv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
