// Testbench for band_shifter. For several band indices, random 8-lane
// complex input is applied; one clock later every lane must equal
// (I + jQ) * exp(j*alpha*n) * 32767/32768 within 2 LSB, with
// alpha = (2*iband+1)/40 * 2*pi, n = 8*m + k counted from reset (or from the
// last band change, which here always coincides with a reset), computed with
// real arithmetic.
module tb_band_shifter;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic [3:0] iband;
  logic signed [15:0] ii [8], iq [8], oi [8], oq [8];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  band_shifter dut (.clk, .rst_n, .iband, .in_i(ii), .in_q(iq), .out_i(oi), .out_q(oq));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, c, s, ei, eq;
    int bands [4] = '{0, 6, 9, 3};
    for (int k = 0; k < 8; k++) begin ii[k] = 0; iq[k] = 0; end
    foreach (bands[bi]) begin
      rst_n = 0;
      iband = 4'(bands[bi]);
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      for (int m = 0; m < 400; m++) begin
        for (int k = 0; k < 8; k++) begin
          ii[k] = signed'(16'($urandom)) >>> 2;
          iq[k] = signed'(16'($urandom)) >>> 2;
        end
        @(posedge clk); #1;
        for (int k = 0; k < 8; k++) begin
          a = 2.0 * PI * (2 * bands[bi] + 1) / 40.0 * (8 * m + k);
          c = $cos(a) * 32767.0 / 32768.0;
          s = $sin(a) * 32767.0 / 32768.0;
          ei = ii[k] * c - iq[k] * s;
          eq = iq[k] * c + ii[k] * s;
          check((oi[k] - ei) < 2.0 && (ei - oi[k]) < 2.0 && (oq[k] - eq) < 2.0 && (eq - oq[k]) < 2.0,
                $sformatf("band %0d m=%0d k=%0d got (%0d,%0d) exp (%f,%f)", bands[bi], m, k, oi[k], oq[k], ei, eq));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
