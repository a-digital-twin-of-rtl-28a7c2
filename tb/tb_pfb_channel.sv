// Testbench for pfb_channel, band 6. Two parts:
//  1. Bit-exact check against a model written here: the phasor table is
//     recomputed as round(32767*cos/sin(2*pi*p/40)), the input is demodulated,
//     filtered with the 128 taps of kid_pkg::FIR_COEF, kept every 8th sample,
//     multiplied by j^m and its real part taken, with the same truncations.
//     The input is random; the output must match exactly, 3 clocks later.
//  2. Function: a real tone at 602.76 MHz (band 6 carries 550..750 MHz) must
//     come out as a 15.26 MHz tone of half the input amplitude (within 3%),
//     and a tone at 402.76 MHz (band 4) must be rejected by at least 66 dB.
module tb_pfb_channel;
  import kid_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic [3:0] iband = 4'd6;
  sample_t x [8];
  sample_t xp;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  pfb_channel dut (.clk, .rst_n, .iband, .x, .x_poly(xp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic longint fl(longint a, int sh);  // arithmetic shift right
    return a >>> sh;
  endfunction

  int zi [$], zq [$];   // demodulated samples, index = sample number
  int yi [$], yq [$];   // decimated filter outputs, index = clock

  task automatic model_clock(int e);
    longint fi, fq;
    int p, c, s;
    for (int k = 0; k < 8; k++) begin
      p = ((2 * 6 + 1) * (8 * e + k)) % 40;
      c = int'($floor(32767.0 * $cos(2.0 * PI * p / 40.0) + 0.5));
      s = int'($floor(32767.0 * $sin(2.0 * PI * p / 40.0) + 0.5));
      zi.push_back(sat(fl(longint'(x[k]) * c, 15)));
      zq.push_back(sat(-fl(longint'(x[k]) * s, 15)));
    end
    fi = 0; fq = 0;
    for (int j = 0; j < 128; j++) begin
      int idx;
      idx = 8 * e + 7 - j;
      if (idx >= 0) begin
        fi += longint'(FIR_COEF[j]) * zi[idx];
        fq += longint'(FIR_COEF[j]) * zq[idx];
      end
    end
    yi.push_back(sat(fl(fi, 15)));
    yq.push_back(sat(fl(fq, 15)));
  endtask

  function automatic int expect_out(int e);   // x_poly after clock e+2
    case ((e + 2) % 4)
      0: return yi[e];
      1: return sat(-yq[e]);
      2: return sat(-yi[e]);
      default: return yq[e];
    endcase
  endfunction

  task automatic tone_run(real f_mhz, real amp, output real mag);
    real ci, cq, f_out;
    f_out = (f_mhz - 650.0 + 62.5) / 250.0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ci = 0; cq = 0;
    for (int e = 0; e < 4100; e++) begin
      for (int k = 0; k < 8; k++)
        x[k] = 16'(int'(amp * $cos(2.0 * PI * f_mhz / 2000.0 * (8 * e + k))));
      @(posedge clk); #1;
      if (e >= 100 && e < 4100) begin
        ci += xp * $cos(2.0 * PI * f_out * e);
        cq += xp * $sin(2.0 * PI * f_out * e);
      end
    end
    mag = 2.0 * $sqrt(ci * ci + cq * cq) / 4000.0;
  endtask

  initial begin
    real mag;
    for (int k = 0; k < 8; k++) x[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int e = 0; e < 3000; e++) begin
      for (int k = 0; k < 8; k++) x[k] = 16'($urandom);
      model_clock(e);
      @(posedge clk); #1;
      if (e >= 2) check(xp == 16'(expect_out(e - 2)),
                        $sformatf("clock %0d got %0d exp %0d", e, xp, expect_out(e - 2)));
    end
    // in-band tone: 602.76 MHz, amplitude 20000 -> 15.26 MHz at 10000
    tone_run(650.0 - 62.5 + 15.2588, 20000.0, mag);
    check(mag > 9700.0 && mag < 10300.0, $sformatf("in-band amplitude %f", mag));
    // band-4 tone seen through band 6: at least 60 dB down (amplitude < 10)
    tone_run(450.0 - 62.5 + 15.2588, 20000.0, mag);
    check(mag < 10.0, $sformatf("out-of-band amplitude %f", mag));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
