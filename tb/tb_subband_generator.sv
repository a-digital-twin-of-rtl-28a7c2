// Testbench for subband_generator with its default 40 tones. Each tone gets
// FCW = 3400 + 600*t. The expected subband sum is built from real-valued
// ideal tones (amplitude 32112, phase from an integer accumulator model,
// truncated to 10 bits) divided by 64; sum_i/sum_q must match within 5 LSB,
// 18 clocks after the phase (17 CORDIC + 1 sum). A few per-tone reference
// outputs are checked against the same model within 6 LSB.
module tb_subband_generator;
  localparam int NT = 40;
  localparam int M = 65520;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw [NT];
  logic signed [15:0] si, sq;
  logic signed [15:0] ri [NT], rq [NT];
  logic wrap_any;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  subband_generator dut (.clk, .rst_n, .fcw, .sum_i(si), .sum_q(sq), .ref_i(ri), .ref_q(rq), .wrap_any);

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

  function automatic int unsigned phase_at(int t, int c);
    return int'((longint'(c) * (3400 + 600 * t)) % M);
  endfunction

  initial begin
    real ei, eq, tii, tqq;
    int nwrap = 0;
    for (int t = 0; t < NT; t++) fcw[t] = 16'(3400 + 600 * t);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(posedge clk); #1;
      nwrap += wrap_any;
      if (c >= 20) begin
        ei = 0; eq = 0;
        for (int t = 0; t < NT; t++) begin
          int unsigned p;
          p = phase_at(t, c - 17) >> 6;
          tii = AMP * $cos(2.0 * PI * p / 1024.0);
          tqq = AMP * $sin(2.0 * PI * p / 1024.0);
          ei += tii / 64.0;
          eq += tqq / 64.0;
          if (t % 13 == 0) begin
            p = phase_at(t, c - 16) >> 6;
            tii = AMP * $cos(2.0 * PI * p / 1024.0);
            check((ri[t] - tii) < 6.0 && (tii - ri[t]) < 6.0, $sformatf("ref t=%0d c=%0d", t, c));
          end
        end
        check((si - ei) < 5.0 && (ei - si) < 5.0, $sformatf("sum_i c=%0d got %0d exp %f", c, si, ei));
        check((sq - eq) < 5.0 && (eq - sq) < 5.0, $sformatf("sum_q c=%0d got %0d exp %f", c, sq, eq));
      end
    end
    check(nwrap > 100, "accumulators wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
