// Testbench for phase_accumulator. Two instances, the modulo-65520 accumulator
// and a modulo-65536 one, are driven with FCW = 4000. Every cycle the phase is
// compared with an integer model (phase + fcw) mod M, the wrap flag with the
// model's wrap, and the measured repetition period of the phase sequence with
// M / gcd(fcw, M): 819 clocks for 65520, 2048 for 65536. A second FCW near
// the modulus exercises wraps on almost every cycle.
module tb_phase_accumulator;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw;
  logic [15:0] ph_a, ph_b;
  logic wrap_a, wrap_b;
  int checks = 0, failures = 0;
  int unsigned ma, mb;
  int first_zero_a, first_zero_b, per_a, per_b, wraps_a;

  always #2 clk = ~clk;

  phase_accumulator #(.MODULUS(65520)) dut_a (.clk, .rst_n, .fcw, .phase(ph_a), .wrap(wrap_a));
  phase_accumulator #(.MODULUS(65536)) dut_b (.clk, .rst_n, .fcw, .phase(ph_b), .wrap(wrap_b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fcw = 16'd4000;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    ma = 0; mb = 0;
    per_a = 0; per_b = 0; wraps_a = 0;
    for (int c = 1; c <= 5000; c++) begin
      @(posedge clk); #1;
      check(wrap_a == ((ma + fcw) >= 65520), $sformatf("wrap_a c=%0d", c));
      check(wrap_b == ((mb + fcw) >= 65536), $sformatf("wrap_b c=%0d", c));
      wraps_a += wrap_a;
      ma = (ma + fcw) % 65520;
      mb = (mb + fcw) % 65536;
      check(ph_a == 16'(ma), $sformatf("ph_a c=%0d got %0d exp %0d", c, ph_a, ma));
      check(ph_b == 16'(mb), $sformatf("ph_b c=%0d got %0d exp %0d", c, ph_b, mb));
      if (ph_a == 0 && per_a == 0) per_a = c;
      if (ph_b == 0 && per_b == 0) per_b = c;
    end
    check(per_a == 819,  $sformatf("period 65520: %0d", per_a));
    check(per_b == 2048, $sformatf("period 65536: %0d", per_b));
    check(wraps_a == 5000 * 4000 / 65520, $sformatf("wrap count %0d", wraps_a));
    // large FCW: wrap with excess on most cycles
    fcw = 16'd65519;
    for (int c = 0; c < 200; c++) begin
      @(posedge clk); #1;
      ma = (ma + fcw) % 65520;
      check(ph_a == 16'(ma), $sformatf("ph_a big fcw got %0d exp %0d", ph_a, ma));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
