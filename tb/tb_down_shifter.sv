// Testbench for down_shifter. Random I/Q samples are applied one per clock;
// one clock later the output must equal (I + jQ) * exp(-j*pi*n/2) with n the
// number of clocks since reset, evaluated with real cos/sin and rounded. Also
// drives -32768 to check saturating negation.
module tb_down_shifter;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] ii, iq, oi, oq;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  down_shifter dut (.clk, .rst_n, .in_i(ii), .in_q(iq), .out_i(oi), .out_q(oq));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip(real v);
    int r;
    r = int'(v);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  initial begin
    real c, s;
    int ei, eq;
    ii = 0; iq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      ii = (n % 97 == 5) ? -16'sd32768 : 16'($urandom);
      iq = 16'($urandom);
      @(posedge clk); #1;
      c = $cos(PI * n / 2.0);
      s = $sin(PI * n / 2.0);
      ei = clip(ii * c + iq * s);
      eq = clip(iq * c - ii * s);
      check(oi == 16'(ei) && oq == 16'(eq), $sformatf("n=%0d in=(%0d,%0d) got (%0d,%0d) exp (%0d,%0d)", n, ii, iq, oi, oq, ei, eq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
