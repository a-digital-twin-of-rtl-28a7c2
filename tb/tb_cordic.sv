// Testbench for cordic. Feeds every one of the 1024 phases, one per clock,
// and checks 17 clocks later (its pipeline latency) that cos_o and sin_o are
// within 3 LSB of 32112*cos/sin(2*pi*p/1024), computed with real arithmetic.
// Also checks that the output amplitude sqrt(I^2 + Q^2) stays within
// 32112 +/- 8 for all phases.
module tb_cordic;
  logic clk = 0, rst_n = 0;
  logic [9:0] phase;
  logic signed [15:0] c_o, s_o;
  int checks = 0, failures = 0;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam real PI = 3.14159265358979;
  localparam int LAT = 17;

  always #2 clk = ~clk;
  cordic dut (.clk, .rst_n, .phase, .cos_o(c_o), .sin_o(s_o));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ec, es, mag;
    int p;
    phase = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 1024 + LAT; c++) begin
      phase = 10'(c);
      @(posedge clk); #1;
      if (c >= LAT - 1) begin
        p = c - (LAT - 1);
        ec = AMP * $cos(2.0 * PI * p / 1024.0);
        es = AMP * $sin(2.0 * PI * p / 1024.0);
        check((c_o - ec) < 3.0 && (ec - c_o) < 3.0, $sformatf("cos p=%0d got %0d exp %f", p, c_o, ec));
        check((s_o - es) < 3.0 && (es - s_o) < 3.0, $sformatf("sin p=%0d got %0d exp %f", p, s_o, es));
        mag = $sqrt(real'(c_o) * c_o + real'(s_o) * s_o);
        check(mag > AMP - 8.0 && mag < AMP + 8.0, $sformatf("mag p=%0d %f", p, mag));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
