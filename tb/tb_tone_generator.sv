// Testbench for tone_generator with FCW = 4000 (15.26 MHz). The expected
// samples come from an integer model of the accumulator, phase
// (phase + 4000) mod 65520, shifted right by 6 bits, and real cos/sin with the
// CORDIC amplitude; outputs must match within 6 LSB after the 17-clock
// latency. It then checks the periodicity the readout relies on: the samples
// of clocks n and n + 65520 are identical.
module tb_tone_generator;
  logic clk = 0, rst_n = 0;
  logic [15:0] fcw = 16'd4000;
  logic signed [15:0] ti, tq;
  logic wrap;
  int checks = 0, failures = 0;
  localparam real AMP = 19500.0 * 1.6467602578654548;
  localparam real PI = 3.14159265358979;
  localparam int LAT = 17;
  localparam int M = 65520;
  logic signed [15:0] hist_i [300], hist_q [300];

  always #2 clk = ~clk;
  tone_generator dut (.clk, .rst_n, .fcw, .tone_i(ti), .tone_q(tq), .wrap);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * (M + 2000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ph [$];
    int unsigned m;
    real ec, es;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    m = 0;
    // the phase register holds m(c) after c clocks; output at clock c+LAT
    for (int c = 0; c < M + 300; c++) begin
      ph.push_back(m);
      @(posedge clk); #1;
      m = (m + 4000) % M;
      if (c >= LAT && c < 2000) begin
        int unsigned p;
        p = ph[c - LAT + 1] >> 6;
        ec = AMP * $cos(2.0 * PI * p / 1024.0);
        es = AMP * $sin(2.0 * PI * p / 1024.0);
        check((ti - ec) < 6.0 && (ec - ti) < 6.0, $sformatf("I c=%0d got %0d exp %f", c, ti, ec));
        check((tq - es) < 6.0 && (es - tq) < 6.0, $sformatf("Q c=%0d got %0d exp %f", c, tq, es));
      end
      if (c >= 100 && c < 400) begin
        hist_i[c - 100] = ti;
        hist_q[c - 100] = tq;
      end
      if (c >= M + 100 && c < M + 400 - 100) begin
        check(ti == hist_i[c - M - 100] && tq == hist_q[c - M - 100],
              $sformatf("period 65520 c=%0d", c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
