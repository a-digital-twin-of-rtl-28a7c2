// Testbench for upsampler. Random complex samples x[m] are applied one per
// clock. One clock later lane k must hold the linear interpolation
// x[m-1] + (x[m] - x[m-1]) * k / 8 (rounded toward minus infinity), for
// k = 0..7, on both I and Q. A constant input must come out unchanged on all
// lanes (unity DC gain).
module tb_upsampler;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] ii, iq;
  logic signed [15:0] oi [8], oq [8];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  upsampler dut (.clk, .rst_n, .in_i(ii), .in_q(iq), .out_i(oi), .out_q(oq));

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

  function automatic int lin(int a, int b, int k);
    int d;
    d = (b - a) * k;
    return a + ((d >= 0) ? d / 8 : -((-d + 7) / 8));
  endfunction

  initial begin
    int pi_, pq_;
    ii = 0; iq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    pi_ = 0; pq_ = 0;
    for (int m = 0; m < 2000; m++) begin
      if (m < 1500) begin
        ii = 16'($urandom);
        iq = 16'($urandom);
      end else begin
        ii = 16'sd12345;
        iq = -16'sd321;
      end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        check(oi[k] == 16'(lin(pi_, ii, k)), $sformatf("I m=%0d k=%0d got %0d exp %0d", m, k, oi[k], lin(pi_, ii, k)));
        check(oq[k] == 16'(lin(pq_, iq, k)), $sformatf("Q m=%0d k=%0d", m, k));
      end
      pi_ = ii; pq_ = iq;
    end
    for (int k = 0; k < 8; k++) check(oi[k] == 16'sd12345 && oq[k] == -16'sd321, "DC gain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
