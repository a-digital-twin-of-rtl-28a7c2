// Testbench for ddc. Part 1 uses a short window (WINDOW = 100) and random
// inputs: every window's outputs must equal the sums of x*ref_i and x*ref_q
// accumulated here, and valid must pulse exactly every 100 clocks. Part 2
// runs the default 65520-sample window with a tone on the 250 MHz/65520 grid
// plus a second tone 3 grid steps away: the output must be
// W*A*R/2 for the matched tone (within 0.1%), the second tone must vanish
// (the boxcar nulls), and valid must come every 65520 clocks.
module tb_ddc;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] x, ri, rq;
  logic signed [47:0] oi_s, oq_s, oi_l, oq_l;
  logic v_s, v_l;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;
  ddc #(.WINDOW(100)) dut_s (.clk, .rst_n, .x, .ref_i(ri), .ref_q(rq), .i_ddc(oi_s), .q_ddc(oq_s), .valid(v_s));
  ddc dut_l (.clk, .rst_n, .x, .ref_i(ri), .ref_q(rq), .i_ddc(oi_l), .q_ddc(oq_l), .valid(v_l));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(4 * 65520 * 3 + 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint si, sq, ei, eq;
    int cnt, last_v, nv_l, last_vl;
    real a1, a2;
    longint p1, p2;
    x = 0; ri = 0; rq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    si = 0; sq = 0; cnt = 0; last_v = -1; nv_l = 0; last_vl = -1;
    for (int c = 0; c < 2 * 65520 + 10; c++) begin
      if (c < 1000) begin
        x = 16'($urandom); ri = 16'($urandom); rq = 16'($urandom);
      end else begin
        // tone on the grid: fcw 4000 (matched) and fcw 4003 (3 bins away)
        p1 = (c * 4000) % 65520;
        p2 = (c * 4003) % 65520;
        a1 = 2.0 * PI * p1 / 65520.0;
        a2 = 2.0 * PI * p2 / 65520.0;
        x  = 16'(int'(10000.0 * $cos(a1) + 8000.0 * $cos(a2)));
        ri = 16'(int'(30000.0 * $cos(a1)));
        rq = 16'(int'(30000.0 * $sin(a1)));
      end
      if (c < 1000) begin
        si += longint'(x) * ri;
        sq += longint'(x) * rq;
      end
      @(posedge clk); #1;
      if (c < 1000) begin
        if ((c + 1) % 100 == 0) begin
          ei = si; eq = sq; si = 0; sq = 0;
          check(v_s == 1'b1, $sformatf("valid at c=%0d", c));
          check(oi_s == 48'(ei) && oq_s == 48'(eq), $sformatf("sums c=%0d", c));
          if (last_v >= 0) check(c - last_v == 100, "valid period 100");
          last_v = c;
        end else begin
          check(v_s == 1'b0, $sformatf("no valid at c=%0d", c));
        end
      end
      if (v_l) begin
        nv_l++;
        if (last_vl >= 0) check(c - last_vl == 65520, $sformatf("valid period %0d", c - last_vl));
        last_vl = c;
        if (nv_l == 2) begin
          // x*ref_i averages to 10000*30000/2 per sample over a full period
          real ex;
          ex = 65520.0 * 10000.0 * 30000.0 / 2.0;
          check($sqrt(real'(oi_l) * oi_l + real'(oq_l) * oq_l) > ex * 0.999 &&
                $sqrt(real'(oi_l) * oi_l + real'(oq_l) * oq_l) < ex * 1.001,
                $sformatf("matched tone %0d %0d exp %f", oi_l, oq_l, ex));
        end
      end
    end
    check(nv_l == 2, $sformatf("long windows %0d", nv_l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
