// tb_cci_rng: checks the behavioural CCI RNG model: one bit per enabled clock
// with q_valid one cycle later, and a bias that moves with the column counts
// on the two ends (p1 rises with N - M by about 0.06 per column).
module tb_cci_rng;
  logic clk = 0; always #5 clk = ~clk;
  logic en = 0; logic [3:0] m_cols = 4, n_cols = 4; logic q_rng, q_valid;
  cci_rng #(.MAXC(8), .SEED(3)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real clip(input real p);
    return (p < 0.02) ? 0.02 : (p > 0.98) ? 0.98 : p;
  endfunction
  task automatic measure(input int m, input int n, output real p);
    int ones = 0, nv = 0;
    @(negedge clk); m_cols = 4'(m); n_cols = 4'(n); en = 1;
    repeat (2000) begin
      @(negedge clk); if (q_valid) begin nv++; ones += q_rng; end
    end
    en = 0; @(negedge clk);
    check(nv >= 1999, "one valid bit per enabled clock");
    p = real'(ones) / real'(nv);
  endtask
  initial begin
    real p44, p08, p80, e44, e08, e80, off;
    measure(4, 4, p44); measure(0, 8, p08); measure(8, 0, p80);
    // mismatch offset expected for SEED = 3: (hash mod 1001 - 500) * 0.7 / 1000
    off = (real'(int'((32'd3 * 32'd2654435761 + 32'd12345) % 32'd1001)) - 500.0) * 0.0007;
    e44 = clip(0.5 + off); e08 = clip(0.5 + 0.48 + off); e80 = clip(0.5 - 0.48 + off);
    $display("offset=%f p(4,4)=%f p(0,8)=%f p(8,0)=%f", off, p44, p08, p80);
    check(p44 > e44 - 0.04 && p44 < e44 + 0.04, "bias at equal columns");
    check(p08 > e08 - 0.05 && p08 < e08 + 0.05, "bias with more right columns");
    check(p80 > e80 - 0.05 && p80 < e80 + 0.05, "bias with more left columns");
    check(p08 > p80, "p1 rises with N - M");
    @(negedge clk); check(!q_valid, "no bit when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
