// tb_rng_calibrator: drives the calibrator with a model RNG defined here whose
// p1 = 0.5 + 0.06 * (N - M) + offset, for several offsets and targets
// (0.3, 0.5, 0.7), and checks that it finishes without failing, that the
// final column counts give a bias within the tolerance plus a sampling
// margin, that it starts from N = M = 4, and that exactly NTEST test bits are
// requested per try.
module tb_rng_calibrator;
  localparam int NT = 500;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; logic [8:0] target, tol;
  logic rng_en, rng_bit = 0, rng_valid = 0;
  logic [3:0] m_cols, n_cols; logic done, fail; logic [7:0] tries;
  rng_calibrator #(.NTEST(NT), .MAXC(8), .INITC(4)) dut (.*);
  real offset;
  int checks = 0, failures = 0, req = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic real p1f(input int m, input int n);
    real p = 0.5 + 0.06 * (real'(n) - real'(m)) + offset;
    return (p < 0.02) ? 0.02 : (p > 0.98) ? 0.98 : p;
  endfunction
  always @(posedge clk) begin
    rng_valid <= rng_en;
    if (rng_en) rng_bit <= (real'($urandom % 10000) / 10000.0) < p1f(m_cols, n_cols);
    if (rng_en) req++;
  end
  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real offs [5] = '{0.0, 0.2, -0.25, 0.1, -0.1};
    real pts  [3] = '{0.3, 0.5, 0.7};
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (offs[i]) foreach (pts[j]) begin
      offset = offs[i]; target = 9'($rtoi(pts[j] * NT)); tol = 9'd30; req = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check(m_cols == 4 && n_cols == 4, "starts with N = M");
      while (!done) @(negedge clk);
      check(!fail, $sformatf("calibrated offset %f target %f", offset, pts[j]));
      check(req == NT * int'(tries), $sformatf("%0d test bits for %0d tries", req, tries));
      check(p1f(m_cols, n_cols) > pts[j] - 0.09 && p1f(m_cols, n_cols) < pts[j] + 0.09,
            $sformatf("final bias %f for target %f (M=%0d N=%0d)", p1f(m_cols, n_cols), pts[j], m_cols, n_cols));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
