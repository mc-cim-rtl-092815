// tb_xadc_sar: converts every value 0..31 and random values with
//  (a) a linear table: code must equal the value and take exactly 5 compares;
//  (b) a skewed table (most mass on small values): code must equal the
//      value, the number of compares must equal the depth of the value in a
//      reference iso-partition search computed here, frequent values must
//      take fewer than 5 compares and the average over the table's
//      distribution must be below 5.
module tb_xadc_sar;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; logic [4:0] value = 0; logic [15:0] cdf [33];
  logic busy, done; logic [5:0] ref_code; logic [4:0] code, ncyc;
  xadc_sar #(.BITS(5), .CDFW(16)) dut (.*);
  int checks = 0, failures = 0;
  int hist [32];
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic int ref_depth(input int v);
    int lo = 0, hi = 32, d = 0, s, tg;
    while (hi - lo > 1) begin
      tg = (int'(cdf[lo]) + int'(cdf[hi])) / 2;
      s = hi - 1;
      for (int k = hi - 1; k > lo; k--) if (int'(cdf[k]) >= tg) s = k;
      if (v >= s) lo = s; else hi = s;
      d++;
    end
    return d;
  endfunction
  task automatic convert(input int v, output int c, output int n);
    int cyc = 0;
    @(negedge clk); value = 5'(v); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    c = code; n = ncyc;
    check(cyc == n, "ncyc matches busy cycles");
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int c, n; longint tot, wsum;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k <= 32; k++) cdf[k] = 16'(k);
    for (int v = 0; v < 32; v++) begin
      convert(v, c, n);
      check(c == v && n == 5, $sformatf("symmetric v=%0d code=%0d n=%0d", v, c, n));
    end
    for (int k = 0; k < 32; k++) hist[k] = (k < 8) ? (400 >> k) + 1 : 1;
    cdf[0] = 0;
    for (int k = 1; k <= 32; k++) cdf[k] = cdf[k-1] + 16'(hist[k-1]);
    tot = 0; wsum = 0;
    for (int v = 0; v < 32; v++) begin
      convert(v, c, n);
      check(c == v, $sformatf("asymmetric v=%0d code=%0d", v, c));
      check(n == ref_depth(v), $sformatf("asymmetric v=%0d compares %0d ref %0d", v, n, ref_depth(v)));
      tot += hist[v] * n; wsum += hist[v];
    end
    convert(0, c, n); check(n < 5, "most frequent value converts in fewer than 5 compares");
    check(tot < 5 * wsum, $sformatf("average compares %f", real'(tot) / real'(wsum)));
    $display("average compares under the table's distribution: %f", real'(tot) / real'(wsum));
    for (int t = 0; t < 100; t++) begin
      int v;
      v = $urandom_range(0, 31);
      convert(v, c, n);
      check(c == v, "random value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
