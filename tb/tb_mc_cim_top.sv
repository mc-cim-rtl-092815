// tb_mc_cim_top: end-to-end test of the MC-CIM macro at its default size.
//
// Writes random 6-bit sign-magnitude weights for both output neurons, loads a
// random activation vector, calibrates the four RNGs to p1 = 0.5, and runs
// three inputs of 30 MC-Dropout iterations each:
//   A  RNG dropout words, typical flow, symmetric SAR search
//   B  RNG dropout words, compute reuse, asymmetric SAR search
//   C  ordered schedule words from the schedule SRAM, compute reuse,
//      asymmetric search (run twice: with B's table, then with its own)
// Every iteration's product-sums are compared with
//   sum over kept columns of sign(x)|w| + sign(w)|x|  (0 for a dropped neuron)
// computed here from the weights and the dropout word the macro reports.
// Also checked: symmetric conversions take exactly 5 compares each, the
// asymmetric ones fewer on average, ordered schedules skip more evaluations
// than random words, and each mechanism (calibration, RNG wait, output
// dropout, full and reuse passes, skipped evaluations, schedule mode) occurs.
module tb_mc_cim_top;
  import mc_cim_pkg::*;
  localparam int unsigned DW = COLS + NEUR;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  w_we = 0;
  logic [3:0]            w_addr = '0;
  logic [COLS-1:0]       w_data = '0;
  logic                  x_load = 0;
  logic [COLS-1:0]       x_sign_in = '0;
  logic [COLS-1:0]       x_mag_in [MAGB];
  logic                  sched_we = 0;
  logic [4:0]            sched_waddr = '0;
  logic [DW-1:0]         sched_wdata = '0;
  logic                  cal_start = 0;
  logic [8:0]            cal_target = 9'd250, cal_tol = 9'd30;
  logic [NRNG-1:0]       cal_done, cal_fail;
  logic [3:0]            rng_m_cols [NRNG];
  logic [3:0]            rng_n_cols [NRNG];
  logic                  start = 0;
  logic [7:0]            num_iter = 8'd30;
  logic                  cr_en = 0, use_sched = 0;
  logic [15:0]           adc_cdf [33];
  logic                  busy, done, iter_valid;
  logic [7:0]            iter_idx;
  logic signed [PSW-1:0] result [NEUR];
  logic [NEUR-1:0]       result_kept;
  logic [COLS-1:0]       do_in_word;
  logic [31:0]           n_eval, n_skip, n_adc_cyc, n_reuse_pass, n_full_pass, n_mac;

  mc_cim_top dut (.*);

  int checks = 0, failures = 0;
  int wv [NEUR][COLS];  // signed weights
  int xv [COLS];        // signed activations
  logic [DW-1:0] sched [ITERS];
  int n_outdrop = 0, n_iters_seen = 0;
  int evA, skA, adcA, evB, adcB, skC, evC, reuseB, fullA, macA, macB, macC, adcC, adcC2, evC2;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sgn(input int v); return (v < 0) ? -1 : 1; endfunction
  function automatic int absv(input int v); return (v < 0) ? -v : v; endfunction

  function automatic int ref_ps(input int k, input logic [COLS-1:0] m);
    int s = 0;
    for (int i = 0; i < COLS; i++)
      if (m[i]) s += sgn(xv[i]) * absv(wv[k][i]) + sgn(wv[k][i]) * absv(xv[i]);
    return s;
  endfunction

  // histogram of converted sum-line values, used to build the asymmetric
  // search table from the statistics of the previous input
  int hist [32];
  always @(posedge clk) if (rst_n && dut.adc_start) hist[dut.adc_value]++;

  task automatic cdf_from_hist();
    adc_cdf[0] = 0;
    for (int k = 1; k <= 32; k++) adc_cdf[k] = adc_cdf[k-1] + 16'(hist[k-1]) + 16'd1;
    for (int k = 0; k < 32; k++) hist[k] = 0;
  endtask

  // compare every iteration's output with the reference
  always @(posedge clk) begin
    if (rst_n && iter_valid) begin
      n_iters_seen++;
      for (int k = 0; k < NEUR; k++) begin
        if (!result_kept[k]) begin
          n_outdrop++;
          check(result[k] == 0, "dropped neuron gives 0");
        end else begin
          check(int'(result[k]) == ref_ps(k, do_in_word),
                $sformatf("iter %0d neuron %0d: got %0d expected %0d", iter_idx, k,
                          result[k], ref_ps(k, do_in_word)));
        end
      end
      if (use_sched)
        check({result_kept, do_in_word} == sched[iter_idx[4:0]], "schedule word used");
    end
  end

  task automatic run_input();
    int t0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    t0 = n_iters_seen;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(n_iters_seen - t0 == 30, "30 iterations reported");
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int j;
    for (int b = 0; b < MAGB; b++) x_mag_in[b] = '0;
    for (int k = 0; k <= 32; k++) adc_cdf[k] = 16'(k);
    for (int k = 0; k < 32; k++) hist[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights: row k*6 = sign plane, rows k*6+1+b = magnitude bit b
    for (int k = 0; k < NEUR; k++)
      for (int i = 0; i < COLS; i++) wv[k][i] = int'($urandom_range(0, 62)) - 31;
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] row;
      int k, p, a;
      row = '0; k = r / NBITS; p = r % NBITS;
      for (int i = 0; i < COLS; i++)
        if (k < NEUR) begin
          a = absv(wv[k][i]);
          row[i] = (p == 0) ? (wv[k][i] < 0) : a[p-1];
        end else row[i] = 1'($urandom);
      @(negedge clk) begin w_we = 1; w_addr = 4'(r); w_data = row; end
    end
    @(negedge clk) w_we = 0;
    // activations
    for (int i = 0; i < COLS; i++) begin
      xv[i] = int'($urandom_range(0, 62)) - 31;
      x_sign_in[i] = xv[i] < 0;
      for (int b = 0; b < MAGB; b++) x_mag_in[b][i] = 1'(absv(xv[i]) >> b);
    end
    @(negedge clk) x_load = 1; @(negedge clk) x_load = 0;

    // RNG calibration
    @(negedge clk) cal_start = 1; @(negedge clk) cal_start = 0;
    while (!(&cal_done)) @(posedge clk);
    check(cal_fail == '0, "all RNGs calibrated");
    for (int g = 0; g < NRNG; g++) $display("RNG %0d: M=%0d N=%0d", g, rng_m_cols[g], rng_n_cols[g]);

    // A: typical flow, symmetric ADC
    cr_en = 0; use_sched = 0;
    run_input();
    evA = n_eval; skA = n_skip; adcA = n_adc_cyc; fullA = n_full_pass; macA = n_mac;
    check(n_adc_cyc == 5 * n_eval, $sformatf("symmetric SAR: %0d compares for %0d conversions", n_adc_cyc, n_eval));
    check(n_reuse_pass == 0, "no reuse passes in typical flow");

    // B: compute reuse, asymmetric ADC with the table built from the values
    // converted during A
    cdf_from_hist();
    cr_en = 1;
    run_input();
    evB = n_eval; adcB = n_adc_cyc; reuseB = n_reuse_pass; macB = n_mac;
    check(n_reuse_pass > 0, "compute-reuse passes happened");
    check(adcB < 5 * evB, $sformatf("asymmetric SAR: %0d compares for %0d conversions", adcB, evB));

    cdf_from_hist();
    // C: ordered schedule, one or two bits change between successive words
    sched[0] = {NEUR'('1), COLS'($urandom)};
    for (int t = 1; t < ITERS; t++) begin
      sched[t] = sched[t-1];
      j = $urandom_range(0, COLS-1);
      sched[t][j] = ~sched[t][j];
      if (t % 3 == 0) begin
        j = $urandom_range(0, COLS-1);
        sched[t][j] = ~sched[t][j];
      end
    end
    sched[ITERS/2][COLS] = 1'b0;   // one output dropout
    for (int t = 0; t < ITERS; t++) begin
      @(negedge clk) begin sched_we = 1; sched_waddr = 5'(t); sched_wdata = sched[t]; end
    end
    @(negedge clk) sched_we = 0;
    use_sched = 1;
    run_input();
    skC = n_skip; evC = n_eval; macC = n_mac; adcC = n_adc_cyc;
    check(skC > skA, $sformatf("ordered schedule skips more evaluations (%0d vs %0d)", skC, skA));
    check(macC * 3 < macA, $sformatf("ordered schedule with reuse needs far fewer column activations (%0d vs %0d)", macC, macA));
    // C again, with the search table built from C's own statistics
    cdf_from_hist();
    run_input();
    adcC2 = n_adc_cyc; evC2 = n_eval;
    check(adcC2 * evB < adcB * evC2, $sformatf("ordered reuse with its own table converts in fewer compares (avg %0.2f)", real'(adcC2)/real'(evC2)));
    check(adcC2 < adcC, "tuned table beats the untuned one");

    $display("A typical : eval=%0d skip=%0d compares=%0d full=%0d mac=%0d", evA, skA, adcA, fullA, macA);
    $display("B reuse   : eval=%0d compares=%0d (avg %0.2f) reuse=%0d mac=%0d", evB, adcB, real'(adcB)/real'(evB), reuseB, macB);
    $display("C ordered : eval=%0d skip=%0d mac=%0d compares=%0d (avg %0.2f) reuse=%0d", evC, skC, macC, adcC, real'(adcC)/real'(evC), n_reuse_pass);
    $display("C2 ordered, own table: eval=%0d compares=%0d (avg %0.2f)", evC2, adcC2, real'(adcC2)/real'(evC2));
    check(n_outdrop > 0, "output dropout happened");
    check(fullA > 0, "full passes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
