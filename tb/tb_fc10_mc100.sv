// tb_fc10_mc100: a fully connected layer of 10 inputs and 10 output neurons
// under 100 MC-Dropout samples, run on the macro at its default size.
//
// The layer is the small example used to motivate compute reuse. Ten output
// neurons need 60 rows, so the layer runs as five weight loads of two
// neurons each (columns 0..9 used, columns 10..30 hold zero weights and zero
// activations). For every load the same input is run with 100 RNG dropout
// samples twice: typical flow, then compute reuse. Every product-sum is
// compared with the operator evaluated here on the reported dropout word.
//
// The testbench also counts multiply-accumulates in the layer's own terms:
// typical flow = kept inputs per kept neuron; compute reuse = inputs that
// changed since the previous sample (a full count after a neuron was dropped
// at the output). With independent samples at p = 0.5, about half the inputs
// change between samples, so the two counts come out close; the savings come
// from ordering. That is shown on 30 of the samples: they are written into
// the schedule memory once in drawn order and once reordered by a greedy
// nearest-neighbour tour (Hamming distance over the 10 used inputs, a
// simple heuristic for the travelling-salesman ordering), and the ordered
// run must need fewer multiply-accumulates and fewer clock cycles, and
// under 70% of the multiply-accumulates of the typical flow on those words.
module tb_fc10_mc100;
  import mc_cim_pkg::*;
  localparam int unsigned DW = COLS + NEUR;
  localparam int NIN = 10, NOUT = 10, NS = 100;

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
  logic [7:0]            num_iter = 8'(NS);
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
  int wl [NOUT][NIN];      // layer weights
  int xv [NIN];            // layer input
  int ld;                  // current weight load (neurons 2*ld, 2*ld+1)
  int n_seen, mac_model;
  logic [COLS-1:0] prev_do;
  logic [NEUR-1:0] prev_kept;
  bit              first_seen;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sgn(input int v); return (v < 0) ? -1 : 1; endfunction
  function automatic int absv(input int v); return (v < 0) ? -v : v; endfunction
  function automatic int pop10(input logic [COLS-1:0] m);
    int c;
    c = 0;
    for (int i = 0; i < NIN; i++) c += int'(m[i]);
    return c;
  endfunction

  function automatic int ref_ps(input int n, input logic [COLS-1:0] m);
    int s;
    s = 0;
    for (int i = 0; i < NIN; i++)
      if (m[i]) s += sgn(xv[i]) * absv(wl[n][i]) + sgn(wl[n][i]) * absv(xv[i]);
    return s;
  endfunction

  // per-sample checks and the model's multiply-accumulate count
  always @(posedge clk) begin
    if (rst_n && iter_valid) begin
      n_seen++;
      for (int k = 0; k < NEUR; k++) begin
        if (!result_kept[k]) check(result[k] == 0, "dropped neuron gives 0");
        else begin
          check(int'(result[k]) == ref_ps(2*ld + k, do_in_word),
                $sformatf("load %0d sample %0d neuron %0d: got %0d expected %0d", ld, iter_idx,
                          2*ld + k, result[k], ref_ps(2*ld + k, do_in_word)));
          if (cr_en && !first_seen && prev_kept[k]) mac_model += pop10(do_in_word ^ prev_do);
          else                                      mac_model += pop10(do_in_word);
        end
      end
      prev_do = do_in_word; prev_kept = result_kept; first_seen = 1'b0;
    end
  end

  // one input through the macro; returns clock cycles from start to done
  task automatic run_input(input int nexp, output int cyc, output int mac);
    n_seen = 0; mac_model = 0; first_seen = 1'b1; cyc = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);
    check(n_seen == nexp, $sformatf("%0d samples reported (got %0d)", nexp, n_seen));
    mac = mac_model;
  endtask

  task automatic load_weights(input int l);
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] row;
      int k, p, a;
      row = '0; k = r / NBITS; p = r % NBITS;
      if (k < NEUR)
        for (int i = 0; i < NIN; i++) begin
          a = absv(wl[2*l + k][i]);
          row[i] = (p == 0) ? (wl[2*l + k][i] < 0) : a[p-1];
        end
      @(negedge clk) begin w_we = 1; w_addr = 4'(r); w_data = row; end
    end
    @(negedge clk) w_we = 0;
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc_t, cyc_r, mac_t, mac_r, sum_ct, sum_cr, sum_mt, sum_mr;
    int cyc_u, cyc_o, mac_u, mac_o, best, bd, dist_u, dist_o, mac_typ;
    logic [DW-1:0] drawn [ITERS];
    logic [DW-1:0] tour  [ITERS];
    bit used [ITERS];
    sum_ct = 0; sum_cr = 0; sum_mt = 0; sum_mr = 0; ld = 0;
    for (int b = 0; b < MAGB; b++) x_mag_in[b] = '0;
    for (int k = 0; k <= 32; k++) adc_cdf[k] = 16'(k);
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int n = 0; n < NOUT; n++)
      for (int i = 0; i < NIN; i++) wl[n][i] = int'($urandom_range(0, 62)) - 31;
    for (int i = 0; i < NIN; i++) begin
      xv[i] = int'($urandom_range(0, 62)) - 31;
      x_sign_in[i] = xv[i] < 0;
      for (int b = 0; b < MAGB; b++) x_mag_in[b][i] = 1'(absv(xv[i]) >> b);
    end
    @(negedge clk) x_load = 1; @(negedge clk) x_load = 0;

    @(negedge clk) cal_start = 1; @(negedge clk) cal_start = 0;
    while (!(&cal_done)) @(posedge clk);
    check(cal_fail == '0, "all RNGs calibrated");

    // 100 RNG samples per weight load, typical flow and compute reuse
    for (int l = 0; l < NOUT / NEUR; l++) begin
      ld = l;
      load_weights(l);
      cr_en = 0; run_input(NS, cyc_t, mac_t);
      check(n_reuse_pass == 0, "typical flow uses no reuse pass");
      cr_en = 1; run_input(NS, cyc_r, mac_r);
      check(n_reuse_pass > 0, "compute reuse used");
      sum_ct += cyc_t; sum_cr += cyc_r; sum_mt += mac_t; sum_mr += mac_r;
    end
    $display("10x10 layer, 100 samples: typical %0d MAC / %0d cycles, reuse %0d MAC / %0d cycles",
             sum_mt, sum_ct, sum_mr, sum_cr);

    // 30 samples from the schedule memory: drawn order against a greedy tour
    ld = 0;
    load_weights(0);
    for (int t = 0; t < ITERS; t++) begin
      drawn[t] = '0;
      drawn[t][COLS +: NEUR] = '1;
      for (int i = 0; i < NIN; i++) drawn[t][i] = 1'($urandom);
      used[t] = 1'b0;
    end
    tour[0] = drawn[0]; used[0] = 1'b1;
    for (int t = 1; t < ITERS; t++) begin
      best = -1; bd = 1000;
      for (int c = 0; c < ITERS; c++)
        if (!used[c] && pop10(COLS'(drawn[c] ^ tour[t-1])) < bd) begin
          bd = pop10(COLS'(drawn[c] ^ tour[t-1])); best = c;
        end
      used[best] = 1'b1; tour[t] = drawn[best];
    end
    dist_u = 0; dist_o = 0; mac_typ = 0;
    for (int t = 0; t < ITERS; t++) mac_typ += NEUR * pop10(COLS'(drawn[t]));
    for (int t = 1; t < ITERS; t++) begin
      dist_u += pop10(COLS'(drawn[t] ^ drawn[t-1]));
      dist_o += pop10(COLS'(tour[t] ^ tour[t-1]));
    end
    num_iter = 8'(ITERS); use_sched = 1; cr_en = 1;
    for (int t = 0; t < ITERS; t++)
      @(negedge clk) begin sched_we = 1; sched_waddr = 5'(t); sched_wdata = drawn[t]; end
    @(negedge clk) sched_we = 0;
    run_input(ITERS, cyc_u, mac_u);
    for (int t = 0; t < ITERS; t++)
      @(negedge clk) begin sched_we = 1; sched_waddr = 5'(t); sched_wdata = tour[t]; end
    @(negedge clk) sched_we = 0;
    run_input(ITERS, cyc_o, mac_o);
    $display("30 scheduled samples: drawn order %0d MAC / %0d cycles (path %0d), ordered %0d MAC / %0d cycles (path %0d)",
             mac_u, cyc_u, dist_u, mac_o, cyc_o, dist_o);
    check(dist_o <= dist_u, "greedy tour is no longer than the drawn order");
    check(mac_o < mac_u, "ordered samples need fewer multiply-accumulates");
    check(cyc_o < cyc_u, "ordered samples need fewer clock cycles");
    $display("30 scheduled samples, typical flow would need %0d MAC", mac_typ);
    check(mac_o * 10 < mac_typ * 7,
          "ordered reuse saves over 30% of the typical multiply-accumulates");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
