// tb_mcd_controller: the sequencer with a model array and a model ADC
// (fixed 3 compares per conversion) defined here, and the real shift_add and
// reuse_buffer. Dropout words are supplied by the test: random words for one
// input in the typical flow and one with compute reuse, then one with
// schedule words changing by one bit. Checks each iteration's product-sums
// against the reference operator, that every pass runs 3 x 5 evaluation
// slots (done + skipped), that only kept neurons' rows are evaluated, and
// the exact cycle count: per evaluation 1 array + 1 ADC start + (3 + 1) ADC
// wait + 1 accumulate + 1 step cycles, per skipped slot 2, per neuron 2, per
// iteration 3 (plus 1 schedule read).
module tb_mcd_controller;
  import mc_cim_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; logic [7:0] num_iter = 8'd30; logic cr_en = 0, use_sched = 0;
  logic busy, done;
  logic [COLS-1:0] x_sign; logic [COLS-1:0] x_mag [MAGB];
  logic nxt_ready = 1, do_advance, do_first;
  logic [COLS-1:0] do_in_cur = 0, mask_add, mask_sub, prv = 0; logic [NEUR-1:0] do_out_cur = 0;
  logic [4:0] sched_addr;
  logic eval, rl_mask; logic [3:0] rl_sel; logic [COLS-1:0] cl; logic [4:0] mav = 0;
  logic adc_start, adc_done = 0; logic [4:0] adc_value, adc_code = 0;
  logic sa_load, sa_en, sa_sub; logic signed [15:0] sa_base, sa_acc, buf_rdata;
  ev_kind_e sa_kind; logic [2:0] sa_bit; logic [5:0] sa_pop; logic [4:0] sa_code;
  logic buf_clear, buf_wr, buf_inval, buf_rvalid; logic [0:0] buf_idx;
  logic iter_valid; logic [7:0] iter_idx; logic signed [15:0] result [NEUR]; logic [NEUR-1:0] result_kept;
  logic [31:0] n_eval, n_skip, n_adc_cyc, n_reuse_pass, n_full_pass, n_mac;

  mcd_controller #(.COLS(COLS), .ROWS(ROWS), .NBITS(NBITS), .PSW(16), .DEPTH(30)) dut (.*);
  shift_add #(.PSW(16), .CB(5), .BW(3)) u_sa (.clk, .rst_n, .load(sa_load), .base(sa_base), .en(sa_en),
    .sub(sa_sub), .kind(sa_kind), .bitpos(sa_bit), .code(sa_code), .pop(sa_pop), .acc(sa_acc));
  reuse_buffer #(.NEUR(NEUR), .PSW(16)) u_buf (.clk, .rst_n, .clear(buf_clear), .wr(buf_wr),
    .inval(buf_inval), .idx(buf_idx), .wdata(sa_acc), .rdata(buf_rdata), .rvalid(buf_rvalid));

  assign mask_add = do_in_cur & ~prv;
  assign mask_sub = ~do_in_cur & prv;

  logic [COLS-1:0] mem [ROWS];
  int wv [NEUR][COLS], xv [COLS];
  int checks = 0, failures = 0, busy_cyc = 0, cnt = 0, bad_row = 0;
  logic [COLS-1:0] words [30];

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic int sgn(input int v); return (v < 0) ? -1 : 1; endfunction
  function automatic int absv(input int v); return (v < 0) ? -v : v; endfunction

  // model array and ADC
  always @(posedge clk) begin
    if (eval) begin
      mav <= 5'($countones((rl_mask ? mem[rl_sel] : '0) & cl));
      if (!rl_mask || rl_sel / NBITS >= NEUR) bad_row++;
    end
    adc_done <= 1'b0;
    if (adc_start) begin cnt <= L; adc_code <= adc_value; end
    else if (cnt > 0) begin cnt <= cnt - 1; if (cnt == 1) adc_done <= 1'b1; end
    if (busy) busy_cyc++;
  end

  // dropout words from the test
  int wi = 0;
  always @(posedge clk) if (do_advance) begin
    prv <= do_first ? '0 : do_in_cur;
    do_in_cur <= words[wi][COLS-1:0];
    do_out_cur <= (wi % 4 == 3) ? 2'b01 : (wi % 7 == 5) ? 2'b10 : 2'b11;
    wi <= wi + 1;
  end

  always @(posedge clk) if (iter_valid)
    for (int k = 0; k < NEUR; k++) begin
      int s;
      s = 0;
      for (int i = 0; i < COLS; i++)
        if (do_in_cur[i]) s += sgn(xv[i]) * absv(wv[k][i]) + sgn(wv[k][i]) * absv(xv[i]);
      if (!do_out_cur[k]) s = 0;
      check(int'(result[k]) == s, $sformatf("iter %0d neuron %0d: %0d vs %0d", iter_idx, k, result[k], s));
      check(result_kept[k] == do_out_cur[k], "kept flag");
    end

  task automatic run(input bit cr, input bit sch, input bit ordered);
    int exp_cyc;
    for (int t = 0; t < 30; t++) begin
      words[t] = (t == 0 || !ordered) ? COLS'($urandom) : words[t-1] ^ (COLS'(1) << $urandom_range(0, COLS-1));
    end
    wi = 0; busy_cyc = 0; cr_en = cr; use_sched = sch;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    exp_cyc = 30 * (3 + (sch ? 1 : 0)) + 30 * NEUR * 2 + int'(n_eval) * (L + 5) + int'(n_skip) * 2;
    check(busy_cyc == exp_cyc, $sformatf("cycles %0d expected %0d", busy_cyc, exp_cyc));
    check(n_eval + n_skip == 15 * (n_full_pass + 2 * n_reuse_pass), "15 evaluation slots per pass");
    check(n_adc_cyc == L * n_eval, "ADC compares counted");
    check(bad_row == 0, "only kept rows evaluated");
    if (cr) check(n_reuse_pass > 0, "reuse passes");
    $display("cr=%0d sched=%0d ordered=%0d: eval=%0d skip=%0d full=%0d reuse=%0d mac=%0d cycles=%0d",
             cr, sch, ordered, n_eval, n_skip, n_full_pass, n_reuse_pass, n_mac, busy_cyc);
  endtask

  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int a;
    for (int b = 0; b < MAGB; b++) x_mag[b] = '0;
    x_sign = '0;
    for (int k = 0; k < NEUR; k++) for (int i = 0; i < COLS; i++) wv[k][i] = int'($urandom_range(0, 62)) - 31;
    for (int r = 0; r < ROWS; r++) begin
      mem[r] = COLS'($urandom);
      if (r / NBITS < NEUR)
        for (int i = 0; i < COLS; i++) begin
          a = absv(wv[r / NBITS][i]);
          mem[r][i] = (r % NBITS == 0) ? (wv[r / NBITS][i] < 0) : a[r % NBITS - 1];
        end
    end
    for (int i = 0; i < COLS; i++) begin
      xv[i] = int'($urandom_range(0, 62)) - 31;
      x_sign[i] = xv[i] < 0;
      for (int b = 0; b < MAGB; b++) x_mag[b][i] = 1'(absv(xv[i]) >> b);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 0, 0);
    run(1, 0, 0);
    run(1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
