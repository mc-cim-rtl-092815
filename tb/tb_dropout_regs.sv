// tb_dropout_regs: feeds random 4-bit RNG groups and checks that the next
// word fills after ceil(33 / 4) groups and then stops requesting, that
// advance moves it into DO_i and DO_i into DO_{i-1} (cleared with first),
// that schedule words bypass the RNG word (which is then kept for later), and that the compute-reuse masks
// are DO_i & ~DO_{i-1} and ~DO_i & DO_{i-1}.
module tb_dropout_regs;
  localparam int C = 31, N = 2, R = 4, W = C + N;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [R-1:0] rng_bits = 0; logic rng_valid = 0; logic rng_req, nxt_ready;
  logic advance = 0, first = 0, use_sched = 0; logic [W-1:0] sched_word = 0;
  logic [C-1:0] do_in_cur, do_in_prv, mask_add, mask_sub; logic [N-1:0] do_out_cur;
  dropout_regs #(.COLS(C), .NEUR(N), .NR(R)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W+R*9-1:0] stream; logic [W-1:0] word, cur, prv; int groups;
    repeat (2) @(negedge clk); rst_n = 1;
    prv = '0; cur = '0;
    for (int t = 0; t < 40; t++) begin
      groups = 0; stream = '0;
      while (rng_req) begin
        rng_bits = R'($urandom); rng_valid = 1;
        stream = {rng_bits, stream[W+R*9-1:R]};
        groups++;
        @(negedge clk);
      end
      rng_valid = 0;
      check(groups == ((t % 5 == 0 && t > 0) ? 0 : (W + R - 1) / R), $sformatf("fill took %0d groups", groups));
      check(nxt_ready, "next word ready");
      if (groups > 0) word = stream[W+R*9-1 -: W];
      use_sched = (t % 5 == 4);
      sched_word = W'({$urandom, $urandom});
      first = (t % 7 == 0);
      advance = 1; @(negedge clk); advance = 0; use_sched = 0; first = 0;
      prv = (t % 7 == 0) ? '0 : cur;
      cur = (t % 5 == 4) ? sched_word : word;
      check(do_in_cur == cur[C-1:0] && do_out_cur == cur[W-1:C], "DO_i");
      check(do_in_prv == prv[C-1:0], "DO_{i-1}");
      check(mask_add == (cur[C-1:0] & ~prv[C-1:0]), "cycle-1 mask");
      check(mask_sub == (~cur[C-1:0] & prv[C-1:0]), "cycle-2 mask");
      check(((t % 5 == 4) ? nxt_ready : rng_req), "refill after RNG word is taken");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
