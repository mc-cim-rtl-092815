// tb_shift_add: random sequences of load / term steps compared with the
// arithmetic of the three evaluation kinds: +code<<b, -code<<b,
// (pop - 2 code)<<b, each negated in a subtracting pass.
module tb_shift_add;
  import mc_cim_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic load = 0, en = 0, sub = 0; logic signed [15:0] base = 0, acc;
  ev_kind_e kind = EV_NEGX; logic [2:0] bitpos = 0; logic [4:0] code = 0; logic [5:0] pop = 0;
  shift_add #(.PSW(16), .CB(5), .BW(3)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int model, u;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      base = 16'($urandom_range(0, 400)) - 16'sd200; model = int'(base);
      load = 1; @(negedge clk); load = 0;
      check(int'(acc) == model, "load");
      for (int s = 0; s < 30; s++) begin
        kind = ev_kind_e'($urandom_range(0, 2)); bitpos = 3'($urandom_range(0, 4));
        pop = 6'($urandom_range(0, 31)); code = 5'($urandom_range(0, int'(pop)));
        sub = 1'($urandom); en = 1;
        u = (kind == EV_POSX) ? int'(code) : (kind == EV_NEGX) ? -int'(code) : int'(pop) - 2 * int'(code);
        u = u * (1 << bitpos);
        model += sub ? -u : u;
        @(negedge clk); en = 0;
        check(int'(acc) == model, $sformatf("kind %0d b %0d sub %0d: %0d vs %0d", kind, bitpos, sub, acc, model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
