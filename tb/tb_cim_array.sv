// tb_cim_array: writes random rows into the 16 x 31 array, then evaluates
// random row / column-line / row-mask combinations and compares the product
// lines and the sum-line count with the AND and popcount of a copy kept here.
// Also checks that pl/mav appear one cycle after eval and hold otherwise.
module tb_cim_array;
  localparam int R = 16, C = 31;
  logic clk = 0; always #5 clk = ~clk;
  logic wwl_en = 0; logic [3:0] wwl_addr = 0; logic [C-1:0] wbl = 0;
  logic eval = 0; logic [3:0] rl_sel = 0; logic rl_mask = 0; logic [C-1:0] cl = 0;
  logic [C-1:0] pl; logic [4:0] mav;
  cim_array #(.ROWS(R), .COLS(C)) dut (.*);
  logic [C-1:0] shadow [R];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [C-1:0] expv, prev_pl; int cnt;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); wwl_en = 1; wwl_addr = 4'(r); wbl = C'($urandom); shadow[r] = wbl;
    end
    @(negedge clk); wwl_en = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      eval = 1; rl_sel = 4'($urandom); rl_mask = ($urandom % 4) != 0; cl = C'($urandom);
      expv = (rl_mask ? shadow[rl_sel] : '0) & cl;
      cnt = $countones(expv);
      @(negedge clk);
      eval = 0;
      check(pl == expv, $sformatf("pl row %0d", rl_sel));
      check(int'(mav) == cnt, $sformatf("mav %0d vs %0d", mav, cnt));
      prev_pl = pl; cl = ~cl;
      @(negedge clk);
      check(pl == prev_pl, "pl held without eval");
    end
    // all ones row, all ones input: full-scale count 31
    @(negedge clk); wwl_en = 1; wwl_addr = 4'd3; wbl = '1;
    @(negedge clk); wwl_en = 0; eval = 1; rl_sel = 4'd3; rl_mask = 1; cl = '1;
    @(negedge clk); eval = 0;
    check(mav == 5'd31, "full-scale count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
