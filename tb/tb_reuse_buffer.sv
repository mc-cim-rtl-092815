// tb_reuse_buffer: random writes, invalidations and clears against a model,
// checking read data and valid bits of both entries.
module tb_reuse_buffer;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic clear = 0, wr = 0, inval = 0; logic [0:0] idx = 0;
  logic signed [15:0] wdata = 0, rdata; logic rvalid;
  reuse_buffer #(.NEUR(2), .PSW(16)) dut (.*);
  int checks = 0, failures = 0;
  int mv [2]; bit mval [2];
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    mv = '{0, 0}; mval = '{0, 0};
    for (int t = 0; t < 500; t++) begin
      int op;
      op = $urandom_range(0, 9);
      idx = 1'($urandom); wdata = 16'($urandom);
      clear = (op == 0); wr = (op >= 1 && op <= 5); inval = (op >= 6 && op <= 7);
      @(negedge clk);
      if (op == 0) mval = '{0, 0};
      else if (op >= 1 && op <= 5) begin mv[idx] = int'(wdata); mval[idx] = 1; end
      else if (op >= 6 && op <= 7) mval[idx] = 0;
      clear = 0; wr = 0; inval = 0;
      for (int k = 0; k < 2; k++) begin
        idx = 1'(k); #1;
        check(rvalid == mval[k], "valid bit");
        if (mval[k]) check(int'(rdata) == mv[k], "stored value");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
