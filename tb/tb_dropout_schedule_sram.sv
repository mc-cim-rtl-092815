// tb_dropout_schedule_sram: writes 30 random 33-bit schedule words and reads
// them back in order and at random, checking the one-cycle read latency.
module tb_dropout_schedule_sram;
  logic clk = 0; always #5 clk = ~clk;
  logic we = 0; logic [4:0] wr_addr = 0, rd_addr = 0; logic [32:0] wr_data = 0, rd_data;
  dropout_schedule_sram #(.W(33), .DEPTH(30)) dut (.*);
  logic [32:0] shadow [30];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 30; a++) begin
      @(negedge clk); we = 1; wr_addr = 5'(a); wr_data = 33'({$urandom, $urandom}); shadow[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 90; t++) begin
      int a;
      a = (t < 30) ? t : $urandom_range(0, 29);
      rd_addr = 5'(a); @(negedge clk);
      check(rd_data == shadow[a], $sformatf("word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
