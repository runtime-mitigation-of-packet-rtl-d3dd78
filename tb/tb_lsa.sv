// tb_lsa: checks that the link status register samples the four link status
// signals one clock late and keeps a fault once seen (permanent faults).
module tb_lsa;
  logic clk = 0, rst_n = 0;
  logic [3:0] ss_in, lsr;
  int checks = 0, failures = 0;
  logic [3:0] expect_lsr;

  lsa dut (.clk(clk), .rst_n(rst_n), .ss_in(ss_in), .lsr(lsr));

  always #5 clk = ~clk;

  task automatic check(logic [3:0] got, logic [3:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ss_in = '0;
    expect_lsr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(lsr, 4'b0000, "after reset");
    ss_in = 4'b0100;                 // east link fails
    @(negedge clk);
    check(lsr, 4'b0100, "east fault seen");
    ss_in = 4'b0000;                 // status line drops again
    @(negedge clk);
    check(lsr, 4'b0100, "fault is sticky");
    for (int i = 0; i < 40; i++) begin
      ss_in = 4'($urandom);
      expect_lsr |= ss_in;
      @(negedge clk);
      if (i == 0) expect_lsr |= 4'b0100;
      check(lsr, expect_lsr, "random sticky");
    end
    rst_n = 0;
    @(negedge clk);
    check(lsr, 4'b0000, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
