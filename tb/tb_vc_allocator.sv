// tb_vc_allocator: exhaustive check that the lowest free VC is allocated and
// that no VC is offered when all are busy.
module tb_vc_allocator;
  logic [3:0] vc_busy;
  logic vc_free;
  logic [1:0] vc_sel;
  int checks = 0, failures = 0;

  vc_allocator #(.NUM_VC(4)) dut (.vc_busy(vc_busy), .vc_free(vc_free), .vc_sel(vc_sel));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 16; b++) begin
      int exp_sel;
      exp_sel = -1;
      for (int v = 3; v >= 0; v--) if (!b[v]) exp_sel = v;
      vc_busy = 4'(b); #1;
      checks++;
      if (vc_free !== (exp_sel >= 0)) begin
        failures++; $display("FAIL free busy=%b", vc_busy);
      end
      if (exp_sel >= 0) begin
        checks++;
        if (int'(vc_sel) != exp_sel) begin
          failures++; $display("FAIL sel busy=%b got %0d exp %0d", vc_busy, vc_sel, exp_sel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
