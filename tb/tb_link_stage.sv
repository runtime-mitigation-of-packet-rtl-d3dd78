// tb_link_stage: streams random flits through a healthy link with random
// back-pressure and compares the output order with a reference queue; checks
// that in_ready never depends on the offered flit, that a flit can leave one
// clock after it enters, and that a faulty link accepts and loses every flit.
module tb_link_stage;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic faulty, in_valid, in_ready, out_valid, out_ready, drop;
  flit_t in_flit, out_flit;
  flit_t ref_q [$];
  int checks = 0, failures = 0, sent = 0, rcvd = 0;

  link_stage dut (.clk(clk), .rst_n(rst_n), .faulty(faulty), .in_valid(in_valid),
    .in_flit(in_flit), .in_ready(in_ready), .out_valid(out_valid), .out_flit(out_flit),
    .out_ready(out_ready), .drop(drop));

  always #5 clk = ~clk;

  task automatic fail(string what);
    failures++;
    if (failures < 10) $display("FAIL %s", what);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    faulty = 0; in_valid = 0; in_flit = '0; out_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency: a flit offered now is visible at the output after one edge
    in_valid = 1; in_flit = {2'b11, 32'h1234}; out_ready = 1;
    #1; checks++; if (out_valid) fail("output before the edge");
    @(negedge clk);
    in_valid = 0;
    checks++; if (!(out_valid && out_flit == {2'b11, 32'h1234})) fail("one-cycle traversal");
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      logic rdy_before;
      in_valid = 0; #1; rdy_before = in_ready;
      in_valid = ($urandom % 100) < 60;
      in_flit = {2'($urandom), 32'(sent)};
      out_ready = ($urandom % 100) < 50;
      #1;
      checks++; if (in_ready != rdy_before) fail("in_ready depends on in_valid");
      if (out_valid && out_ready) begin
        checks++;
        if (ref_q.size() == 0 || out_flit != ref_q[0]) fail("order/data");
        else void'(ref_q.pop_front());
        rcvd++;
      end
      if (in_valid && in_ready) begin ref_q.push_back(in_flit); sent++; end
      @(negedge clk);
    end
    // faulty link: everything accepted, nothing comes out
    in_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    ref_q.delete();
    faulty = 1;
    for (int t = 0; t < 20; t++) begin
      in_valid = 1; in_flit = {2'b11, 32'(t)}; out_ready = 1; #1;
      checks++; if (!in_ready || !drop) fail("faulty link must accept and drop");
      checks++; if (out_valid) fail("flit left a faulty link");
      @(negedge clk);
    end
    $display("streamed %0d flits", rcvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
