// tb_input_buffer: writes packets into a 2-VC, 4-flit buffer and checks VC
// allocation per packet, the route latched from route_in one clock after a
// head reaches the front, in-order read-out per VC, back-pressure when no VC
// is free or a VC is full, freeing of a VC by its tail, and sink mode.
module tb_input_buffer;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sink, wr_valid, wr_ready, rd_en;
  flit_t wr_flit, rd_flit;
  flit_t [1:0] front;
  port_idx_t [1:0] route_in, route;
  logic [1:0] route_valid, req;
  logic rd_vc;
  int checks = 0, failures = 0;

  input_buffer #(.NUM_VC(2), .VC_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .sink(sink), .wr_valid(wr_valid), .wr_flit(wr_flit),
    .wr_ready(wr_ready), .front_flit(front), .route_in(route_in), .route(route),
    .route_valid(route_valid), .req(req), .rd_en(rd_en), .rd_vc(rd_vc), .rd_flit(rd_flit));

  always #5 clk = ~clk;

  task automatic check(logic [33:0] got, logic [33:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic flit_t mk(logic h, logic t, int v);
    flit_t f;
    f.head = h; f.tail = t; f.data = 32'(v);
    return f;
  endfunction

  task automatic put(flit_t f);
    wr_flit = f; wr_valid = 1;
    #1; check(34'(wr_ready), 34'd1, "write accepted");
    @(negedge clk);
    wr_valid = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sink = 0; wr_valid = 0; wr_flit = '0; rd_en = 0; rd_vc = 0;
    route_in[0] = 3'b011; route_in[1] = 3'b010;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Packet A (4 flits) -> VC0
    put(mk(1, 0, 'hA0));
    check(34'(route_valid), 34'd0, "route not yet latched");
    @(negedge clk);    // head at front one clock, route latched at this edge
    check(34'(route_valid), 34'b01, "VC0 routed");
    check(34'(route[0]), 34'b011, "VC0 route");
    route_in[0] = 3'b001;          // later changes must not disturb the latch
    put(mk(0, 0, 'hA1)); put(mk(0, 0, 'hA2)); put(mk(0, 1, 'hA3));
    check(34'(route[0]), 34'b011, "route held for the packet");
    // VC0 is full: a fifth flit of A would stall; instead packet B -> VC1
    put(mk(1, 0, 'hB0));
    @(negedge clk);
    check(34'(route_valid), 34'b11, "VC1 routed");
    check(34'(route[1]), 34'b010, "VC1 route");
    check(34'(req), 34'b11, "both VCs request");
    put(mk(0, 0, 'hB1)); put(mk(0, 0, 'hB2)); put(mk(0, 0, 'hB3));
    // VC1 full with a body flit pending
    wr_flit = mk(0, 0, 'hB4); wr_valid = 1; #1;
    check(34'(wr_ready), 34'd0, "full VC stalls");
    wr_valid = 0;
    // A third head: no free VC
    wr_flit = mk(1, 1, 'hC0); wr_valid = 1; #1;
    check(34'(wr_ready), 34'd0, "no free VC");
    wr_valid = 0;
    // Read VC0 out in order
    for (int k = 0; k < 4; k++) begin
      rd_en = 1; rd_vc = 0; #1;
      check(rd_flit, mk(k == 0, k == 3, 'hA0 + k), "VC0 order");
      @(negedge clk);
    end
    rd_en = 0;
    check(34'(route_valid), 34'b10, "VC0 route cleared by tail");
    // Read B's head, then B's tail fits into VC1
    rd_en = 1; rd_vc = 1; #1;
    check(rd_flit, mk(1, 0, 'hB0), "VC1 head");
    @(negedge clk); rd_en = 0;
    put(mk(0, 1, 'hB4));
    // VC0 is free again: head C (single flit) goes there
    put(mk(1, 1, 'hC0));
    @(negedge clk);
    check(34'(front[0]), 34'(mk(1, 1, 'hC0)), "C in VC0");
    check(34'(route[0]), 34'b001, "C route");
    for (int k = 1; k < 5; k++) begin
      rd_en = 1; rd_vc = 1; #1;
      check(rd_flit, mk(0, k == 4, 'hB0 + k), "VC1 order");
      @(negedge clk);
    end
    rd_en = 0;
    check(34'(req), 34'b01, "only C left");
    // Sink mode: writes accepted and dropped
    sink = 1;
    wr_flit = mk(1, 0, 'hD0); wr_valid = 1; #1;
    check(34'(wr_ready), 34'd1, "sink accepts");
    @(negedge clk);
    wr_flit = mk(0, 1, 'hD1);
    @(negedge clk);
    wr_valid = 0;
    @(negedge clk);
    check(34'(req), 34'b01, "sink stored nothing");
    check(34'(front[0]), 34'(mk(1, 1, 'hC0)), "C intact");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
