// tb_switch_allocator: checks grants of the separable round-robin allocator:
// parallel grants to different outputs, wormhole locking of an output from
// head to tail, round-robin alternation, and that requests from a buffer
// flagged by the AU (blocked), a VC with a per-VC anomaly (w), an output that
// is not ready or an illegal port index are never granted.
module tb_switch_allocator;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0][1:0] req, is_head, is_tail, w;
  port_idx_t [4:0][1:0] route;
  logic [4:0] blocked, out_ready, rd_en, out_valid;
  logic [4:0] rd_vc;
  logic [4:0][2:0] out_sel;
  int checks = 0, failures = 0;

  switch_allocator #(.N(5), .NUM_VC(2)) dut (
    .clk(clk), .rst_n(rst_n), .req(req), .route(route), .is_head(is_head),
    .is_tail(is_tail), .w(w), .blocked(blocked), .out_ready(out_ready),
    .rd_en(rd_en), .rd_vc(rd_vc), .out_valid(out_valid), .out_sel(out_sel));

  always #5 clk = ~clk;

  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic clear();
    req = '0; is_head = '0; is_tail = '0; w = '0; blocked = '0; out_ready = '1;
    for (int b = 0; b < 5; b++) begin route[b][0] = '0; route[b][1] = '0; end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. two buffers, different outputs: both granted
    req[0][0] = 1; route[0][0] = 3'b011; is_head[0][0] = 1; is_tail[0][0] = 1;
    req[1][1] = 1; route[1][1] = 3'b101; is_head[1][1] = 1; is_tail[1][1] = 1;
    #1;
    check(16'(out_valid), 16'b10100, "two outputs");
    check(16'(out_sel[2]), 16'd0, "O3 from IB1");
    check(16'(out_sel[4]), 16'd1, "O5 from IB2");
    check(16'(rd_en), 16'b00011, "both read");
    check(16'(rd_vc[1]), 16'd1, "IB2 VC1");
    @(negedge clk);
    // 2. wormhole lock: IB1.VC0 multi-flit vs IB2.VC0 head, both to O3
    clear();
    req[0][0] = 1; route[0][0] = 3'b011; is_head[0][0] = 1;
    route[1][0] = 3'b011; is_head[1][0] = 1; is_tail[1][0] = 1;
    #1;
    check(16'(out_valid), 16'b00100, "one grant on O3");
    check(16'(rd_en), 16'b00001, "IB1 head");
    @(negedge clk);
    req[1][0] = 1;                     // IB2 single-flit packet arrives
    is_head[0][0] = 0;                 // IB1 body flit
    #1;
    check(16'(rd_en), 16'b00001, "locked to IB1 (body)");
    @(negedge clk);
    req[0][0] = 0;                     // IB1 has no flit this cycle
    #1;
    check(16'(out_valid), 16'b00000, "lock holds while owner idle");
    @(negedge clk);
    req[0][0] = 1; is_tail[0][0] = 1;  // IB1 tail
    #1;
    check(16'(rd_en), 16'b00001, "IB1 tail");
    @(negedge clk);
    req[0][0] = 0;
    #1;
    check(16'(rd_en), 16'b00010, "O3 free again: IB2");
    @(negedge clk);
    // 3. round robin between two single-flit streams to O1
    clear();
    req[2][0] = 1; route[2][0] = 3'b001; is_head[2][0] = 1; is_tail[2][0] = 1;
    req[3][0] = 1; route[3][0] = 3'b001; is_head[3][0] = 1; is_tail[3][0] = 1;
    begin
      logic [4:0] prev;
      #1; prev = rd_en;
      for (int k = 0; k < 6; k++) begin
        @(negedge clk); #1;
        check(16'(rd_en), 16'(prev == 5'b00100 ? 5'b01000 : 5'b00100), "alternation");
        prev = rd_en;
      end
    end
    // 4. masks
    blocked[2] = 1; #1;
    check(16'(rd_en), 16'b01000, "blocked IB3 ignored");
    w[3][0] = 1; #1;
    check(16'(out_valid), 16'd0, "flagged VC ignored");
    w = '0; blocked = '0; out_ready[0] = 0; #1;
    check(16'(out_valid), 16'd0, "output not ready");
    out_ready = '1; route[2][0] = 3'b000; route[3][0] = 3'b110; #1;
    check(16'(out_valid), 16'd0, "illegal indices");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
