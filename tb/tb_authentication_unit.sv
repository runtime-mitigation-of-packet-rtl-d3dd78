// tb_authentication_unit: checks the per-VC anomaly against the printed AU
// truth table (and exhaustively against "the index names a faulty link"),
// that an unrouted VC never warns, and that the port flag F is raised one
// clock after an anomaly and then stays set.
module tb_authentication_unit;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] link;
  logic [1:0] idx_valid, w;
  port_idx_t [1:0] idx;
  logic flag;
  int checks = 0, failures = 0;

  authentication_unit #(.NUM_VC(2)) dut (
    .clk(clk), .rst_n(rst_n), .link_status(link), .idx_valid(idx_valid),
    .idx(idx), .w(w), .flag(flag));

  always #5 clk = ~clk;

  task automatic check(logic [1:0] got, logic [1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  function automatic logic ref_w(logic [3:0] l, logic [2:0] a);
    // Independent reference: position of the faulty link for each code.
    logic [3:0] code_mask;
    code_mask = (a == 3'b001) ? 4'b1000 : (a == 3'b010) ? 4'b0100 :
                (a == 3'b011) ? 4'b0010 : (a == 3'b100) ? 4'b0001 : 4'b0000;
    return |(code_mask & l);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    link = '0; idx_valid = '0; idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Printed truth table rows.
    idx_valid = 2'b11;
    link = 4'b0000; idx[0] = 3'b001; idx[1] = 3'b100; #1; check(w, 2'b00, "no fault");
    link = 4'b0001; idx[0] = 3'b100; idx[1] = 3'b011; #1; check(w, 2'b01, "LW & 100");
    link = 4'b0010; idx[0] = 3'b100; idx[1] = 3'b011; #1; check(w, 2'b10, "LS & 011");
    link = 4'b0100; idx[0] = 3'b010; idx[1] = 3'b101; #1; check(w, 2'b01, "LE & 010");
    link = 4'b1000; idx[0] = 3'b101; idx[1] = 3'b001; #1; check(w, 2'b10, "LN & 001");
    // Exhaustive against the reference.
    for (int l = 0; l < 16; l++)
      for (int a0 = 0; a0 < 8; a0++)
        for (int vv = 0; vv < 4; vv++) begin
          link = 4'(l); idx[0] = 3'(a0); idx[1] = 3'(7 - a0); idx_valid = 2'(vv);
          #1;
          check(w, {idx_valid[1] & ref_w(link, 3'(7 - a0)), idx_valid[0] & ref_w(link, 3'(a0))},
                "exhaustive");
        end
    // Flag: clear after reset, raised one clock after an anomaly, sticky.
    rst_n = 0; link = 4'b0100; idx_valid = 2'b00; idx[0] = 3'b010; idx[1] = 3'b000;
    @(negedge clk); rst_n = 1;
    @(negedge clk); check({1'b0, flag}, 2'b00, "flag idle");
    idx_valid = 2'b01;           // VC0 routed onto the faulty east link
    #1; check({1'b0, flag}, 2'b00, "flag not yet");
    @(negedge clk); check({1'b0, flag}, 2'b01, "flag set");
    idx_valid = 2'b00;
    repeat (3) @(negedge clk);
    check({1'b0, flag}, 2'b01, "flag sticky");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
