// tb_control_unit: replays the control-unit example of the paper for port I1
// (seed 001): F1 and B1 rise, the state moves to 010 and holds while B2 is
// low, then moves on to 011 once B2 rises (B3 low by then). Also checks the
// wrap 101 -> 001, that nothing moves while F is low, and the one-clock step.
module tb_control_unit;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic f;
  logic [4:0] busy;     // bit k-1 = Bk
  port_idx_t z, z4;
  int checks = 0, failures = 0;

  control_unit #(.NUM_PORTS_P(5), .SEED(3'b001)) dut (
    .clk(clk), .rst_n(rst_n), .f(f), .busy(busy), .z(z));
  control_unit #(.NUM_PORTS_P(5), .SEED(3'b100)) dut4 (
    .clk(clk), .rst_n(rst_n), .f(f), .busy(busy), .z(z4));

  always #5 clk = ~clk;

  task automatic check(logic [2:0] got, logic [2:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f = 0; busy = 5'b00100;      // B3 high at the start, as in the example
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(z, 3'b001, "seed I1"); check(z4, 3'b100, "seed I4");
    busy[0] = 1;                  // B1 high but F low: hold
    @(negedge clk); check(z, 3'b001, "no move without F");
    busy[0] = 0;
    f = 1; busy[0] = 1;           // F1 and B1 rise together
    check(z, 3'b001, "same cycle");
    @(negedge clk); check(z, 3'b010, "one clock later: 010");
    busy[2] = 0;                  // B3 falls
    repeat (4) @(negedge clk); check(z, 3'b010, "holds while B2 low");
    busy[1] = 1;                  // B2 rises
    @(negedge clk); check(z, 3'b011, "moves to 011");
    repeat (3) @(negedge clk); check(z, 3'b011, "holds at free 011");
    // Wrap: everything busy except B2, start from 011 -> 100 -> 101 -> 001 -> 010.
    busy = 5'b11101;
    @(negedge clk); check(z, 3'b100, "step 100");
    @(negedge clk); check(z, 3'b101, "step 101");
    @(negedge clk); check(z, 3'b001, "wrap 001");
    @(negedge clk); check(z, 3'b010, "step 010");
    @(negedge clk); check(z, 3'b010, "stop at free B2");
    // dut4 moved in parallel under the same busy/f; it must also stop at 010.
    check(z4, 3'b010, "I4 stops at free B2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
