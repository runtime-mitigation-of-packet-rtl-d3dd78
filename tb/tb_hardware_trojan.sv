// tb_hardware_trojan: checks the Trojan decoder against its printed truth
// table, the pass-through of the routing unit's index when dormant, and the
// replacement of the index by the faulty port's code when triggered.
module tb_hardware_trojan;
  import sefar_pkg::*;
  logic en, s;
  logic [3:0] link;
  port_idx_t p, a;
  int checks = 0, failures = 0;

  hardware_trojan dut (.en(en), .link(link), .p(p), .a(a), .s(s));

  task automatic check(logic [3:0] got, logic [3:0] exp, string what);
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
    // Dormant: EN = 0 passes P through for every link status.
    for (int l = 0; l < 16; l++)
      for (int pi = 0; pi < 8; pi++) begin
        en = 0; link = 4'(l); p = 3'(pi); #1;
        check({1'b0, a}, {1'b0, 3'(pi)}, "EN=0 pass");
        check({3'b0, s}, 4'b0, "EN=0 S");
      end
    // EN = 1, no faulty link: pass-through.
    for (int pi = 0; pi < 8; pi++) begin
      en = 1; link = 4'b0000; p = 3'(pi); #1;
      check({1'b0, a}, {1'b0, 3'(pi)}, "EN=1 no fault pass");
      check({3'b0, s}, 4'b0, "EN=1 no fault S");
    end
    // Truth-table rows, LN LE LS LW one-hot.
    for (int pi = 0; pi < 8; pi++) begin
      en = 1; p = 3'(pi);
      link = 4'b0001; #1; check({1'b0, a}, 4'b0100, "LW -> 100"); check({3'b0, s}, 4'b1, "LW S");
      link = 4'b0010; #1; check({1'b0, a}, 4'b0011, "LS -> 011"); check({3'b0, s}, 4'b1, "LS S");
      link = 4'b0100; #1; check({1'b0, a}, 4'b0010, "LE -> 010"); check({3'b0, s}, 4'b1, "LE S");
      link = 4'b1000; #1; check({1'b0, a}, 4'b0001, "LN -> 001"); check({3'b0, s}, 4'b1, "LN S");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
