// tb_ft_routing_unit: exhaustive over router position, destination and the
// 16 link-status patterns of an 8x8 mesh. Checks properties rather than a copy
// of the algorithm: local delivery at the destination, never a faulty or
// off-mesh output while a healthy one exists, the productive X direction when
// it is healthy, a productive direction whenever one is healthy, and "no
// route" only when no healthy direction exists.
module tb_ft_routing_unit;
  import sefar_pkg::*;
  logic [2:0] cx, cy, dx, dy;
  logic [3:0] link;
  port_idx_t po;
  int checks = 0, failures = 0;

  ft_routing_unit #(.MESH_DIM(8)) dut (
    .cur_x(cx), .cur_y(cy), .dst_x(dx), .dst_y(dy), .link_status(link), .port_out(po));

  task automatic fail(string what);
    failures++;
    if (failures < 10)
      $display("FAIL %s cur=(%0d,%0d) dst=(%0d,%0d) link=%b out=%b", what, cx, cy, dx, dy, link, po);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 64; c++)
      for (int d = 0; d < 64; d++)
        for (int l = 0; l < 16; l++) begin
          logic [3:0] ok;          // {N, E, S, W} healthy and inside the mesh
          logic [3:0] prod;        // productive directions
          logic [3:0] chosen;
          cx = 3'(c % 8); cy = 3'(c / 8); dx = 3'(d % 8); dy = 3'(d / 8); link = 4'(l);
          #1;
          ok   = {cy != 0, cx != 7, cy != 7, cx != 0} & ~link;
          prod = {dy < cy, dx > cx, dy > cy, dx < cx};
          chosen = (po == 3'b001) ? 4'b1000 : (po == 3'b010) ? 4'b0100 :
                   (po == 3'b011) ? 4'b0010 : (po == 3'b100) ? 4'b0001 : 4'b0000;
          checks++;
          if (c == d) begin
            if (po != 3'b101) fail("not local at destination");
          end else if (ok == 0) begin
            if (po != 3'b000) fail("route without healthy link");
          end else begin
            if ((chosen & ok) == 0) fail("faulty or off-mesh output");
            if ((prod & ok & 4'b0101) != 0 && (chosen & prod & 4'b0101) == 0)
              fail("healthy productive X not taken");
            if ((prod & ok) != 0 && (chosen & prod) == 0)
              fail("healthy productive direction not taken");
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
