// tb_buffer_shuffler: checks the default port-to-buffer mapping, redirection
// by the CU state Z, the native-port priority when two ports want one buffer,
// that a packet stays in the buffer its head entered even when Z changes
// mid-packet, and that buffer back-pressure reaches the port.
module tb_buffer_shuffler;
  import sefar_pkg::*;
  logic clk = 0, rst_n = 0;
  port_idx_t [4:0] z;
  logic [4:0] in_valid, in_ready, buf_valid, buf_ready;
  flit_t [4:0] in_flit, buf_flit;
  int checks = 0, failures = 0;

  buffer_shuffler #(.N(5)) dut (
    .clk(clk), .rst_n(rst_n), .z(z), .in_valid(in_valid), .in_flit(in_flit),
    .in_ready(in_ready), .buf_valid(buf_valid), .buf_flit(buf_flit), .buf_ready(buf_ready));

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

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5; i++) begin z[i] = 3'(i + 1); in_flit[i] = '0; end
    in_valid = '0; buf_ready = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. default mapping, single-flit packets on every port
    for (int i = 0; i < 5; i++) in_flit[i] = mk(1, 1, 100 + i);
    in_valid = '1;
    #1;
    check(34'(buf_valid), 34'h1f, "all buffers written");
    check(34'(in_ready), 34'h1f, "all ports ready");
    for (int j = 0; j < 5; j++) check(buf_flit[j], mk(1, 1, 100 + j), "own buffer");
    @(negedge clk);
    // 2. redirection: port I1 (index 0) moved to IB2 (Z = 010), I2 idle
    in_valid = 5'b00001; z[0] = 3'b010; in_flit[0] = mk(1, 1, 7);
    #1;
    check(34'(buf_valid), 34'b00010, "I1 -> IB2 valid");
    check(buf_flit[1], mk(1, 1, 7), "I1 -> IB2 data");
    check(34'(in_ready), 34'b00001, "I1 ready");
    @(negedge clk);
    // 3. conflict: I1 and I2 both want IB2, native I2 wins
    in_valid = 5'b00011; in_flit[1] = mk(1, 1, 8);
    #1;
    check(34'(in_ready), 34'b00010, "native wins");
    check(buf_flit[1], mk(1, 1, 8), "native data");
    @(negedge clk);
    in_valid = 5'b00001;
    // 4. packet lock: I1 head into IB2, then Z changes, body still into IB2
    in_flit[0] = mk(1, 0, 20);
    #1; check(34'(in_ready), 34'b00001, "head accepted");
    @(negedge clk);
    z[0] = 3'b011;
    in_flit[0] = mk(0, 0, 21);
    in_valid = 5'b00011; in_flit[1] = mk(1, 1, 30);   // I2 must wait
    #1;
    check(34'(buf_valid), 34'b00010, "body stays in IB2");
    check(buf_flit[1], mk(0, 0, 21), "body data");
    check(34'(in_ready), 34'b00001, "I2 held while IB2 locked");
    @(negedge clk);
    in_flit[0] = mk(0, 1, 22);
    #1;
    check(buf_flit[1], mk(0, 1, 22), "tail in IB2");
    check(34'(in_ready), 34'b00001, "tail accepted");
    @(negedge clk);
    // After the tail: I1 now goes to IB3, I2 gets IB2 again
    in_flit[0] = mk(1, 1, 40);
    #1;
    check(34'(buf_valid), 34'b00110, "I1 -> IB3 and I2 -> IB2");
    check(buf_flit[2], mk(1, 1, 40), "I1 in IB3");
    check(buf_flit[1], mk(1, 1, 30), "I2 in IB2");
    check(34'(in_ready), 34'b00011, "both ready");
    // 5. back-pressure
    buf_ready = 5'b11011;
    #1;
    check(34'(in_ready), 34'b00010, "IB3 full stalls I1");
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
