// tb_crossbar: random selects and enables, each output compared with the
// flit of the selected input (or zero when disabled).
module tb_crossbar;
  import sefar_pkg::*;
  flit_t [4:0] in_flit, out_flit;
  logic [4:0] en;
  logic [4:0][2:0] sel;
  int checks = 0, failures = 0;

  crossbar #(.N(5)) dut (.in_flit(in_flit), .en(en), .sel(sel), .out_flit(out_flit));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 5; i++) begin
        in_flit[i] = {2'($urandom), 32'($urandom)};
        sel[i] = 3'($urandom % 5);
        en[i] = 1'($urandom);
      end
      #1;
      for (int o = 0; o < 5; o++) begin
        checks++;
        if (out_flit[o] !== (en[o] ? in_flit[sel[o]] : '0)) begin
          failures++; $display("FAIL out %0d", o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
