// crossbar: the router's N x N crossbar (XB). Output port o carries the flit
// read from the input buffer selected by the switch allocator (sel[o]) when
// en[o] is high and an idle all-zero flit otherwise. Combinational.
module crossbar
  import sefar_pkg::*;
#(
  parameter int N = NUM_PORTS
) (
  input  flit_t [N-1:0]                 in_flit,   // one per input buffer
  input  logic  [N-1:0]                 en,
  input  logic  [N-1:0][$clog2(N)-1:0]  sel,
  output flit_t [N-1:0]                 out_flit
);

  always_comb begin
    for (int o = 0; o < N; o++)
      out_flit[o] = en[o] ? in_flit[sel[o]] : '0;
  end

endmodule
