// vc_allocator: virtual-channel allocation for one input buffer.
//
// When a head flit is written into the buffer, one of the buffer's free
// virtual channels (not holding a packet) is allocated to the packet; the
// lowest-numbered free VC is taken. The VC stays allocated until the
// packet's tail flit leaves it. The paper only names a VC allocator (VA,
// with its VCn/VCu signals to the neighbours); this per-buffer allocation on
// arrival, with valid/ready instead of credit exchange, is this design's
// simplification. Combinational.
module vc_allocator #(
  parameter int NUM_VC = 2
) (
  input  logic [NUM_VC-1:0]         vc_busy,   // VC currently holds a packet
  output logic                      vc_free,   // some VC is free
  output logic [$clog2(NUM_VC)-1:0] vc_sel     // VC allocated to a new head
);

  always_comb begin
    vc_free = 1'b0;
    vc_sel  = '0;
    for (int v = NUM_VC - 1; v >= 0; v--)
      if (!vc_busy[v]) begin
        vc_free = 1'b1;
        vc_sel  = $clog2(NUM_VC)'(v);
      end
  end

endmodule
