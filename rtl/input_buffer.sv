// input_buffer: one input buffer IBk of the router, with its route-computation
// stage.
//
// NUM_VC virtual channels, each a FIFO of VC_DEPTH flits (paper: 2 VCs of
// 4 flits per port for the headline configuration). A VC holds one packet at
// a time: the vc_allocator gives a free VC to each head flit written, the
// following flits of the packet go to the same VC, and the VC is freed when
// the tail flit is read out.
// Route computation: when a VC's front flit is a head and no route is stored
// yet, the port index offered on route_in[v] by the routing unit is latched
// (one clock). The VC then requests the switch with that route until its tail
// is read.
// Sink mode: when `sink` is high (the authentication unit has flagged this
// buffer's routing unit), writes are accepted and discarded, so that a packet
// that was half-way into the buffer at detection time cannot stall its input
// port. Flits already stored are never read again (the switch allocator
// ignores the buffer). Sink mode is this design's choice; the paper only says
// the buffer is no longer considered.
// Interface: valid/ready write port; read port driven by the switch
// allocator (rd_en, rd_vc) with the flit returned combinationally on rd_flit.
module input_buffer
  import sefar_pkg::*;
#(
  parameter int NUM_VC   = 2,
  parameter int VC_DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   sink,
  // write port (from the buffer shuffler)
  input  logic                   wr_valid,
  input  flit_t                  wr_flit,
  output logic                   wr_ready,
  // route computation
  output flit_t     [NUM_VC-1:0] front_flit,   // to the routing units
  input  port_idx_t [NUM_VC-1:0] route_in,     // P2P1P0 from the routing units
  output port_idx_t [NUM_VC-1:0] route,        // latched route per VC
  output logic      [NUM_VC-1:0] route_valid,
  output logic      [NUM_VC-1:0] req,          // VC has a routed flit at its front
  // read port (switch traversal)
  input  logic                   rd_en,
  input  logic [$clog2(NUM_VC)-1:0] rd_vc,
  output flit_t                  rd_flit
);

  localparam int VW = $clog2(NUM_VC);
  localparam int PW = (VC_DEPTH > 1) ? $clog2(VC_DEPTH) : 1;

  flit_t mem [NUM_VC][VC_DEPTH];
  logic [NUM_VC-1:0][PW-1:0] rd_ptr, wr_ptr;
  logic [NUM_VC-1:0][PW:0]   count;
  logic [NUM_VC-1:0]         vc_busy;
  logic [VW-1:0]             cur_vc;     // VC of the packet being written
  logic                      vc_free;
  logic [VW-1:0]             vc_new;
  logic [VW-1:0]             wr_vc;
  logic                      wr_en;

  vc_allocator #(.NUM_VC(NUM_VC)) u_va (
    .vc_busy (vc_busy),
    .vc_free (vc_free),
    .vc_sel  (vc_new)
  );

  always_comb begin
    wr_vc = wr_flit.head ? vc_new : cur_vc;
    if (sink)
      wr_ready = 1'b1;
    else if (wr_flit.head)
      wr_ready = vc_free;
    else
      wr_ready = int'(count[cur_vc]) < VC_DEPTH;
    wr_en = wr_valid && wr_ready && !sink;

    for (int v = 0; v < NUM_VC; v++) begin
      front_flit[v] = mem[v][rd_ptr[v]];
      req[v]        = (count[v] != '0) && route_valid[v];
    end
    rd_flit = mem[rd_vc][rd_ptr[rd_vc]];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_vc][wr_ptr[wr_vc]] <= wr_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr      <= '0;
      wr_ptr      <= '0;
      count       <= '0;
      vc_busy     <= '0;
      cur_vc      <= '0;
      route       <= '0;
      route_valid <= '0;
    end else begin
      if (wr_en) begin
        wr_ptr[wr_vc] <= (int'(wr_ptr[wr_vc]) == VC_DEPTH - 1) ? '0 : wr_ptr[wr_vc] + 1'b1;
        if (wr_flit.head) begin
          cur_vc          <= wr_vc;
          vc_busy[wr_vc]  <= 1'b1;
        end
      end
      if (rd_en) begin
        rd_ptr[rd_vc] <= (int'(rd_ptr[rd_vc]) == VC_DEPTH - 1) ? '0 : rd_ptr[rd_vc] + 1'b1;
        if (rd_flit.tail) begin
          vc_busy[rd_vc]     <= 1'b0;
          route_valid[rd_vc] <= 1'b0;
        end
      end
      for (int v = 0; v < NUM_VC; v++) begin
        count[v] <= count[v] + (PW+1)'(wr_en && wr_vc == VW'(v))
                             - (PW+1)'(rd_en && rd_vc == VW'(v));
        if (count[v] != '0 && front_flit[v].head && !route_valid[v])
          route_valid[v] <= 1'b1;
        if (count[v] != '0 && front_flit[v].head && !route_valid[v])
          route[v] <= route_in[v];
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(wr_en && !(rd_en && rd_vc == wr_vc) && int'(count[wr_vc]) == VC_DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(rd_en && count[rd_vc] == '0));

endmodule
