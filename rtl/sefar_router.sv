// sefar_router: SeFaR, a secure fault-tolerant five-port mesh NoC router
// (ports N, E, S, W, local) that keeps packet-drop Trojans from forwarding
// packets onto faulty links.
//
// Datapath, per flit:
//   input port Ik -> buffer shuffler (BS) -> input buffer IB(Zk) -> crossbar
//   (XB) -> output port Oj.
// Control, per input buffer b and virtual channel v:
//   routing unit (RU, link-fault aware) -> route register -> Trojan site (H)
//   -> authentication unit (AU) -> switch allocator (SA).
// The hardware_trojan instances sit where the paper places the attack point,
// between each routing unit and the crossbar; ht_en[b] is the external kill
// switch of port b's Trojan (tie to 0 for an uninfected router).
// Mitigation: when the Trojan forces a route onto a faulty link the AU of
// that buffer sets its warning flag F[b]. From then on the SA ignores buffer
// b, buffer b discards the rest of a packet that was entering it, no new
// packet is let into it (a head flit aimed at it waits), and the control unit
// (CU) of port b steps its modulo-5 counter Z[b] to the next buffer that is
// not busy; the BS then sends port b's next packets into that buffer, whose
// routing unit is clean.
// Busy flags: for the CU of port i, buffer j is busy when its own flag F[j]
// is set or when another port k (k != i, k != j) has already been moved
// into it (Z[k] = j). A buffer thus hosts at most one moved port besides its
// own. The paper defines busy only as "occupied by another CU"; this exact
// rule is this design's. When every buffer is busy for a port (several
// Trojans in one router) its CU keeps stepping, and the port's head flits get
// in whenever Z passes a clean buffer that is free at that moment.
// Link interfaces use valid/ready with the local ready independent of the
// local valid on the output side: out_valid[o] may depend on out_ready[o]
// (the switch allocator only grants ready outputs). The paper's routers use
// credits and a five-stage pipeline; this router has two cycles from a head
// flit entering an empty buffer to it leaving (write, route compute, then
// switch allocation and traversal in the same cycle) and one flit per cycle
// afterwards.
// Link status: ss_in = {LN, LE, LS, LW}, 1 = faulty, sampled into the sticky
// link status register of the LSA.
module sefar_router
  import sefar_pkg::*;
#(
  parameter int NUM_VC   = 2,
  parameter int VC_DEPTH = 4,
  parameter int MESH_DIM = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [COORD_W-1:0]         my_x,
  input  logic [COORD_W-1:0]         my_y,
  // input ports I1..I5 (index 0..4 = N, E, S, W, local)
  input  logic      [NUM_PORTS-1:0]  in_valid,
  input  flit_t     [NUM_PORTS-1:0]  in_flit,
  output logic      [NUM_PORTS-1:0]  in_ready,
  // output ports O1..O5
  output logic      [NUM_PORTS-1:0]  out_valid,
  output flit_t     [NUM_PORTS-1:0]  out_flit,
  input  logic      [NUM_PORTS-1:0]  out_ready,
  // link status signals SS
  input  logic [3:0]                 ss_in,
  // Trojan kill switches (attack model), one per input buffer
  input  logic      [NUM_PORTS-1:0]  ht_en,
  // observation
  output logic      [NUM_PORTS-1:0]  warn,       // AU warning flags F1..F5
  output port_idx_t [NUM_PORTS-1:0]  cu_state,   // CU outputs Z1..Z5
  output logic      [NUM_PORTS-1:0]  ht_active   // Trojan payload engaged
);

  localparam int N  = NUM_PORTS;
  localparam int VW = $clog2(NUM_VC);
  localparam int IW = $clog2(N);

  logic [3:0] lsr;

  port_idx_t [N-1:0]             z;
  logic      [N-1:0][N-1:0]      busy;          // [cu][buffer]

  logic      [N-1:0]             bs_valid, bs_ready, ib_ready;
  flit_t     [N-1:0]             bs_flit;

  flit_t     [N-1:0][NUM_VC-1:0] front;
  port_idx_t [N-1:0][NUM_VC-1:0] ru_out, route, xb_idx;
  logic      [N-1:0][NUM_VC-1:0] route_valid, req, w, s_ht;
  logic      [N-1:0][NUM_VC-1:0] is_head, is_tail;
  logic      [N-1:0]             f;

  logic      [N-1:0]             rd_en;
  logic      [N-1:0][VW-1:0]     rd_vc;
  flit_t     [N-1:0]             rd_flit;
  logic      [N-1:0][IW-1:0]     out_sel;

  lsa u_lsa (.clk(clk), .rst_n(rst_n), .ss_in(ss_in), .lsr(lsr));

  // ---------------------------------------------------------------- CUs
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        busy[i][j] = f[j];
        for (int k = 0; k < N; k++)
          if (k != i && k != j && int'(z[k]) == j + 1) busy[i][j] = 1'b1;
      end
  end

  for (genvar i = 0; i < N; i++) begin : g_cu
    control_unit #(.NUM_PORTS_P(N), .SEED(port_idx_t'(i + 1))) u_cu (
      .clk   (clk),
      .rst_n (rst_n),
      .f     (f[i]),
      .busy  (busy[i]),
      .z     (z[i])
    );
  end

  // ---------------------------------------------------------------- BS
  buffer_shuffler #(.N(N)) u_bs (
    .clk       (clk),
    .rst_n     (rst_n),
    .z         (z),
    .in_valid  (in_valid),
    .in_flit   (in_flit),
    .in_ready  (in_ready),
    .buf_valid (bs_valid),
    .buf_flit  (bs_flit),
    .buf_ready (bs_ready)
  );

  // ------------------------------------------- buffers, RU, Trojan site, AU
  for (genvar b = 0; b < N; b++) begin : g_port
    // A flagged buffer takes no new packet: a head flit aimed at it waits
    // (its port's CU is about to move on); only the rest of a packet that
    // was already entering it is accepted and discarded.
    assign bs_ready[b] = ib_ready[b] && !(f[b] && bs_flit[b].head);

    input_buffer #(.NUM_VC(NUM_VC), .VC_DEPTH(VC_DEPTH)) u_ib (
      .clk         (clk),
      .rst_n       (rst_n),
      .sink        (f[b]),
      .wr_valid    (bs_valid[b]),
      .wr_flit     (bs_flit[b]),
      .wr_ready    (ib_ready[b]),
      .front_flit  (front[b]),
      .route_in    (ru_out[b]),
      .route       (route[b]),
      .route_valid (route_valid[b]),
      .req         (req[b]),
      .rd_en       (rd_en[b]),
      .rd_vc       (rd_vc[b]),
      .rd_flit     (rd_flit[b])
    );

    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      ft_routing_unit #(.MESH_DIM(MESH_DIM)) u_ru (
        .cur_x       (my_x),
        .cur_y       (my_y),
        .dst_x       (front[b][v].data[COORD_W-1:0]),
        .dst_y       (front[b][v].data[2*COORD_W-1:COORD_W]),
        .link_status (lsr),
        .port_out    (ru_out[b][v])
      );

      hardware_trojan u_ht (
        .en   (ht_en[b]),
        .link (lsr),
        .p    (route[b][v]),
        .a    (xb_idx[b][v]),
        .s    (s_ht[b][v])
      );

      always_comb begin
        is_head[b][v] = front[b][v].head;
        is_tail[b][v] = front[b][v].tail;
      end
    end

    authentication_unit #(.NUM_VC(NUM_VC)) u_au (
      .clk         (clk),
      .rst_n       (rst_n),
      .link_status (lsr),
      .idx_valid   (route_valid[b]),
      .idx         (xb_idx[b]),
      .w           (w[b]),
      .flag        (f[b])
    );
  end

  // ---------------------------------------------------------------- SA, XB
  switch_allocator #(.N(N), .NUM_VC(NUM_VC)) u_sa (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (req),
    .route     (xb_idx),
    .is_head   (is_head),
    .is_tail   (is_tail),
    .w         (w),
    .blocked   (f),
    .out_ready (out_ready),
    .rd_en     (rd_en),
    .rd_vc     (rd_vc),
    .out_valid (out_valid),
    .out_sel   (out_sel)
  );

  crossbar #(.N(N)) u_xb (
    .in_flit  (rd_flit),
    .en       (out_valid),
    .sel      (out_sel),
    .out_flit (out_flit)
  );

  always_comb begin
    warn     = f;
    cu_state = z;
    for (int b = 0; b < N; b++) ht_active[b] = |s_ht[b];
  end

endmodule
