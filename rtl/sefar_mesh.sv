// sefar_mesh: a MESH_DIM x MESH_DIM mesh NoC of SeFaR routers, the network
// the paper evaluates (8x8).
//
// Router r = y * MESH_DIM + x sits at column x, row y; row numbers grow
// towards the south. Output ports O1..O4 (N, E, S, W) of each router drive a
// link_stage into the opposite input port of the neighbour (N -> S input of
// the router above, E -> W input of the router to the right, and so on).
// Port 5 of every router is its local port and is brought out as the tile
// interface (the cores and network interfaces are outside this design).
// Ports on the mesh edge are left unconnected: their inputs are idle and
// their outputs are always ready; the routing unit never selects them.
// link_fault[r] = {N, E, S, W} marks the outgoing links of router r that are
// permanently faulty: the link_stage then loses every flit sent on it, and
// the same bits are the status signals SS of router r. ht_en[r] switches on
// the Trojans of router r (attack model), warn[r] shows its AU flags.
// Timing: one clock per hop for the link stage plus the router latency.
module sefar_mesh
  import sefar_pkg::*;
#(
  parameter int MESH_DIM = 8,
  parameter int NUM_VC   = 2,
  parameter int VC_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  // tile (local port) interface
  input  logic  [MESH_DIM*MESH_DIM-1:0]                 local_in_valid,
  input  flit_t [MESH_DIM*MESH_DIM-1:0]                 local_in_flit,
  output logic  [MESH_DIM*MESH_DIM-1:0]                 local_in_ready,
  output logic  [MESH_DIM*MESH_DIM-1:0]                 local_out_valid,
  output flit_t [MESH_DIM*MESH_DIM-1:0]                 local_out_flit,
  input  logic  [MESH_DIM*MESH_DIM-1:0]                 local_out_ready,
  // faults, attack model and observation
  input  logic  [MESH_DIM*MESH_DIM-1:0][3:0]            link_fault,
  input  logic  [MESH_DIM*MESH_DIM-1:0][NUM_PORTS-1:0]  ht_en,
  output logic  [MESH_DIM*MESH_DIM-1:0][NUM_PORTS-1:0]  warn,
  output logic  [MESH_DIM*MESH_DIM-1:0][3:0]            link_drop
);

  localparam int NN = MESH_DIM * MESH_DIM;

  // Router-side signals, port index 0..4 = N, E, S, W, local.
  logic  [NN-1:0][NUM_PORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NN-1:0][NUM_PORTS-1:0] r_in_flit, r_out_flit;
  // Link-side signals, one link per router and direction d = 0..3.
  logic  [NN-1:0][3:0]           l_out_valid, l_in_ready;
  flit_t [NN-1:0][3:0]           l_out_flit;

  for (genvar y = 0; y < MESH_DIM; y++) begin : g_y
    for (genvar x = 0; x < MESH_DIM; x++) begin : g_x
      localparam int R = y * MESH_DIM + x;

      sefar_router #(.NUM_VC(NUM_VC), .VC_DEPTH(VC_DEPTH), .MESH_DIM(MESH_DIM)) u_router (
        .clk       (clk),
        .rst_n     (rst_n),
        .my_x      (COORD_W'(x)),
        .my_y      (COORD_W'(y)),
        .in_valid  (r_in_valid[R]),
        .in_flit   (r_in_flit[R]),
        .in_ready  (r_in_ready[R]),
        .out_valid (r_out_valid[R]),
        .out_flit  (r_out_flit[R]),
        .out_ready (r_out_ready[R]),
        .ss_in     (link_fault[R]),
        .ht_en     (ht_en[R]),
        .warn      (warn[R]),
        .cu_state  (),
        .ht_active ()
      );

      // Outgoing links: direction d uses router output d, fault bit 3-d.
      for (genvar d = 0; d < 4; d++) begin : g_link
        localparam bit EXISTS = (d == 0) ? (y > 0) : (d == 1) ? (x < MESH_DIM - 1) :
                                (d == 2) ? (y < MESH_DIM - 1) : (x > 0);
        if (EXISTS) begin : g_on
          link_stage u_link (
            .clk       (clk),
            .rst_n     (rst_n),
            .faulty    (link_fault[R][3-d]),
            .in_valid  (r_out_valid[R][d]),
            .in_flit   (r_out_flit[R][d]),
            .in_ready  (r_out_ready[R][d]),
            .out_valid (l_out_valid[R][d]),
            .out_flit  (l_out_flit[R][d]),
            .out_ready (l_in_ready[R][d]),
            .drop      (link_drop[R][3-d])
          );
        end else begin : g_off
          assign r_out_ready[R][d]   = 1'b1;
          assign l_out_valid[R][d]   = 1'b0;
          assign l_out_flit[R][d]    = '0;
          assign link_drop[R][3-d]   = 1'b0;
        end
      end

      // Incoming links: input N comes from the router above over its S link,
      // input E from the right over its W link, and so on.
      if (y > 0) begin : g_in_n
        assign r_in_valid[R][0] = l_out_valid[R-MESH_DIM][2];
        assign r_in_flit[R][0]  = l_out_flit[R-MESH_DIM][2];
        assign l_in_ready[R-MESH_DIM][2] = r_in_ready[R][0];
      end else begin : g_no_n
        assign r_in_valid[R][0] = 1'b0;
        assign r_in_flit[R][0]  = '0;
      end
      if (x < MESH_DIM - 1) begin : g_in_e
        assign r_in_valid[R][1] = l_out_valid[R+1][3];
        assign r_in_flit[R][1]  = l_out_flit[R+1][3];
        assign l_in_ready[R+1][3] = r_in_ready[R][1];
      end else begin : g_no_e
        assign r_in_valid[R][1] = 1'b0;
        assign r_in_flit[R][1]  = '0;
      end
      if (y < MESH_DIM - 1) begin : g_in_s
        assign r_in_valid[R][2] = l_out_valid[R+MESH_DIM][0];
        assign r_in_flit[R][2]  = l_out_flit[R+MESH_DIM][0];
        assign l_in_ready[R+MESH_DIM][0] = r_in_ready[R][2];
      end else begin : g_no_s
        assign r_in_valid[R][2] = 1'b0;
        assign r_in_flit[R][2]  = '0;
      end
      if (x > 0) begin : g_in_w
        assign r_in_valid[R][3] = l_out_valid[R-1][1];
        assign r_in_flit[R][3]  = l_out_flit[R-1][1];
        assign l_in_ready[R-1][1] = r_in_ready[R][3];
      end else begin : g_no_w
        assign r_in_valid[R][3] = 1'b0;
        assign r_in_flit[R][3]  = '0;
      end
      // Links leaving the mesh edge have no reader.
      if (y == 0)            begin : g_rdy_n assign l_in_ready[R][0] = 1'b1; end
      if (x == MESH_DIM - 1) begin : g_rdy_e assign l_in_ready[R][1] = 1'b1; end
      if (y == MESH_DIM - 1) begin : g_rdy_s assign l_in_ready[R][2] = 1'b1; end
      if (x == 0)            begin : g_rdy_w assign l_in_ready[R][3] = 1'b1; end

      // Local port.
      assign r_in_valid[R][4]   = local_in_valid[R];
      assign r_in_flit[R][4]    = local_in_flit[R];
      assign local_in_ready[R]  = r_in_ready[R][4];
      assign local_out_valid[R] = r_out_valid[R][4];
      assign local_out_flit[R]  = r_out_flit[R][4];
      assign r_out_ready[R][4]  = local_out_ready[R];
    end
  end

endmodule
