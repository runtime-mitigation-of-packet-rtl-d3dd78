// ft_routing_unit: logic-based fault-tolerant routing unit (RU) of one input
// virtual channel.
//
// Purely combinational. From the destination of a head flit, the router's own
// mesh position and the link status register it returns the output port index
// P2P1P0 (codes of sefar_pkg). The paper uses a look-ahead algorithm from the
// literature and does not give its logic; this unit is the simplest
// fault-tolerant minimal-first rule that has the property the paper relies on,
// namely that it never selects an output whose link is faulty:
//   1. destination reached            -> local port (101)
//   2. productive X direction healthy -> that direction (X first)
//   3. productive Y direction healthy -> that direction
//   4. otherwise the first healthy, existing direction in the order
//      N, E, S, W that is not the X/Y productive one (a detour)
//   5. no healthy direction at all    -> 000 (no route)
// y grows towards the south (router id = y * MESH_DIM + x).
// The rule sees only this router's four links. It routes around a single
// broken link, but it is neither livelock- nor deadlock-free when many links
// are broken (a packet can bounce between two routers, and detours can close
// a cycle of waiting packets). A network with several faults needs a real
// look-ahead algorithm in its place; the ports would stay the same.
module ft_routing_unit
  import sefar_pkg::*;
#(
  parameter int MESH_DIM = 8
) (
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  input  logic [3:0]         link_status,  // {LN, LE, LS, LW}, 1 = faulty
  output port_idx_t          port_out      // P2P1P0
);

  logic [3:0] exists;   // {N, E, S, W} neighbour exists inside the mesh
  logic [3:0] healthy;
  port_idx_t  px, py;   // productive X / Y direction, PORT_NONE if none

  always_comb begin
    exists[LINK_N] = (cur_y != '0);
    exists[LINK_S] = (int'(cur_y) != MESH_DIM - 1);
    exists[LINK_W] = (cur_x != '0);
    exists[LINK_E] = (int'(cur_x) != MESH_DIM - 1);
    healthy = exists & ~link_status;

    px = (dst_x > cur_x) ? PORT_EAST  : (dst_x < cur_x) ? PORT_WEST  : PORT_NONE;
    py = (dst_y > cur_y) ? PORT_SOUTH : (dst_y < cur_y) ? PORT_NORTH : PORT_NONE;

    port_out = PORT_NONE;
    if (px == PORT_NONE && py == PORT_NONE)
      port_out = PORT_LOCAL;
    else if (px != PORT_NONE && !points_to_faulty(px, link_status))
      port_out = px;
    else if (py != PORT_NONE && !points_to_faulty(py, link_status))
      port_out = py;
    else if (healthy[LINK_N] && px != PORT_NORTH && py != PORT_NORTH)
      port_out = PORT_NORTH;
    else if (healthy[LINK_E] && px != PORT_EAST)
      port_out = PORT_EAST;
    else if (healthy[LINK_S] && py != PORT_SOUTH)
      port_out = PORT_SOUTH;
    else if (healthy[LINK_W] && px != PORT_WEST)
      port_out = PORT_WEST;
  end

endmodule
