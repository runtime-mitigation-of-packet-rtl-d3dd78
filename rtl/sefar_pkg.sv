// sefar_pkg: types and constants shared by the SeFaR router.
//
// Port index codes (3 bits) follow the truth tables of the Trojan decoder and
// the authentication unit: 001 = north, 010 = east, 011 = south, 100 = west.
// The local (core) port is given code 101 here, which is this design's own
// choice; the counter in the control unit cycles through the five codes
// 001..101, so input port Ik and input buffer IBk both carry code k.
// Link status vectors are ordered {LN, LE, LS, LW}, a 1 marking a faulty link.
//
// A flit is FLIT_W = 32 bits of payload plus head and tail markers. A head
// flit carries its destination router in the low payload bits:
// data[2:0] = destination x, data[5:3] = destination y (8x8 mesh). The flit
// format is not given in the paper and is this design's choice.
package sefar_pkg;

  localparam int NUM_PORTS = 5;   // N, E, S, W, local
  localparam int FLIT_W    = 32;  // flit width used for the headline results
  localparam int COORD_W   = 3;   // 8x8 mesh
  localparam int PORT_W    = 3;   // port index width (P2P1P0 / A2A1A0)

  typedef logic [PORT_W-1:0] port_idx_t;

  localparam port_idx_t PORT_NONE  = 3'b000;
  localparam port_idx_t PORT_NORTH = 3'b001;
  localparam port_idx_t PORT_EAST  = 3'b010;
  localparam port_idx_t PORT_SOUTH = 3'b011;
  localparam port_idx_t PORT_WEST  = 3'b100;
  localparam port_idx_t PORT_LOCAL = 3'b101;

  // Link status bit positions inside a {LN, LE, LS, LW} vector.
  localparam int LINK_N = 3;
  localparam int LINK_E = 2;
  localparam int LINK_S = 1;
  localparam int LINK_W = 0;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Zero-based array position of a port code (001 -> 0 ... 101 -> 4).
  function automatic int unsigned port_pos(port_idx_t idx);
    return int'(idx) - 1;
  endfunction

  // True when idx names one of the four directional ports whose link is
  // marked faulty in link = {LN, LE, LS, LW}.
  function automatic logic points_to_faulty(port_idx_t idx, logic [3:0] link);
    case (idx)
      PORT_NORTH: return link[LINK_N];
      PORT_EAST:  return link[LINK_E];
      PORT_SOUTH: return link[LINK_S];
      PORT_WEST:  return link[LINK_W];
      default:    return 1'b0;
    endcase
  endfunction

endpackage
