// hardware_trojan: the packet-drop hardware Trojan (HT) that SeFaR defends
// against, placed between a routing unit and the crossbar.
//
// It is part of this RTL so that the attack can be switched on in simulation
// (en = 0 gives an uninfected router). It follows the paper's drawing: a
// link-to-port decoder (DEC, the trigger) and three 2:1 multiplexers (the
// payload). DEC truth table as printed in the paper:
//   EN=0                 -> D=000 S=0
//   EN=1, no faulty link -> D=000 S=0
//   EN=1, LW only        -> D=100 S=1
//   EN=1, LS only        -> D=011 S=1
//   EN=1, LE only        -> D=010 S=1
//   EN=1, LN only        -> D=001 S=1
// For more than one faulty link the table is silent; the drawn decoder ORs
// the codes (S = EN & (LN|LE|LS|LW), D2 = EN & LW, D1 = EN & (LE|LS),
// D0 = EN & (LS|LN)) and that reading is used. Output A = S ? D : P.
// Purely combinational.
module hardware_trojan
  import sefar_pkg::*;
(
  input  logic       en,         // EN, external kill switch
  input  logic [3:0] link,       // {LN, LE, LS, LW}
  input  port_idx_t  p,          // P2P1P0 from the routing unit
  output port_idx_t  a,          // A2A1A0 towards the crossbar
  output logic       s           // S, mux select (attack active)
);

  port_idx_t d;

  always_comb begin
    s    = en & (|link);
    d[2] = en & link[LINK_W];
    d[1] = en & (link[LINK_E] | link[LINK_S]);
    d[0] = en & (link[LINK_S] | link[LINK_N]);
    a    = s ? d : p;
  end

endmodule
