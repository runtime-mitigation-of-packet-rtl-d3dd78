// control_unit: the CU of one input port.
//
// A modulo-NUM_PORTS counter whose state Z is a port index (001..101). It is
// reset to its own port index SEED, so the buffer shuffler first sends port
// k's flits to buffer IBk. A multiplexer selected by Z picks the busy flag
// B[Z] of the buffer Z points at. While the warning flag F of the port is
// high (F is the count enable) and B[Z] is high, the counter advances on each
// clock edge (101 wraps to 001); it holds as soon as it reaches a buffer whose
// busy flag is low. The paper gates the counter clock with B[Z]; here the
// same condition is a synchronous enable. Timing: Z changes one clock after
// F & B[Z] is seen, one step per clock.
module control_unit
  import sefar_pkg::*;
#(
  parameter int        NUM_PORTS_P = NUM_PORTS,
  parameter port_idx_t SEED        = PORT_NORTH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   f,      // warning flag from the AU (enable)
  input  logic [NUM_PORTS_P-1:0] busy,   // B1..BN as seen by this CU (bit k-1 = Bk)
  output port_idx_t              z       // FSM output, select to the shuffler
);

  logic sel_busy;

  always_comb sel_busy = busy[port_pos(z)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      z <= SEED;
    else if (f && sel_busy)
      z <= (int'(z) == NUM_PORTS_P) ? port_idx_t'(1) : z + port_idx_t'(1);
  end

  // The state never leaves the legal codes 1..NUM_PORTS_P.
  a_legal_state: assert property (@(posedge clk) disable iff (!rst_n)
                                  z != '0 && int'(z) <= NUM_PORTS_P);

endmodule
