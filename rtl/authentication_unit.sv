// authentication_unit: the AU of one input buffer, sitting at the crossbar.
//
// For each of the buffer's NUM_VC virtual channels it checks the port index
// A2A1A0 that reaches the crossbar against the link status register and sets
// the per-VC warning w[v] when a routed VC points at an output whose link is
// faulty. The printed AU truth table (one faulty link at a time) is
//   LN LE LS LW = 0000 -> W=0;  0001 & A=100, 0010 & A=011, 0100 & A=010,
//   1000 & A=001 -> W=1,
// which is implemented as an exact index comparison, so it also holds when
// several links are faulty. The warning flag F of the port (flag) is this
// design's sticky register: it is set one clock after any w[v] and stays set
// until reset, because the condition disappears once the flagged VCs drain or
// are abandoned while the Trojan stays in place.
module authentication_unit
  import sefar_pkg::*;
#(
  parameter int NUM_VC = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             link_status,         // {LN, LE, LS, LW}
  input  logic      [NUM_VC-1:0] idx_valid,           // VC holds a computed route
  input  port_idx_t [NUM_VC-1:0] idx,                 // A2A1A0 per VC
  output logic      [NUM_VC-1:0] w,                   // per-VC anomaly
  output logic                   flag                 // F, sticky warning
);

  always_comb begin
    for (int v = 0; v < NUM_VC; v++)
      w[v] = idx_valid[v] & points_to_faulty(idx[v], link_status);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flag <= 1'b0;
    else if (|w) flag <= 1'b1;
  end

endmodule
