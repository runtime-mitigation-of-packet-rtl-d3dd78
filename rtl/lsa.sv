// lsa: link status analyzer of one router.
//
// Keeps the link status register (LSR) that the fault-tolerant routing units
// and the authentication units read. Each cycle the status signals SS of the
// four directional links {LN, LE, LS, LW} (1 = faulty) are sampled. Link
// faults are permanent in the fault model, so a bit once set stays set until
// reset (sticky). The paper's routing unit also looks at link status two hops
// away; that neighbour information is not modelled here, only the router's
// own four links. Timing: lsr reflects ss_in one clock after it is raised.
module lsa (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] ss_in,  // {LN, LE, LS, LW}, 1 = link faulty
  output logic [3:0] lsr     // link status register
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lsr <= '0;
    else        lsr <= lsr | ss_in;
  end

endmodule
