// switch_allocator: round-robin separable switch allocator (SA) with
// wormhole output locking.
//
// Stage 1, per input buffer: a round-robin arbiter picks one of the buffer's
// virtual channels that has a routed flit, whose output is ready and may
// take it (a head flit needs a free output, a body/tail flit continues on the
// output its head locked). Stage 2, per output port: a round-robin arbiter
// picks one of the buffers whose stage-1 choice targets that output. An output
// stays locked to a (buffer, VC) pair from head to tail flit.
// SeFaR additions: requests of a buffer whose warning flag F is set
// (blocked[b]) are ignored, as the control unit instructs the SA in the
// paper, and so is any VC whose port index the authentication unit has just
// flagged (w), so no flit is ever switched towards a faulty link even in the
// clock before F is set. Port indices outside 001..101 are not switched.
// The paper states round-robin switch allocation; the separable two-stage
// structure and the locking are this design's choices.
// Grants are combinational (same cycle as the request); locks and round-robin
// pointers update on the clock edge.
module switch_allocator
  import sefar_pkg::*;
#(
  parameter int N      = NUM_PORTS,
  parameter int NUM_VC = 2
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic      [N-1:0][NUM_VC-1:0]    req,
  input  port_idx_t [N-1:0][NUM_VC-1:0]    route,     // after the Trojan site
  input  logic      [N-1:0][NUM_VC-1:0]    is_head,
  input  logic      [N-1:0][NUM_VC-1:0]    is_tail,
  input  logic      [N-1:0][NUM_VC-1:0]    w,         // AU per-VC anomaly
  input  logic      [N-1:0]                blocked,   // AU warning flag F
  input  logic      [N-1:0]                out_ready,
  // to the input buffers
  output logic      [N-1:0]                rd_en,
  output logic      [N-1:0][$clog2(NUM_VC)-1:0] rd_vc,
  // to the crossbar
  output logic      [N-1:0]                out_valid,
  output logic      [N-1:0][$clog2(N)-1:0] out_sel
);

  localparam int VW = $clog2(NUM_VC);
  localparam int IW = $clog2(N);

  logic [N-1:0]          out_locked;
  logic [N-1:0][IW-1:0]  lock_buf;
  logic [N-1:0][VW-1:0]  lock_vc;

  logic [N-1:0][NUM_VC-1:0] elig;
  logic [N-1:0][NUM_VC-1:0] s1_gnt;    // one-hot form, unused (index used)
  logic [N-1:0][VW-1:0]     s1_vc;
  logic [N-1:0]             s1_valid;
  logic [N-1:0][IW-1:0]     s1_out;    // output targeted by buffer b's pick
  logic [N-1:0][N-1:0]      s2_req;    // [output][buffer]
  logic [N-1:0][N-1:0]      s2_gnt;
  logic [N-1:0][IW-1:0]     s2_idx;

  always_comb begin
    for (int b = 0; b < N; b++)
      for (int v = 0; v < NUM_VC; v++) begin
        elig[b][v] = 1'b0;
        if (req[b][v] && !blocked[b] && !w[b][v] && route[b][v] != '0
            && int'(route[b][v]) <= N && out_ready[port_pos(route[b][v])]) begin
          if (out_locked[port_pos(route[b][v])])
            elig[b][v] = (int'(lock_buf[port_pos(route[b][v])]) == b)
                         && (int'(lock_vc[port_pos(route[b][v])]) == v);
          else
            elig[b][v] = is_head[b][v];
        end
      end
  end

  for (genvar b = 0; b < N; b++) begin : g_s1
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (elig[b]),
      .advance (rd_en[b]),
      .gnt     (s1_gnt[b]),
      .gnt_idx (s1_vc[b])
    );
  end

  always_comb begin
    for (int b = 0; b < N; b++) begin
      s1_valid[b] = |elig[b];
      s1_out[b]   = IW'(port_pos(route[b][s1_vc[b]]));
    end
    for (int o = 0; o < N; o++)
      for (int b = 0; b < N; b++)
        s2_req[o][b] = s1_valid[b] && int'(s1_out[b]) == o;
  end

  for (genvar o = 0; o < N; o++) begin : g_s2
    rr_arbiter #(.N(N)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (s2_req[o]),
      .advance (1'b1),
      .gnt     (s2_gnt[o]),
      .gnt_idx (s2_idx[o])
    );
  end

  always_comb begin
    rd_en = '0;
    rd_vc = s1_vc;
    for (int o = 0; o < N; o++) begin
      out_valid[o] = |s2_req[o];
      out_sel[o]   = s2_idx[o];
      if (out_valid[o]) rd_en[s2_idx[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_locked <= '0;
      lock_buf   <= '0;
      lock_vc    <= '0;
    end else begin
      for (int o = 0; o < N; o++)
        if (out_valid[o]) begin
          if (is_tail[s2_idx[o]][s1_vc[s2_idx[o]]])
            out_locked[o] <= 1'b0;
          else if (is_head[s2_idx[o]][s1_vc[s2_idx[o]]]) begin
            out_locked[o] <= 1'b1;
            lock_buf[o]   <= s2_idx[o];
            lock_vc[o]    <= s1_vc[s2_idx[o]];
          end
        end
    end
  end

  // Each buffer is read by at most one output per cycle.
  for (genvar o1 = 0; o1 < N; o1++) begin : g_chk
    for (genvar o2 = o1 + 1; o2 < N; o2++) begin : g_chk2
      a_one_reader: assert property (@(posedge clk) disable iff (!rst_n)
        !(out_valid[o1] && out_valid[o2] && out_sel[o1] == out_sel[o2]));
    end
  end

endmodule
