// tb_sefar_router: end-to-end test of the SeFaR router at its default sizes
// (2 VCs of 4 flits per port, 32-bit flits, 8x8 mesh), placed at mesh
// position (3,3).
//
// Phase 1, fault-free: random packets of 1..4 flits from all five inputs to
//   random destinations, with random output back-pressure.
// Phase 2, east output link faulty, Trojans dormant: same traffic; packets
//   must avoid the east output.
// Phase 3, the paper's example: the Trojan at input I1 (north) is switched
//   on. I1 sends packets towards the south; the Trojan forces the first one
//   onto the faulty east link, the AU flags IB1, the CU of I1 moves to 010
//   and later packets travel I1 -> IB2 -> O3. I2 keeps sending its own
//   traffic, so I1 and I2 share IB2.
// Every flit carries its source port, sequence number and position; each
// output reassembles packets and checks order, length and that the output is
// an acceptable fault-tolerant choice (computed here from the mesh position,
// the destination and the faulty links). Packets lost to the attack are only
// allowed for I1 packets whose head entered before the redirection, at most
// two.
// Phase 4, four Trojans: I1..I4 are all armed, so four of the five buffers
//   get flagged and the four ports share the one clean buffer (and each
//   other's, while those are still unflagged). All traffic must still arrive,
//   except packets whose head had gone into an armed buffer (at most two per
//   flagged buffer). Mechanism counters (detour, Trojan trigger, AU warning, CU step,
// redirected flits, discarded flits, shared-buffer stall, input stall, output
// back-pressure, both VCs in use) must all be non-zero.
module tb_sefar_router;
  import sefar_pkg::*;

  localparam int N = 5;
  localparam logic [2:0] MX = 3, MY = 3;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready, ht_en, warn, ht_active;
  flit_t [N-1:0] in_flit, out_flit;
  port_idx_t [N-1:0] cu_state;
  logic [3:0] ss_in;

  sefar_router dut (
    .clk(clk), .rst_n(rst_n), .my_x(MX), .my_y(MY),
    .in_valid(in_valid), .in_flit(in_flit), .in_ready(in_ready),
    .out_valid(out_valid), .out_flit(out_flit), .out_ready(out_ready),
    .ss_in(ss_in), .ht_en(ht_en), .warn(warn), .cu_state(cu_state),
    .ht_active(ht_active));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;

  task automatic fail(string what);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
  endtask

  // --------------------------------------------------------- scoreboard
  flit_t  txq [N][$];
  int     exp_len [int];
  int     exp_dst [int];
  logic   may_lose [int];
  logic   delivered [int];
  int     seq = 0;
  int     sent_pkts = 0, recv_pkts = 0, lost_pkts = 0, phase_base = 0;
  logic [3:0] fault_now = '0;     // faulty links for routing expectations
  int     out_ready_pct = 80;

  // mechanism counters
  int n_detour = 0, n_ht_trigger = 0, n_warn = 0, n_cu_step = 0, n_redirect = 0;
  int n_discard = 0, n_share_stall = 0, n_in_stall = 0, n_out_bp = 0, n_vc_full = 0;

  function automatic int key_of(flit_t f);
    return int'(f.data[31:16]);   // {src[2:0], seq[12:0]}
  endfunction

  task automatic send_packet(int src, int dx, int dy, int len);
    int key;
    key = (src << 13) | (seq & 'h1fff);
    seq++;
    exp_len[key] = len;
    exp_dst[key] = dy * 8 + dx;
    may_lose[key] = 1'b0;
    delivered[key] = 1'b0;
    sent_pkts++;
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.head = (k == 0);
      f.tail = (k == len - 1);
      f.data = {16'(key), 4'(k), 6'd0, 3'(dy), 3'(dx)};
      txq[src].push_back(f);
    end
  endtask

  // Acceptable output (0-based) of a packet at (MX,MY) for destination d.
  function automatic logic acceptable(int o, int d, logic [3:0] lf);
    int dx, dy;
    logic [3:0] ok, prod, ch;
    dx = d % 8; dy = d / 8;
    if (dx == MX && dy == MY) return o == 4;
    ok   = {MY != 0, MX != 7, MY != 7, MX != 0} & ~lf;   // {N,E,S,W}
    prod = {dy < MY, dx > MX, dy > MY, dx < MX};
    ch   = (o == 0) ? 4'b1000 : (o == 1) ? 4'b0100 : (o == 2) ? 4'b0010 :
           (o == 3) ? 4'b0001 : 4'b0000;
    if ((ch & ok) == 0) return 1'b0;
    if ((prod & ok & 4'b0101) != 0) return (ch & prod & 4'b0101) != 0;
    if ((prod & ok) != 0) return (ch & prod) != 0;
    return 1'b1;
  endfunction

  // --------------------------------------------------------- drivers
  always @(negedge clk) begin
    cycle++;
    for (int i = 0; i < N; i++) begin
      if (!in_valid[i] || in_ready_q[i]) begin
        if (txq[i].size() > 0 && ($urandom % 100) < 85) begin
          in_valid[i] = 1'b1;
          in_flit[i]  = txq[i][0];
        end else begin
          in_valid[i] = 1'b0;
        end
      end
    end
    for (int o = 0; o < N; o++) out_ready[o] = ($urandom % 100) < out_ready_pct;
  end

  logic [N-1:0] in_ready_q;
  logic [N-1:0] vc_all_busy;
  for (genvar g = 0; g < N; g++) begin : g_probe
    assign vc_all_busy[g] = &dut.g_port[g].u_ib.vc_busy;
  end
  int cur_key [N];
  int cur_idx [N];
  logic [N-1:0] prev_warn;
  port_idx_t [N-1:0] prev_z;

  always @(posedge clk) begin
    in_ready_q <= '0;
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          in_ready_q[i] <= 1'b1;
          if (int'(cu_state[i]) != i + 1) n_redirect++;
          if (in_flit[i].head && ht_en[int'(cu_state[i]) - 1])
            may_lose[key_of(in_flit[i])] = 1'b1;
          void'(txq[i].pop_front());
        end
        if (in_valid[i] && !in_ready[i]) begin
          n_in_stall++;
          if (int'(cu_state[i]) != i + 1) n_share_stall++;
        end
        if (dut.bs_valid[i] && dut.bs_ready[i] && dut.f[i]) n_discard++;
        if (vc_all_busy[i]) n_vc_full++;
        if (ht_active[i]) n_ht_trigger++;
        if (warn[i] && !prev_warn[i]) n_warn++;
        if (cu_state[i] != prev_z[i]) n_cu_step++;
      end
      prev_warn <= warn;
      prev_z    <= cu_state;
      for (int o = 0; o < N; o++) begin
        if (!out_ready[o] && |dut.req) n_out_bp++;
        if (out_valid[o] && !out_ready[o]) fail($sformatf("valid on O%0d while not ready", o + 1));
        if (out_valid[o] && out_ready[o]) begin
          flit_t f;
          int key;
          f = out_flit[o];
          key = key_of(f);
          checks++;
          if (o < 4 && fault_now[3 - o]) fail($sformatf("flit sent on faulty output O%0d", o + 1));
          if (!exp_len.exists(key)) begin
            fail($sformatf("unknown flit key %0h on O%0d", key, o + 1));
          end else if (f.head) begin
            if (cur_idx[o] != 0) fail("head inside a packet");
            if (int'(f.data[15:12]) != 0) fail("head flit index");
            cur_key[o] = key;
            cur_idx[o] = 1;
            if (!acceptable(o, exp_dst[key], fault_now))
              fail($sformatf("packet %0h to %0d left on unacceptable O%0d", key, exp_dst[key], o + 1));
            if (fault_now[2] && (exp_dst[key] % 8) > MX && o != 1) n_detour++;
          end else begin
            if (key != cur_key[o]) fail("flit of another packet interleaved");
            if (int'(f.data[15:12]) != cur_idx[o]) fail("flit order");
            cur_idx[o]++;
          end
          if (f.tail && exp_len.exists(key)) begin
            checks++;
            if (cur_idx[o] != exp_len[key]) fail("packet length");
            if (delivered[key]) fail("packet delivered twice");
            delivered[key] = 1'b1;
            recv_pkts++;
            cur_idx[o] = 0;
          end
        end
      end
    end
  end

  // --------------------------------------------------------- helpers
  task automatic random_traffic(int per_port);
    for (int p = 0; p < per_port; p++)
      for (int i = 0; i < N; i++)
        send_packet(i, $urandom % 8, $urandom % 8, 1 + $urandom % 4);
  endtask

  task automatic drain(int max_cycles);
    int t;
    t = 0;
    while (t < max_cycles) begin
      logic busy;
      busy = 1'b0;
      for (int i = 0; i < N; i++) if (txq[i].size() > 0 || in_valid[i]) busy = 1'b1;
      if (!busy && recv_pkts + lost_pkts == sent_pkts) break;
      if (!busy && t > 200) break;
      @(posedge clk);
      t++;
    end
    repeat (20) @(posedge clk);
  endtask

  task automatic tally_losses();
    lost_pkts = 0;
    foreach (exp_len[k]) if (!delivered[k]) begin
      if (may_lose[k]) lost_pkts++;
      else fail($sformatf("packet %0h (dst %0d) not delivered", k, exp_dst[k]));
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '0; ss_in = '0; ht_en = '0;
    prev_warn = '0; in_ready_q = '0;
    for (int i = 0; i < N; i++) prev_z[i] = port_idx_t'(i + 1);
    for (int o = 0; o < N; o++) begin cur_key[o] = -1; cur_idx[o] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    for (int i = 0; i < N; i++)
      if (int'(cu_state[i]) != i + 1) fail("CU seed");

    // Phase 1: fault-free
    random_traffic(60);
    drain(20000);
    tally_losses();
    checks++;
    if (recv_pkts != sent_pkts) fail("phase 1 delivery");
    $display("phase 1: sent %0d delivered %0d", sent_pkts, recv_pkts);

    // Phase 2: east link faulty, Trojans dormant
    ss_in = 4'b0100;
    @(posedge clk); @(posedge clk);
    fault_now = 4'b0100;
    ss_in = 4'b0000;                  // the LSR keeps the permanent fault
    out_ready_pct = 60;
    random_traffic(60);
    drain(20000);
    tally_losses();
    checks++;
    if (recv_pkts != sent_pkts) fail("phase 2 delivery");
    checks++;
    if (warn != '0) fail("warning without Trojan");
    $display("phase 2: sent %0d delivered %0d", sent_pkts, recv_pkts);

    // Phase 3: Trojan at I1 triggered
    ht_en[0] = 1'b1;
    out_ready_pct = 70;
    for (int p = 0; p < 30; p++) begin
      send_packet(0, MX, 4 + $urandom % 4, 1 + $urandom % 4);   // due south
      send_packet(1, $urandom % 8, $urandom % 8, 1 + $urandom % 4);
    end
    drain(20000);
    tally_losses();
    checks++;
    if (warn != 5'b00001) fail($sformatf("warning flags %b, expected 00001", warn));
    checks++;
    if (cu_state[0] != 3'b010) fail($sformatf("CU of I1 in %b, expected 010", cu_state[0]));
    checks++;
    if (lost_pkts < 1 || lost_pkts > 2) fail($sformatf("%0d packets lost, expected 1..2", lost_pkts));
    checks++;
    if (recv_pkts + lost_pkts != sent_pkts) fail("phase 3 delivery");
    $display("phase 3: sent %0d delivered %0d lost to the Trojan %0d", sent_pkts, recv_pkts, lost_pkts);

    // Phase 4: the paper's heaviest case, Trojans at four of the five inputs
    // (I1..I4) of the router. Only IB5 stays clean; every flagged port has to
    // get its packets through the shared buffers. A packet may be lost only if
    // its head went into a buffer whose Trojan was armed, and at most NUM_VC
    // per flagged buffer can be caught that way.
    ht_en = 5'b01111;
    out_ready_pct = 80;
    phase_base = sent_pkts;
    random_traffic(40);
    drain(60000);
    tally_losses();
    checks++;
    if (warn != 5'b01111) fail($sformatf("warning flags %b, expected 01111", warn));
    checks++;
    if (lost_pkts > 2 + 2 * 4) fail($sformatf("%0d packets lost in phases 3-4", lost_pkts));
    checks++;
    if (recv_pkts + lost_pkts != sent_pkts) fail("phase 4 delivery");
    $display("phase 4: sent %0d, over phases 3-4 lost to the Trojans %0d",
             sent_pkts - phase_base, lost_pkts);

    $display("mechanisms: detour=%0d ht_trigger=%0d au_warning=%0d cu_step=%0d redirected_flits=%0d discarded_flits=%0d shared_buffer_stall=%0d input_stall=%0d output_backpressure=%0d both_vcs_busy=%0d",
             n_detour, n_ht_trigger, n_warn, n_cu_step, n_redirect, n_discard, n_share_stall,
             n_in_stall, n_out_bp, n_vc_full);
    checks++; if (n_detour == 0)      fail("no detour around the faulty link");
    checks++; if (n_ht_trigger == 0)  fail("Trojan never triggered");
    checks++; if (n_warn == 0)        fail("AU never warned");
    checks++; if (n_cu_step == 0)     fail("CU never stepped");
    checks++; if (n_redirect == 0)    fail("no flit redirected by the BS");
    checks++; if (n_discard == 0)     fail("no flit discarded by a flagged buffer");
    checks++; if (n_share_stall == 0) fail("no shared-buffer stall");
    checks++; if (n_in_stall == 0)    fail("no input stall");
    checks++; if (n_out_bp == 0)      fail("no output back-pressure");
    checks++; if (n_vc_full == 0)     fail("both VCs never busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
