// tb_sefar_mesh_synthetic: synthetic-traffic study of the 8x8 SeFaR mesh at
// its default sizes, in the five network conditions of the source's synthetic
// evaluation, for three traffic patterns:
//   patterns   uniform random (any tile to any other tile),
//              transpose (x,y) -> (y,x) (tiles on the diagonal stay silent),
//              shuffle (6-bit tile number rotated left by one bit);
//   conditions fault-free; 5 % faulty links, Trojans dormant; 5 % faulty
//              links, Trojans armed; 10 % faulty links, Trojans dormant;
//              10 % faulty links, Trojans armed.
// 5 % and 10 % of the 224 directed links are 11 and 22 links. They are picked
// by a fixed pseudo-random sequence from interior links, with at most one
// faulty output per router. In an armed condition every router with a faulty
// output link carries a triggered Trojan behind its local-port buffer I5.
// Each condition starts from reset and injects the same traffic (a fixed
// LCG seeded per pattern, so dormant and armed runs see identical packets):
// each tile sends PKTS packets of 1..4 flits at an injection rate of about
// INJ_PCT percent of cycles.
// Checked for every run:
//   - a packet arrives only at its destination tile, whole and in order;
//   - no flit is ever sent onto a faulty link (link_drop never pulses);
//   - AU flags appear only at armed Trojans, and every armed Trojan whose
//     tile injected traffic is flagged;
//   - fault-free runs deliver every packet.
// The average packet latency (head injected to tail delivered, in cycles) is
// printed per run, the counterpart of the source's latency plots.
// Known limitation shown by this test: the routing unit is the one-hop rule
// of ft_routing_unit, not the source's look-ahead algorithm. With 11 or 22
// faulty links it is neither livelock- nor deadlock-free, and part of the
// traffic (typically 5 to 30 percent here) jams in the network even with the
// Trojans dormant. Such packets are counted as undelivered and printed; they
// do not count as failures, because they are no fault of the security
// units. Where the jams form differs from run to run, so the packets the
// Trojans cost (at most NUM_VC per flagged buffer) cannot be told apart from
// jammed ones by comparing an armed run with its dormant twin. A run is ended once nothing has arrived for 500 cycles after all
// injection, or after 10000 cycles.
module tb_sefar_mesh_synthetic;
  import sefar_pkg::*;

  localparam int D       = 8;
  localparam int NN      = D * D;
  localparam int PKTS    = 6;
  localparam int INJ_PCT = 10;

  logic clk = 0, rst_n = 0;
  logic  [NN-1:0] li_valid, li_ready, lo_valid, lo_ready;
  flit_t [NN-1:0] li_flit, lo_flit;
  logic  [NN-1:0][3:0] link_fault, link_drop;
  logic  [NN-1:0][4:0] ht_en, warn;

  sefar_mesh dut (
    .clk(clk), .rst_n(rst_n),
    .local_in_valid(li_valid), .local_in_flit(li_flit), .local_in_ready(li_ready),
    .local_out_valid(lo_valid), .local_out_flit(lo_flit), .local_out_ready(lo_ready),
    .link_fault(link_fault), .ht_en(ht_en), .warn(warn), .link_drop(link_drop));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;

  task automatic fail(string what);
    failures++;
    if (failures < 30) $display("FAIL @%0d: %s", cycle, what);
  endtask

  // ------------------------------------------------------------ traffic
  int unsigned lcg;
  function automatic int unsigned rnd(int unsigned m);
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return (lcg >> 8) % m;
  endfunction

  flit_t txq [NN][$];
  int    seqn [NN];
  int    exp_len [int];
  int    exp_dst [int];
  int    t_inj [int];
  logic  got [int];
  int    sent, recv, lat_sum;
  int    cur_key [NN];
  int    cur_idx [NN];
  logic  [NN-1:0] injected;

  int n_ht = 0, n_flag = 0, n_drops = 0, n_inj_stall = 0;
  int n_jam = 0;

  task automatic send_packet(int src, int dst, int len);
    int key;
    key = (src << 10) | (seqn[src] & 'h3ff);
    seqn[src]++;
    exp_len[key] = len;
    exp_dst[key] = dst;
    got[key] = 1'b0;
    sent++;
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.head = (k == 0);
      f.tail = (k == len - 1);
      f.data = {16'(key), 6'd0, 4'(k), 3'(dst / D), 3'(dst % D)};
      txq[src].push_back(f);
    end
  endtask

  function automatic int dest_of(int pattern, int src);
    int x, y;
    x = src % D; y = src / D;
    case (pattern)
      0: begin
        int d;
        d = int'(rnd(NN - 1));
        return (d >= src) ? d + 1 : d;
      end
      1: return x * D + y;
      default: return ((src << 1) | (src >> 5)) & (NN - 1);
    endcase
  endfunction

  // ------------------------------------------------------------ drivers
  logic [NN-1:0] li_ready_q;

  always @(negedge clk) begin
    cycle++;
    for (int i = 0; i < NN; i++) begin
      if (!li_valid[i] || li_ready_q[i]) begin
        if (rst_n && txq[i].size() > 0 && ($urandom % 100) < INJ_PCT) begin
          li_valid[i] = 1'b1;
          li_flit[i]  = txq[i][0];
        end else
          li_valid[i] = 1'b0;
      end
      lo_ready[i] = 1'b1;
    end
  end

  always @(posedge clk) begin
    li_ready_q <= '0;
    if (rst_n) begin
      for (int i = 0; i < NN; i++) begin
        if (li_valid[i] && li_ready[i]) begin
          li_ready_q[i] <= 1'b1;
          if (li_flit[i].head) begin
            t_inj[int'(li_flit[i].data[31:16])] = cycle;
            injected[i] = 1'b1;
          end
          void'(txq[i].pop_front());
        end
        if (li_valid[i] && !li_ready[i]) n_inj_stall++;
        if (link_drop[i] != '0) begin
          n_drops++;
          fail($sformatf("flit sent onto a faulty link of router %0d", i));
        end
        if (lo_valid[i] && lo_ready[i]) begin
          flit_t f;
          int key;
          f = lo_flit[i];
          key = int'(f.data[31:16]);
          checks++;
          if (!exp_len.exists(key)) fail($sformatf("unknown packet at tile %0d", i));
          else begin
            if (f.head) begin
              if (cur_idx[i] != 0) fail("head inside a packet");
              if (exp_dst[key] != i) fail($sformatf("packet for %0d delivered to %0d", exp_dst[key], i));
              cur_key[i] = key;
              cur_idx[i] = 0;
            end else if (key != cur_key[i]) fail("interleaved packets at a tile");
            if (int'(f.data[9:6]) != cur_idx[i]) fail("flit order");
            cur_idx[i]++;
            if (f.tail) begin
              if (cur_idx[i] != exp_len[key]) fail("packet length");
              if (got[key]) fail("duplicate packet");
              got[key] = 1'b1;
              recv++;
              lat_sum += cycle - t_inj[key];
              cur_idx[i] = 0;
            end
          end
        end
      end
      for (int r = 0; r < NN; r++) if (ht_en[r] != '0 && link_fault[r] != '0) n_ht++;
    end
  end

  task automatic drain(int max_cycles);
    int quiet, last_recv;
    quiet = 0;
    last_recv = recv;
    for (int t = 0; t < max_cycles; t++) begin
      logic busy;
      busy = 1'b0;
      for (int i = 0; i < NN; i++) if (txq[i].size() > 0 || li_valid[i]) busy = 1'b1;
      if (!busy && recv == sent) break;
      quiet = (recv == last_recv && !busy) ? quiet + 1 : 0;
      last_recv = recv;
      if (quiet > 500) break;
      @(posedge clk);
    end
    repeat (20) @(posedge clk);
    if (recv != sent) n_jam++;
  endtask

  function automatic int lost();
    int n;
    n = 0;
    foreach (exp_len[k]) if (!got[k]) n++;
    return n;
  endfunction

  // Pick nfault interior directed links, at most one per router.
  task automatic place_faults(int nfault, int unsigned seed);
    int placed;
    lcg = seed;
    placed = 0;
    while (placed < nfault) begin
      int r, d, x, y;
      r = int'(rnd(NN));
      d = int'(rnd(4));            // bit index into {N,E,S,W}: 3=N 2=E 1=S 0=W
      x = r % D; y = r / D;
      if (link_fault[r] != '0) continue;
      if ((d == 3 && y == 0) || (d == 2 && x == D - 1) ||
          (d == 1 && y == D - 1) || (d == 0 && x == 0)) continue;
      link_fault[r][d] = 1'b1;
      placed++;
    end
  endtask

  task automatic run(int pattern, int nfault, logic armed);
    string pname;
    int nflagged, nht;
    pname = (pattern == 0) ? "uniform" : (pattern == 1) ? "transpose" : "shuffle";
    rst_n = 0;
    li_valid = '0;
    link_fault = '0;
    ht_en = '0;
    exp_len.delete(); exp_dst.delete(); got.delete(); t_inj.delete();
    for (int i = 0; i < NN; i++) begin
      txq[i].delete(); seqn[i] = 0; cur_key[i] = -1; cur_idx[i] = 0;
    end
    sent = 0; recv = 0; lat_sum = 0; injected = '0;
    place_faults(nfault, 32'h5eed_0000 + 32'(nfault));
    nht = 0;
    if (armed)
      for (int r = 0; r < NN; r++)
        if (link_fault[r] != '0) begin ht_en[r][4] = 1'b1; nht++; end
    lcg = 32'h0bad_0000 + 32'(pattern);
    for (int p = 0; p < PKTS; p++)
      for (int i = 0; i < NN; i++) begin
        int d;
        d = dest_of(pattern, i);
        if (d != i) send_packet(i, d, 1 + int'(rnd(4)));
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    drain(10000);

    nflagged = 0;
    for (int r = 0; r < NN; r++) begin
      checks++;
      if ((warn[r] & ~ht_en[r]) != '0) fail($sformatf("router %0d flagged %b without a Trojan", r, warn[r]));
      nflagged += $countones(warn[r]);
      if (ht_en[r][4] && injected[r]) begin
        checks++;
        if (!warn[r][4]) fail($sformatf("armed Trojan at router %0d not flagged", r));
      end
    end
    n_flag += nflagged;
    checks++;
    if (nfault == 0 && lost() != 0)
      fail($sformatf("%s, fault-free: %0d packets not delivered", pname, lost()));
    $display("%-9s faults=%0d trojans=%0d: sent %0d delivered %0d lost %0d flagged %0d avg latency %0d.%02d cycles",
             pname, nfault, nht, sent, recv, lost(), nflagged,
             (recv > 0) ? lat_sum / recv : 0, (recv > 0) ? (lat_sum * 100 / recv) % 100 : 0);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    li_valid = '0; li_flit = '0; lo_ready = '0; link_fault = '0; ht_en = '0;
    li_ready_q = '0;
    for (int pattern = 0; pattern < 3; pattern++) begin
      run(pattern, 0, 1'b0);
      run(pattern, 11, 1'b0);
      run(pattern, 11, 1'b1);
      run(pattern, 22, 1'b0);
      run(pattern, 22, 1'b1);
    end
    $display("mechanisms: trojan_cycles=%0d au_flags=%0d injection_stall=%0d faulty_link_drops=%0d runs_with_jammed_traffic=%0d",
             n_ht, n_flag, n_inj_stall, n_drops, n_jam);
    checks++; if (n_ht == 0)        fail("no Trojan armed");
    checks++; if (n_flag == 0)      fail("no AU flag raised");
    checks++; if (n_inj_stall == 0) fail("no injection stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
