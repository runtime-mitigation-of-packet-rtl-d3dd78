// tb_sefar_mesh: end-to-end test of the 8x8 SeFaR mesh at its default sizes
// (every parameter at its default).
//
// Phase 1, fault-free: uniform random traffic, every tile sends packets of
//   1..4 flits to random destinations.
// Phase 2, the east link of router 27 (x=3, y=3) is permanently faulty, no
//   Trojan active: uniform traffic plus packets along row 3 that must detour
//   around the broken link. Nothing may be lost.
// Phase 3, the Trojan at the north input of router 27 is switched on. Tiles
//   (3,0..2) send to (3,4..7), so their packets enter router 27 from the
//   north and are forced towards the broken east link. The AU of router 27
//   must raise F for that port, its CU must move the port to another buffer,
//   no flit may ever enter a faulty link, and at most NUM_VC packets (those
//   stranded in the flagged buffer) may be lost.
// Each tile checks that received packets are addressed to it, complete and
// in flit order.
module tb_sefar_mesh;
  import sefar_pkg::*;

  localparam int D  = 8;
  localparam int NN = D * D;
  localparam int HR = 3 * D + 3;     // router under attack

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
    if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
  endtask

  flit_t txq [NN][$];
  int    seqn [NN];
  int    exp_len [int];
  int    exp_dst [int];
  logic  got [int];
  int    sent = 0, recv = 0;
  int    cur_key [NN];
  int    cur_idx [NN];
  int    inj_pct = 30;

  int n_detour = 0, n_ht = 0, n_cu_step = 0, n_redirect = 0, n_inj_stall = 0;
  int n_drops = 0;

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

  logic [NN-1:0] li_ready_q;

  always @(negedge clk) begin
    cycle++;
    for (int i = 0; i < NN; i++) begin
      if (!li_valid[i] || li_ready_q[i]) begin
        if (txq[i].size() > 0 && ($urandom % 100) < inj_pct) begin
          li_valid[i] = 1'b1;
          li_flit[i]  = txq[i][0];
        end else
          li_valid[i] = 1'b0;
      end
      lo_ready[i] = ($urandom % 100) < 90;
    end
  end

  port_idx_t z_prev;
  always @(posedge clk) begin
    li_ready_q <= '0;
    if (rst_n) begin
      for (int i = 0; i < NN; i++) begin
        if (li_valid[i] && li_ready[i]) begin
          li_ready_q[i] <= 1'b1;
          void'(txq[i].pop_front());
        end
        if (li_valid[i] && !li_ready[i]) n_inj_stall++;
        if (link_drop[i] != '0) n_drops++;
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
              cur_idx[i] = 0;
            end
          end
        end
      end
      // Router 27 observation
      if (dut.g_y[3].g_x[3].u_router.ht_active[0]) n_ht++;
      if (dut.g_y[3].g_x[3].u_router.cu_state[0] != z_prev) n_cu_step++;
      z_prev <= dut.g_y[3].g_x[3].u_router.cu_state[0];
      if (dut.g_y[3].g_x[3].u_router.cu_state[0] != 3'b001 &&
          dut.g_y[3].g_x[3].u_router.in_valid[0] && dut.g_y[3].g_x[3].u_router.in_ready[0])
        n_redirect++;
      for (int o = 0; o < 4; o++) begin
        flit_t hf;
        hf = dut.g_y[3].g_x[3].u_router.out_flit[o];
        if (link_fault[HR][2] && dut.g_y[3].g_x[3].u_router.out_valid[o] &&
            dut.g_y[3].g_x[3].u_router.out_ready[o] && hf.head &&
            int'(hf.data[5:3]) == 3 && int'(hf.data[2:0]) > 3 && (o == 0 || o == 2))
          n_detour++;
      end
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
      if (quiet > 500) break;        // the rest is not coming
      @(posedge clk);
    end
    repeat (50) @(posedge clk);
  endtask

  function automatic int lost();
    int n;
    n = 0;
    foreach (exp_len[k]) if (!got[k]) n++;
    return n;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    li_valid = '0; li_flit = '0; lo_ready = '0; link_fault = '0; ht_en = '0;
    li_ready_q = '0; z_prev = 3'b001;
    for (int i = 0; i < NN; i++) begin seqn[i] = 0; cur_key[i] = -1; cur_idx[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Phase 1
    for (int p = 0; p < 6; p++)
      for (int i = 0; i < NN; i++) send_packet(i, $urandom % NN, 1 + $urandom % 4);
    drain(30000);
    checks++;
    if (lost() != 0) fail($sformatf("phase 1: %0d packets not delivered", lost()));
    $display("phase 1: sent %0d delivered %0d (cycle %0d)", sent, recv, cycle);

    // Phase 2: east link of router 27 broken
    link_fault[HR][2] = 1'b1;
    repeat (2) @(posedge clk);
    for (int p = 0; p < 4; p++) begin
      for (int i = 0; i < NN; i++) send_packet(i, $urandom % NN, 1 + $urandom % 4);
      for (int x = 0; x < 3; x++) send_packet(3 * D + x, 3 * D + 4 + $urandom % 4, 1 + $urandom % 4);
    end
    drain(30000);
    checks++;
    if (lost() != 0) fail($sformatf("phase 2: %0d packets not delivered", lost()));
    checks++;
    if (warn != '0) fail("warning raised without an active Trojan");
    $display("phase 2: sent %0d delivered %0d (cycle %0d)", sent, recv, cycle);

    // Phase 3: Trojan at the north input of router 27
    ht_en[HR][0] = 1'b1;
    for (int p = 0; p < 8; p++) begin
      for (int y = 0; y < 3; y++) send_packet(y * D + 3, (4 + $urandom % 4) * D + 3, 1 + $urandom % 4);
      if (p < 3) for (int i = 0; i < NN; i++) send_packet(i, $urandom % NN, 1 + $urandom % 4);
    end
    drain(30000);
    $display("phase 3: sent %0d delivered %0d lost %0d (cycle %0d)", sent, recv, lost(), cycle);
    checks++;
    if (lost() < 1 || lost() > 2) fail($sformatf("phase 3: %0d packets lost, expected 1..2", lost()));
    checks++;
    for (int r = 0; r < NN; r++)
      if (warn[r] != ((r == HR) ? 5'b00001 : 5'b00000)) fail($sformatf("router %0d warn %b", r, warn[r]));
    checks++;
    if (dut.g_y[3].g_x[3].u_router.cu_state[0] == 3'b001) fail("CU of router 27 north port did not move");

    $display("mechanisms: detour=%0d ht_trigger=%0d cu_step=%0d redirected_flits=%0d injection_stall=%0d faulty_link_drops=%0d",
             n_detour, n_ht, n_cu_step, n_redirect, n_inj_stall, n_drops);
    checks++; if (n_drops != 0)    fail("a flit was sent onto a faulty link");
    checks++; if (n_detour == 0)   fail("no detour around the faulty link");
    checks++; if (n_ht == 0)       fail("Trojan never triggered");
    checks++; if (n_cu_step == 0)  fail("CU never stepped");
    checks++; if (n_redirect == 0) fail("no flit redirected");
    checks++; if (n_inj_stall == 0) fail("no injection stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
