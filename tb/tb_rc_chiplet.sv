// tb_rc_chiplet: end-to-end test of the Remote Control logic of a 4x4
// chiplet at its default parameters.
//
// Every node's core injects a random mix of intra-chiplet and outbound
// packets (1..8 flits). The chiplet routers are modelled by the testbench:
// intra-chiplet flits are delivered at once, outbound flits travel to the
// boundary router of the node's quadrant and are written into its RC buffer,
// with the packets of different nodes interleaved flit by flit and each node
// using its own router input VC. Below each boundary, an interposer router
// model holds two 4-flit VCs that drain at random and return credits; for a
// stretch of the run the interposer stops draining altogether, the situation
// that would deadlock a chiplet without Remote Control.
//
// Checks: every packet arrives once, whole and in order per source; no
// outbound head is injected without a permission; a boundary never has more
// than 4 outbound packets reserved; the RC buffer absorbs every outbound flit
// the chiplet delivers even while the interposer is stopped; a lone outbound
// request is answered in 2 cycles; each node asks exactly once per outbound
// packet and never for an intra-chiplet one. Each mechanism is counted and must occur:
// waiting for a permission, a full rc_buffer with requests pending, intra
// packets passing without a request, interleaved packets in one RC buffer,
// RCVA waiting for credits, slots released back to the OPIC root.
module tb_rc_chiplet;
  import rc_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  localparam int N  = 16;
  localparam int NB = 4;
  localparam int BND [NB] = '{1, 2, 13, 14};
  localparam int ROOT [N] = '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14};
  localparam logic [CHIPLET_W-1:0] ME = 4'd2;
  localparam int NPKT = 400;           // packets per node

  function automatic int bidx(int n);
    for (int b = 0; b < NB; b++) if (BND[b] == ROOT[n]) return b;
    return -1;
  endfunction
  function automatic int rank(int n);   // router input VC used inside the tree
    int r = 0;
    for (int k = 0; k < n; k++) if (ROOT[k] == ROOT[n]) r++;
    return r;
  endfunction

  logic       core_valid [N];
  flit_t      core_flit  [N];
  logic       core_ready [N];
  logic       inj_valid  [N];
  flit_t      inj_flit   [N];
  logic       inj_ready  [N];
  logic       rcb_valid  [NB];
  flit_t      rcb_flit   [NB];
  logic [3:0] rcb_src    [NB];
  logic       link_valid [NB];
  flit_t      link_flit  [NB];
  logic       link_vc    [NB];
  logic       cr_valid   [NB];
  logic       cr_vc      [NB];

  rc_chiplet dut (
    .clk(clk), .rst_n(rst_n), .my_chiplet_i(ME),
    .core_valid_i(core_valid), .core_flit_i(core_flit), .core_ready_o(core_ready),
    .inj_valid_o(inj_valid), .inj_flit_o(inj_flit), .inj_ready_i(inj_ready),
    .rcb_valid_i(rcb_valid), .rcb_flit_i(rcb_flit), .rcb_src_i(rcb_src),
    .link_valid_o(link_valid), .link_flit_o(link_flit), .link_vc_o(link_vc),
    .credit_valid_i(cr_valid), .credit_vc_i(cr_vc));

  function automatic flit_t mk(int src, int seq, int f, int len, bit outb);
    flit_t fl;
    fl.ftype       = (len == 1) ? FLIT_HEADTAIL : (f == 0) ? FLIT_HEAD
                   : (f == len - 1) ? FLIT_TAIL : FLIT_BODY;
    fl.dst_chiplet = outb ? CHIPLET_W'(3 + (seq % 5)) : ME;
    fl.dst_node    = NODE_W'(len);
    fl.payload     = PAYLOAD_W'({src[7:0], seq[15:0], f[7:0]});
    return fl;
  endfunction

  // ----- bookkeeping ---------------------------------------------------------
  flit_t exp_intra [N][$];   // expected intra flits per source
  flit_t exp_out   [N][$];   // expected outbound flits per source
  flit_t net_q     [N][$];   // outbound flits in the chiplet, on their way to the boundary
  int    gen_done = 0;
  int    n_intra_pkts = 0, n_out_pkts = 0, rx_intra_pkts = 0, rx_out_pkts = 0;
  int    resv [NB];          // outbound packets injected, tail not yet on the link
  int    vc_occ [NB][2];
  int    cr_q [NB][$];
  bit    stop_interposer = 0;
  int    link_cur_src [NB][2];  // source of the packet on each interposer VC

  // mechanism counters
  int m_wait_permit = 0, m_rcb_full = 0, m_intra_free = 0, m_interleave = 0;
  int m_credit_stall = 0, m_release = 0, m_absorb_stopped = 0;
  int n_req [N];              // permission requests per node
  int n_out_node [N];         // outbound packets per node

  // ----- probes into the design, for the mechanism counters ----------------
  logic mon_req     [N];
  logic [CHIPLET_W-1:0] mon_req_dst [N];  // destination chiplet of the requesting packet
  int   mon_pending [NB];   // requests waiting at each OPIC root
  logic mon_stall   [NB];   // RCVA has a flit but no credit
  logic mon_free    [NB];   // RC buffer released a slot
  for (genvar n = 0; n < N; n++) begin : g_mon_n
    assign mon_req[n]     = dut.g_ni[n].u_ni.opic_req_o;
    assign mon_req_dst[n] = dut.g_ni[n].u_ni.head.dst_chiplet;
  end
  for (genvar b = 0; b < NB; b++) begin : g_mon_b
    assign mon_pending[b] = int'(dut.u_opic.g_node[BND[b]].u_opic.reg_q[0])
                          + int'(dut.u_opic.g_node[BND[b]].u_opic.reg_q[1])
                          + int'(dut.u_opic.g_node[BND[b]].u_opic.reg_q[2])
                          + int'(dut.u_opic.g_node[BND[b]].u_opic.reg_q[3]);
    assign mon_stall[b] = dut.g_bnd[b].u_rcva.active_q && dut.g_bnd[b].rd_valid
                       && (dut.g_bnd[b].u_rcva.credits_q[dut.g_bnd[b].u_rcva.vc_q] == 0);
    assign mon_free[b]  = (dut.g_bnd[b].u_rcb.free_o != '0);
  end

  // ----- core traffic ---------------------------------------------------------
  for (genvar n = 0; n < N; n++) begin : g_core
    initial begin
      core_valid[n] = 1'b0;
      core_flit[n]  = '0;
      @(posedge rst_n);
      // node 0 sends one outbound packet alone first (latency check); the
      // others start once it is through
      repeat ((n == 0) ? 30 : 100) @(posedge clk);
      for (int p = 0; p < NPKT; p++) begin
        int len;
        bit outb;
        len  = $urandom_range(1, 8);
        outb = ($urandom_range(0, 9) < 6) || (n == 0 && p == 0);
        for (int f = 0; f < len; f++) begin
          flit_t fl;
          fl = mk(n, p, f, len, outb);
          if (outb) exp_out[n].push_back(fl); else exp_intra[n].push_back(fl);
          @(negedge clk);
          core_valid[n] = 1'b1;
          core_flit[n]  = fl;
          @(posedge clk);
          while (!core_ready[n]) @(posedge clk);
        end
        if (outb) begin n_out_pkts++; n_out_node[n]++; end else n_intra_pkts++;
        @(negedge clk);
        core_valid[n] = 1'b0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
      end
      gen_done++;
    end
  end

  // ----- chiplet network model and interposer model -------------------------
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) inj_ready[n] = ($urandom_range(0, 4) != 0);
    // boundary routers: write one outbound flit per cycle into each RCB
    for (int b = 0; b < NB; b++) begin
      int cands [$];
      cands.delete();
      for (int n = 0; n < N; n++) if (bidx(n) == b && net_q[n].size() > 0) cands.push_back(n);
      rcb_valid[b] = 1'b0;
      if (cands.size() > 0 && $urandom_range(0, 4) != 0) begin
        int n;
        n = cands[$urandom_range(0, cands.size() - 1)];
        rcb_valid[b] = 1'b1;
        rcb_flit[b]  = net_q[n].pop_front();
        rcb_src[b]   = 4'(rank(n));
        if (cands.size() > 1) m_interleave++;
        if (stop_interposer) m_absorb_stopped++;
      end
      // credits back from the interposer router, one per cycle
      cr_valid[b] = 1'b0;
      cr_vc[b]    = 1'b0;
      if (cr_q[b].size() > 0) begin
        cr_valid[b] = 1'b1;
        cr_vc[b]    = 1'(cr_q[b].pop_front());
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      if (mon_req[n]) begin
        m_wait_permit++;
        n_req[n]++;
        check(mon_req_dst[n] != ME, "permission requested for an intra-chiplet packet");
      end
      if (inj_valid[n] && inj_ready[n]) begin
        flit_t fl;
        fl = inj_flit[n];
        if (fl.dst_chiplet == ME) begin
          check(exp_intra[n].size() > 0 && fl == exp_intra[n][0], "intra flit order/content");
          void'(exp_intra[n].pop_front());
          if (is_head(fl)) m_intra_free++;
          if (is_tail(fl)) rx_intra_pkts++;
        end else begin
          net_q[n].push_back(fl);
          if (is_head(fl)) begin
            resv[bidx(n)]++;
            check(resv[bidx(n)] <= 4, "more than 4 outbound packets reserved at a boundary");
          end
        end
      end
    end
    for (int b = 0; b < NB; b++) begin
      // interposer VCs drain unless stopped
      for (int v = 0; v < 2; v++)
        if (!stop_interposer && vc_occ[b][v] > 0 && $urandom_range(0, 2) == 0) begin
          vc_occ[b][v]--;
          cr_q[b].push_back(v);
        end
      if (resv[b] == 4 && mon_pending[b] > 0) m_rcb_full++;
      if (mon_stall[b]) m_credit_stall++;
      if (mon_free[b])  m_release++;
      if (link_valid[b]) begin
        flit_t fl;
        int v, s;
        fl = link_flit[b];
        v  = int'(link_vc[b]);
        s  = int'(fl.payload[31:24]);
        vc_occ[b][v]++;
        check(vc_occ[b][v] <= 4, "interposer VC overflow");
        check(s < N && bidx(s) == b, "outbound packet left through the wrong boundary");
        if (s < N) begin
          check(exp_out[s].size() > 0 && fl == exp_out[s][0],
                $sformatf("outbound flit order/content, source %0d", s));
          void'(exp_out[s].pop_front());
        end
        if (is_tail(fl)) begin
          resv[b]--;
          rx_out_pkts++;
        end
      end
    end
  end

  // ----- directed latency check, then run ------------------------------------
  int t_req;
  initial begin
    rst_n = 1'b0;
    foreach (inj_ready[n]) inj_ready[n] = 1'b0;
    foreach (rcb_valid[b]) begin rcb_valid[b] = 1'b0; rcb_flit[b] = '0; rcb_src[b] = '0; end
    foreach (cr_valid[b])  begin cr_valid[b] = 1'b0; cr_vc[b] = 1'b0; end
    foreach (n_req[n]) begin n_req[n] = 0; n_out_node[n] = 0; end
    foreach (resv[b]) begin resv[b] = 0; vc_occ[b][0] = 0; vc_occ[b][1] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // The first request of node 0 (a non-boundary node) is answered in 2 cycles.
    @(posedge clk iff dut.g_ni[0].u_ni.opic_req_o);
    t_req = $time;
    @(posedge clk iff dut.g_ni[0].u_ni.opic_grant_i);
    check(($time - t_req) / 10 == 2, $sformatf("node 0 permission after %0d cycles, expected 2",
                                               ($time - t_req) / 10));

    // Stop the interposer for a while once traffic is flowing.
    repeat (1500) @(posedge clk);
    stop_interposer = 1;
    repeat (400) @(posedge clk);
    // Every outbound flit the chiplet delivered to a boundary has been taken
    // by its RC buffer: the chiplet network holds no outbound flit any more.
    begin
      int left;
      left = 0;
      for (int n = 0; n < N; n++) left += net_q[n].size();
      check(left == 0, $sformatf("%0d outbound flits stuck in the chiplet while the interposer is stopped", left));
      for (int b = 0; b < NB; b++)
        check(resv[b] <= 4, "reservation bound while stopped");
    end
    stop_interposer = 0;

    wait (gen_done == N);
    wait (rx_intra_pkts == n_intra_pkts && rx_out_pkts == n_out_pkts);
    repeat (20) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      check(exp_intra[n].size() == 0 && exp_out[n].size() == 0, $sformatf("node %0d lost flits", n));
      check(n_req[n] == n_out_node[n], $sformatf("node %0d: %0d requests for %0d outbound packets",
                                                 n, n_req[n], n_out_node[n]));
    end

    $display("mechanisms: permission requests=%0d  rc_buffer full with waiters=%0d cycles  intra packets unchecked=%0d",
             m_wait_permit, m_rcb_full, m_intra_free);
    $display("            interleaved RCB writes=%0d  RCVA credit stalls=%0d  slot releases=%0d  RCB writes while interposer stopped=%0d",
             m_interleave, m_credit_stall, m_release, m_absorb_stopped);
    $display("packets: %0d intra, %0d outbound", rx_intra_pkts, rx_out_pkts);
    check(m_wait_permit > 0,    "mechanism: outbound packet waited for a permission");
    check(m_rcb_full > 0,       "mechanism: rc_buffer fully reserved with requests waiting");
    check(m_intra_free > 0,     "mechanism: intra-chiplet packet injected without check");
    check(m_interleave > 0,     "mechanism: packets interleaved into one RC buffer");
    check(m_credit_stall > 0,   "mechanism: RCVA waited for interposer credits");
    check(m_release == n_out_pkts, "mechanism: every RC buffer slot released once");
    check(m_absorb_stopped > 0, "mechanism: RC buffer absorbed packets with the interposer stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
