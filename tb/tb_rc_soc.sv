// tb_rc_soc: end-to-end test of the Remote Control logic of the whole SoC
// (four 4x4 GPU chiplets and one 2x2 CPU chiplet, 68 nodes, 20 boundary
// routers) at its default parameters.
//
// Every node's core injects a random mix of packets (1..8 flits) to its own
// chiplet and to the other four chiplets. The chiplet routers are modelled by
// the testbench: intra-chiplet flits are delivered at once; an outbound flit
// travels to the boundary router of its node's OPIC tree and is written into
// that boundary's RC buffer, interleaved flit by flit with other nodes'
// packets, each node on its own router input VC. Below each boundary an
// interposer router model holds two 4-flit VCs that drain at random and send
// credits back; for a stretch of the run the whole interposer stops.
//
// Checks: every packet arrives once, whole and in order per source, intra
// packets at their injection port and outbound packets on the link of their
// own boundary; outbound heads are injected only with a permission, and each
// node asks exactly once per outbound packet and never for an intra packet;
// no boundary has more than 4 packets reserved; no interposer VC overflows;
// while the interposer is stopped every outbound flit is taken off the
// chiplet networks; a lone request is granted in 2 cycles in a GPU chiplet
// and in 1 cycle in the CPU chiplet, where each node is its own boundary.
// Each mechanism is counted and must occur at least once.
module tb_rc_soc;
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

  localparam int NG   = 4;              // GPU chiplets
  localparam int NCH  = NG + 1;         // chiplets
  localparam int N    = NG * 16 + 4;    // nodes
  localparam int NB   = NCH * 4;        // boundary routers
  localparam int NPKT = 200;            // packets per node
  localparam int GROOT [16] = '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14};
  localparam int GBND  [4]  = '{1, 2, 13, 14};

  // node numbering: see rc_soc
  function automatic int chip_of(int g);  return (g < NG * 16) ? g / 16 : NG;          endfunction
  function automatic int local_of(int g); return (g < NG * 16) ? g % 16 : g - NG * 16; endfunction
  // global boundary port of a node's OPIC root
  function automatic int bidx(int g);
    int c, l;
    c = chip_of(g);
    l = local_of(g);
    if (c == NG) return NG * 4 + l;
    for (int b = 0; b < 4; b++) if (GBND[b] == GROOT[l]) return c * 4 + b;
    return -1;
  endfunction
  // router input VC a node's packets use at its boundary
  function automatic int rank(int g);
    int r = 0;
    for (int k = 0; k < g; k++) if (bidx(k) == bidx(g)) r++;
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

  rc_soc dut (
    .clk(clk), .rst_n(rst_n),
    .core_valid_i(core_valid), .core_flit_i(core_flit), .core_ready_o(core_ready),
    .inj_valid_o(inj_valid), .inj_flit_o(inj_flit), .inj_ready_i(inj_ready),
    .rcb_valid_i(rcb_valid), .rcb_flit_i(rcb_flit), .rcb_src_i(rcb_src),
    .link_valid_o(link_valid), .link_flit_o(link_flit), .link_vc_o(link_vc),
    .credit_valid_i(cr_valid), .credit_vc_i(cr_vc));

  function automatic flit_t mk(int src, int seq, int f, int len, int dst_chip);
    flit_t fl;
    fl.ftype       = (len == 1) ? FLIT_HEADTAIL : (f == 0) ? FLIT_HEAD
                   : (f == len - 1) ? FLIT_TAIL : FLIT_BODY;
    fl.dst_chiplet = CHIPLET_W'(dst_chip);
    fl.dst_node    = NODE_W'(len);
    fl.payload     = PAYLOAD_W'({src[7:0], seq[15:0], f[7:0]});
    return fl;
  endfunction

  // ----- bookkeeping ---------------------------------------------------------
  flit_t exp_intra [N][$];
  flit_t exp_out   [N][$];
  flit_t net_q     [N][$];   // outbound flits on their way to the boundary
  int    gen_done = 0;
  int    n_intra_pkts = 0, n_out_pkts = 0, rx_intra_pkts = 0, rx_out_pkts = 0;
  int    resv [NB];
  int    vc_occ [NB][2];
  int    cr_q [NB][$];
  bit    stop_interposer = 0;
  int    n_req [N], n_out_node [N];
  int    rx_per_chip [NCH];  // outbound packets received by each destination chiplet

  int m_wait_permit = 0, m_rcb_full = 0, m_intra_free = 0, m_interleave = 0;
  int m_credit_stall = 0, m_release = 0, m_absorb_stopped = 0, m_cpu_self = 0;

  // ----- probes ----------------------------------------------------------------
  logic                 mon_req     [N];
  logic [CHIPLET_W-1:0] mon_req_dst [N];
  int                   mon_pending [NB];
  logic                 mon_stall   [NB];
  logic                 mon_free    [NB];
  for (genvar c = 0; c < NG; c++) begin : g_mon_gpu
    for (genvar n = 0; n < 16; n++) begin : g_n
      assign mon_req[c * 16 + n]     = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.opic_req_o;
      assign mon_req_dst[c * 16 + n] = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.head.dst_chiplet;
    end
    for (genvar b = 0; b < 4; b++) begin : g_b
      assign mon_pending[c * 4 + b] =
          int'(dut.g_chiplet[c].g_gpu.u_chiplet.u_opic.g_node[GBND[b]].u_opic.reg_q[0])
        + int'(dut.g_chiplet[c].g_gpu.u_chiplet.u_opic.g_node[GBND[b]].u_opic.reg_q[1])
        + int'(dut.g_chiplet[c].g_gpu.u_chiplet.u_opic.g_node[GBND[b]].u_opic.reg_q[2])
        + int'(dut.g_chiplet[c].g_gpu.u_chiplet.u_opic.g_node[GBND[b]].u_opic.reg_q[3]);
      assign mon_stall[c * 4 + b] =
          dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.active_q
       && dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].rd_valid
       && (dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.credits_q[
             dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.vc_q] == 0);
      assign mon_free[c * 4 + b] = (dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcb.free_o != '0);
    end
  end
  for (genvar n = 0; n < 4; n++) begin : g_mon_cpu
    assign mon_req[NG * 16 + n]     = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.opic_req_o;
    assign mon_req_dst[NG * 16 + n] = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.head.dst_chiplet;
    assign mon_pending[NG * 4 + n]  = int'(dut.g_chiplet[NG].g_cpu.u_chiplet.u_opic.g_node[n].u_opic.reg_q[0]);
    assign mon_stall[NG * 4 + n] =
        dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[n].u_rcva.active_q
     && dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[n].rd_valid
     && (dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[n].u_rcva.credits_q[
           dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[n].u_rcva.vc_q] == 0);
    assign mon_free[NG * 4 + n] = (dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[n].u_rcb.free_o != '0);
  end

  // ----- core traffic ------------------------------------------------------------
  for (genvar g = 0; g < N; g++) begin : g_core
    initial begin
      core_valid[g] = 1'b0;
      core_flit[g]  = '0;
      @(posedge rst_n);
      // GPU node 0 and CPU node 0 first send one outbound packet alone
      // (latency checks); the others start once those are through
      repeat ((g == 0 || g == NG * 16) ? 30 : 100) @(posedge clk);
      for (int p = 0; p < NPKT; p++) begin
        int len, dc;
        bit outb;
        len  = $urandom_range(1, 8);
        outb = ($urandom_range(0, 9) < 6) || p == 0;
        dc   = chip_of(g);
        if (outb) dc = (chip_of(g) + $urandom_range(1, NCH - 1)) % NCH;
        for (int f = 0; f < len; f++) begin
          flit_t fl;
          fl = mk(g, p, f, len, dc);
          if (outb) exp_out[g].push_back(fl); else exp_intra[g].push_back(fl);
          @(negedge clk);
          core_valid[g] = 1'b1;
          core_flit[g]  = fl;
          @(posedge clk);
          while (!core_ready[g]) @(posedge clk);
        end
        if (outb) begin n_out_pkts++; n_out_node[g]++; end else n_intra_pkts++;
        @(negedge clk);
        core_valid[g] = 1'b0;
        repeat ($urandom_range(0, 8)) @(negedge clk);
      end
      gen_done++;
    end
  end

  // ----- chiplet network and interposer models ------------------------------------
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) inj_ready[g] = ($urandom_range(0, 4) != 0);
    for (int b = 0; b < NB; b++) begin
      int cands [$];
      cands.delete();
      for (int g = 0; g < N; g++) if (bidx(g) == b && net_q[g].size() > 0) cands.push_back(g);
      rcb_valid[b] = 1'b0;
      if (cands.size() > 0 && $urandom_range(0, 4) != 0) begin
        int g;
        g = cands[$urandom_range(0, cands.size() - 1)];
        rcb_valid[b] = 1'b1;
        rcb_flit[b]  = net_q[g].pop_front();
        rcb_src[b]   = 4'(rank(g));
        if (cands.size() > 1) m_interleave++;
        if (stop_interposer) m_absorb_stopped++;
      end
      cr_valid[b] = 1'b0;
      cr_vc[b]    = 1'b0;
      if (cr_q[b].size() > 0) begin
        cr_valid[b] = 1'b1;
        cr_vc[b]    = 1'(cr_q[b].pop_front());
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      if (mon_req[g]) begin
        m_wait_permit++;
        n_req[g]++;
        if (chip_of(g) == NG) m_cpu_self++;
        check(mon_req_dst[g] != CHIPLET_W'(chip_of(g)), "permission requested for an intra-chiplet packet");
      end
      if (inj_valid[g] && inj_ready[g]) begin
        flit_t fl;
        fl = inj_flit[g];
        if (int'(fl.dst_chiplet) == chip_of(g)) begin
          check(exp_intra[g].size() > 0 && fl == exp_intra[g][0], "intra flit order/content");
          void'(exp_intra[g].pop_front());
          if (is_head(fl)) m_intra_free++;
          if (is_tail(fl)) rx_intra_pkts++;
        end else begin
          net_q[g].push_back(fl);
          if (is_head(fl)) begin
            resv[bidx(g)]++;
            check(resv[bidx(g)] <= 4, "more than 4 outbound packets reserved at a boundary");
          end
        end
      end
    end
    for (int b = 0; b < NB; b++) begin
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
          if (int'(fl.dst_chiplet) < NCH) rx_per_chip[fl.dst_chiplet]++;
        end
      end
    end
  end

  // ----- directed latency checks, then the run ------------------------------------
  initial begin
    int t_gpu, t_cpu;
    fork
      begin
        @(posedge clk iff (rst_n && dut.g_chiplet[0].g_gpu.u_chiplet.g_ni[0].u_ni.opic_req_o));
        t_gpu = int'($time);
        @(posedge clk iff dut.g_chiplet[0].g_gpu.u_chiplet.g_ni[0].u_ni.opic_grant_i);
        check((int'($time) - t_gpu) / 10 == 2,
              $sformatf("GPU node 0 permission after %0d cycles, expected 2", (int'($time) - t_gpu) / 10));
      end
      begin
        @(posedge clk iff (rst_n && dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[0].u_ni.opic_req_o));
        t_cpu = int'($time);
        @(posedge clk iff dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[0].u_ni.opic_grant_i);
        check((int'($time) - t_cpu) / 10 == 1,
              $sformatf("CPU node 0 permission after %0d cycles, expected 1", (int'($time) - t_cpu) / 10));
      end
    join
  end

  initial begin
    rst_n = 1'b0;
    foreach (inj_ready[g]) inj_ready[g] = 1'b0;
    foreach (rcb_valid[b]) begin rcb_valid[b] = 1'b0; rcb_flit[b] = '0; rcb_src[b] = '0; end
    foreach (cr_valid[b])  begin cr_valid[b] = 1'b0; cr_vc[b] = 1'b0; end
    foreach (resv[b]) begin resv[b] = 0; vc_occ[b][0] = 0; vc_occ[b][1] = 0; end
    foreach (n_req[g]) begin n_req[g] = 0; n_out_node[g] = 0; end
    foreach (rx_per_chip[c]) rx_per_chip[c] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    repeat (1200) @(posedge clk);
    stop_interposer = 1;
    repeat (400) @(posedge clk);
    begin
      int left;
      left = 0;
      for (int g = 0; g < N; g++) left += net_q[g].size();
      check(left == 0, $sformatf("%0d outbound flits stuck in the chiplets while the interposer is stopped", left));
    end
    stop_interposer = 0;

    wait (gen_done == N);
    wait (rx_intra_pkts == n_intra_pkts && rx_out_pkts == n_out_pkts);
    repeat (20) @(posedge clk);
    for (int g = 0; g < N; g++) begin
      check(exp_intra[g].size() == 0 && exp_out[g].size() == 0, $sformatf("node %0d lost flits", g));
      check(n_req[g] == n_out_node[g], $sformatf("node %0d: %0d requests for %0d outbound packets",
                                                 g, n_req[g], n_out_node[g]));
    end
    for (int c = 0; c < NCH; c++)
      check(rx_per_chip[c] > 0, $sformatf("no packet sent towards chiplet %0d", c));

    $display("mechanisms: permission requests=%0d (CPU chiplet, own boundary=%0d)  rc_buffer full with waiters=%0d cycles",
             m_wait_permit, m_cpu_self, m_rcb_full);
    $display("            intra packets unchecked=%0d  interleaved RCB writes=%0d  RCVA credit stalls=%0d",
             m_intra_free, m_interleave, m_credit_stall);
    $display("            slot releases=%0d  RCB writes while interposer stopped=%0d",
             m_release, m_absorb_stopped);
    $display("packets: %0d intra, %0d outbound", rx_intra_pkts, rx_out_pkts);
    check(m_wait_permit > 0,    "mechanism: outbound packet waited for a permission");
    check(m_cpu_self > 0,       "mechanism: boundary node reserved in its own rc_buffer");
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
