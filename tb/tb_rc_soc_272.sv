// tb_rc_soc_272: end-to-end test of the Remote Control logic of the 272-node
// SoC of 8x8 chiplets: four 8x8 GPU chiplets and one 4x4 CPU chiplet, each
// with four boundary routers (20 in all), built from rc_soc with
// GPU_DIM = 8, CPU_DIM = 4 and NUM_SRC = 16 (the model below tags every
// source node of a boundary with its own input number; the router itself has
// 10 input VCs). Every GPU boundary serves a quadrant through a three-level
// OPIC tree, the CPU boundaries serve 2x2 quadrants directly.
//
// Traffic, models and checks are those of tb_rc_soc: every packet arrives
// once, whole and in order; no outbound injection without a permission and
// exactly one request per outbound packet; at most 4 packets reserved per
// boundary; the RC buffers absorb all outbound flits while the interposer is
// stopped; every mechanism occurs. Directed latency checks: an 8x8 node at
// depth 3 (node 24), depth 2 (node 8) and depth 1 (node 0) gets its
// permission after 6, 4 and 2 cycles, a 4x4 CPU node after 2 cycles.
module tb_rc_soc_272;
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
  localparam int GN   = 64;             // nodes per GPU chiplet
  localparam int CN   = 16;             // nodes of the CPU chiplet
  localparam int NCH  = NG + 1;         // chiplets
  localparam int N    = NG * GN + CN;   // nodes
  localparam int NB   = NCH * 4;        // boundary routers
  localparam int NPKT = 60;             // packets per node
  localparam int CROOT [16] = '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14};
  localparam int CBND  [4]  = '{1, 2, 13, 14};
  localparam int GBND  [4]  = '{2, 5, 58, 61};

  // OPIC root of a node of an 8x8 chiplet: the boundary of its quadrant
  function automatic int groot(int l);
    return ((l / 8 < 4) ? 0 : 7) * 8 + ((l % 8 < 4) ? 2 : 5);
  endfunction

  // node numbering: see rc_soc
  function automatic int chip_of(int g);  return (g < NG * GN) ? g / GN : NG;          endfunction
  function automatic int local_of(int g); return (g < NG * GN) ? g % GN : g - NG * GN; endfunction
  // global boundary port of a node's OPIC root
  function automatic int bidx(int g);
    int c, l;
    c = chip_of(g);
    l = local_of(g);
    if (c == NG) begin
      for (int b = 0; b < 4; b++) if (CBND[b] == CROOT[l]) return NG * 4 + b;
    end else begin
      for (int b = 0; b < 4; b++) if (GBND[b] == groot(l)) return c * 4 + b;
    end
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

  rc_soc #(.NUM_GPU(NG), .GPU_DIM(8), .CPU_DIM(4), .NUM_SRC(16)) dut (
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
    fl.payload     = PAYLOAD_W'({src[11:0], seq[15:0], f[7:0]});
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
  logic                 mon_wait    [N];   // request raised, permission not yet in
  logic                 mon_grant   [N];
  logic                 mon_stall   [NB];
  logic                 mon_free    [NB];
  bit                   waiting     [NB];
  for (genvar c = 0; c < NG; c++) begin : g_mon_gpu
    for (genvar n = 0; n < GN; n++) begin : g_n
      assign mon_req[c * GN + n]     = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.opic_req_o;
      assign mon_req_dst[c * GN + n] = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.head.dst_chiplet;
      assign mon_wait[c * GN + n]    = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.req_sent_q;
      assign mon_grant[c * GN + n]   = dut.g_chiplet[c].g_gpu.u_chiplet.g_ni[n].u_ni.opic_grant_i;
    end
    for (genvar b = 0; b < 4; b++) begin : g_b
      assign mon_stall[c * 4 + b] =
          dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.active_q
       && dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].rd_valid
       && (dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.credits_q[
             dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcva.vc_q] == 0);
      assign mon_free[c * 4 + b] = (dut.g_chiplet[c].g_gpu.u_chiplet.g_bnd[b].u_rcb.free_o != '0);
    end
  end
  for (genvar n = 0; n < CN; n++) begin : g_mon_cpu
    assign mon_req[NG * GN + n]     = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.opic_req_o;
    assign mon_req_dst[NG * GN + n] = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.head.dst_chiplet;
    assign mon_wait[NG * GN + n]    = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.req_sent_q;
    assign mon_grant[NG * GN + n]   = dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[n].u_ni.opic_grant_i;
  end
  for (genvar b = 0; b < 4; b++) begin : g_mon_cpu_b
    assign mon_stall[NG * 4 + b] =
        dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[b].u_rcva.active_q
     && dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[b].rd_valid
     && (dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[b].u_rcva.credits_q[
           dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[b].u_rcva.vc_q] == 0);
    assign mon_free[NG * 4 + b] = (dut.g_chiplet[NG].g_cpu.u_chiplet.g_bnd[b].u_rcb.free_o != '0);
  end
  always_comb begin
    foreach (waiting[b]) waiting[b] = 0;
    for (int g = 0; g < N; g++) if (mon_wait[g]) waiting[bidx(g)] = 1;
  end

  // ----- core traffic ------------------------------------------------------------
  for (genvar g = 0; g < N; g++) begin : g_core
    initial begin
      core_valid[g] = 1'b0;
      core_flit[g]  = '0;
      @(posedge rst_n);
      // GPU nodes 24, 8, 0 and CPU node 0 first send one outbound packet
      // each, alone on their tree paths (latency checks); the others start
      // once those are through
      repeat ((g == 24 || g == NG * GN) ? 30 : (g == 8) ? 60 : (g == 0) ? 90 : 130) @(posedge clk);
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
      if (resv[b] == 4 && waiting[b]) m_rcb_full++;
      if (mon_stall[b]) m_credit_stall++;
      if (mon_free[b])  m_release++;
      if (link_valid[b]) begin
        flit_t fl;
        int v, s;
        fl = link_flit[b];
        v  = int'(link_vc[b]);
        s  = int'(fl.payload[35:24]);
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
  task automatic lat_gpu(int l, int exp);
    int t;
    @(posedge clk iff (rst_n && mon_req[l]));
    t = int'($time);
    @(posedge clk iff mon_grant[l]);
    check((int'($time) - t) / 10 == exp,
          $sformatf("GPU node %0d permission after %0d cycles, expected %0d", l, (int'($time) - t) / 10, exp));
  endtask
  initial begin
    int t_cpu;
    fork
      lat_gpu(24, 6);
      lat_gpu(8, 4);
      lat_gpu(0, 2);
      begin
        @(posedge clk iff (rst_n && dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[0].u_ni.opic_req_o));
        t_cpu = int'($time);
        @(posedge clk iff dut.g_chiplet[NG].g_cpu.u_chiplet.g_ni[0].u_ni.opic_grant_i);
        check((int'($time) - t_cpu) / 10 == 2,
              $sformatf("CPU node 0 permission after %0d cycles, expected 2", (int'($time) - t_cpu) / 10));
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

    $display("mechanisms: permission requests=%0d (CPU chiplet=%0d)  rc_buffer full with waiters=%0d cycles",
             m_wait_permit, m_cpu_self, m_rcb_full);
    $display("            intra packets unchecked=%0d  interleaved RCB writes=%0d  RCVA credit stalls=%0d",
             m_intra_free, m_interleave, m_credit_stall);
    $display("            slot releases=%0d  RCB writes while interposer stopped=%0d",
             m_release, m_absorb_stopped);
    $display("packets: %0d intra, %0d outbound", rx_intra_pkts, rx_out_pkts);
    check(m_wait_permit > 0,    "mechanism: outbound packet waited for a permission");
    check(m_cpu_self > 0,       "mechanism: CPU chiplet node reserved a slot");
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
