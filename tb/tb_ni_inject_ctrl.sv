// tb_ni_inject_ctrl: self-checking test of the NI injection control.
//
// The core side pushes a random mix of intra-chiplet and outbound packets of
// 1..8 flits. A model of the local OPIC block answers each request pulse with
// a permission pulse after a random delay; the router side is ready at
// random. Checks: flits leave in the order they came; an intra-chiplet
// packet never asks for permission and an outbound one asks exactly once;
// no outbound head leaves before its permission, and with the router ready it
// leaves in the very cycle the permission arrives; packets queued behind a
// waiting outbound packet wait too (first-in first-out).
module tb_ni_inject_ctrl;
  import rc_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  localparam logic [CHIPLET_W-1:0] ME = 4'd3;

  logic  core_valid, core_ready, inj_valid, inj_ready, opic_req, opic_grant;
  flit_t core_flit, inj_flit;

  ni_inject_ctrl dut (
    .clk(clk), .rst_n(rst_n), .my_chiplet_i(ME),
    .core_valid_i(core_valid), .core_flit_i(core_flit), .core_ready_o(core_ready),
    .inj_valid_o(inj_valid), .inj_flit_o(inj_flit), .inj_ready_i(inj_ready),
    .opic_req_o(opic_req), .opic_grant_i(opic_grant));

  flit_t sent_q [$];   // flits pushed, in order
  int    n_out_pkts = 0, n_in_pkts = 0, n_reqs = 0, n_grants = 0, n_flits_out = 0;
  int    grant_timer = -1;
  bit    permit_avail = 0;     // a permission handed out, not yet used
  bit    waited_behind = 0;    // saw an intra packet wait behind an outbound one
  bit    same_cycle = 0;       // saw a head leave in its grant cycle
  localparam int NPKT = 300;

  // Core side: generate packets.
  initial begin
    core_valid = 1'b0;
    core_flit  = '0;
    @(posedge rst_n);
    for (int p = 0; p < NPKT; p++) begin
      int len;
      bit outb;
      len  = $urandom_range(1, 8);
      outb = $urandom_range(0, 1);
      if (outb) n_out_pkts++; else n_in_pkts++;
      for (int f = 0; f < len; f++) begin
        flit_t fl;
        fl.ftype       = (len == 1) ? FLIT_HEADTAIL : (f == 0) ? FLIT_HEAD
                       : (f == len - 1) ? FLIT_TAIL : FLIT_BODY;
        fl.dst_chiplet = outb ? CHIPLET_W'($urandom_range(4, 7)) : ME;
        fl.dst_node    = NODE_W'($urandom_range(0, 15));
        fl.payload     = PAYLOAD_W'({p[15:0], f[7:0]});
        @(negedge clk);
        core_valid = 1'b1;
        core_flit  = fl;
        @(posedge clk);
        while (!core_ready) @(posedge clk);
        sent_q.push_back(fl);
      end
      @(negedge clk);
      core_valid = 1'b0;
    end
  end

  // OPIC model and router side, evaluated just before each clock edge.
  always @(negedge clk) begin
    if (rst_n) begin
      inj_ready  = ($urandom_range(0, 3) != 0);
      opic_grant = 1'b0;
      if (grant_timer == 0) begin
        opic_grant  = 1'b1;
        grant_timer = -1;
      end else if (grant_timer > 0) grant_timer--;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (opic_req) begin
      n_reqs++;
      check(grant_timer < 0, "second request while one is pending");
      grant_timer = $urandom_range(0, 6);
    end
    if (opic_grant) begin
      n_grants++;
      permit_avail = 1;
    end
    if (inj_valid && inj_ready) begin
      flit_t exp;
      n_flits_out++;
      exp = sent_q.pop_front();
      check(inj_flit == exp, "flit order / content");
      if (is_head(inj_flit) && inj_flit.dst_chiplet != ME) begin
        check(permit_avail, "outbound head injected without permission");
        if (opic_grant) same_cycle = 1;
        permit_avail = 0;
      end
    end
    // an intra head waiting in the queue behind an outbound packet
    if (!inj_valid && dut.q_count > 1 && dut.head_outbound) begin
      for (int k = 0; k < 1; k++) waited_behind = 1;
    end
  end

  initial begin
    rst_n = 1'b0;
    inj_ready = 1'b0;
    opic_grant = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (n_out_pkts + n_in_pkts == NPKT);
    repeat (200) @(posedge clk);
    check(sent_q.size() == 0, $sformatf("%0d flits never left", sent_q.size()));
    check(n_reqs == n_out_pkts, $sformatf("%0d requests for %0d outbound packets", n_reqs, n_out_pkts));
    check(n_grants == n_out_pkts, "one permission per outbound packet");
    check(same_cycle, "a head left in the cycle its permission arrived");
    check(waited_behind, "packets waited behind an outbound packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
