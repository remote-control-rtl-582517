// tb_opic_block: self-checking test of one OPIC block.
//
// A root block (3 requesters, 4 rc_buffer permits) and an inner block (one
// child plus the local NI) are driven with directed sequences whose results
// are worked out by hand: grant latency of one cycle after a request is
// registered, no more grants than permits, permits coming back when rc_buffer
// slots are freed, round-robin fairness, and the inner block's upward request
// (sent in the cycle its NI asks, one cycle after a child asks, never twice).
// A random phase then checks conservation of permits at the root.
module tb_opic_block;
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

  // ---------------- root block -------------------------------------------
  logic [OPIC_W-1:0] r_req  [3];
  logic [OPIC_W-1:0] r_resp [3];
  logic [OPIC_W-1:0] r_preq, r_free;

  opic_block #(.N(3), .IS_ROOT(1'b1), .ROOT_PERMITS(4)) u_root (
    .clk(clk), .rst_n(rst_n), .req_i(r_req), .resp_o(r_resp),
    .parent_req_o(r_preq), .parent_resp_i(r_free));

  // ---------------- inner block ------------------------------------------
  logic [OPIC_W-1:0] i_req  [2];
  logic [OPIC_W-1:0] i_resp [2];
  logic [OPIC_W-1:0] i_preq, i_presp;

  opic_block #(.N(2), .IS_ROOT(1'b0)) u_inner (
    .clk(clk), .rst_n(rst_n), .req_i(i_req), .resp_o(i_resp),
    .parent_req_o(i_preq), .parent_resp_i(i_presp));

  function automatic int rsum();
    return int'(r_resp[0]) + int'(r_resp[1]) + int'(r_resp[2]);
  endfunction

  task automatic idle_root();
    foreach (r_req[i]) r_req[i] = '0;
    r_free = '0;
  endtask

  int got [3];
  int rr_order [$];   // requesters in the order they were granted
  int pend [3];
  int granted_total, freed_total, requested_total;

  initial begin
    rst_n = 1'b0;
    idle_root();
    foreach (i_req[i]) i_req[i] = '0;
    i_presp = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // --- 1: one request, granted in the cycle after it is sent -----------
    @(negedge clk);
    r_req[0] = 2'd1;
    #1 check(rsum() == 0, "no grant in the request cycle");
    @(negedge clk);
    idle_root();
    #1 check(r_resp[0] == 2'd1 && rsum() == 1, "grant one cycle after request");
    check(r_preq == '0, "root never requests upwards");
    @(negedge clk);
    #1 check(rsum() == 0, "single grant only");

    // --- 2: 6 requests with 3 permits left: only 3 granted -------------
    r_req[1] = 2'd3; r_req[2] = 2'd3;
    @(negedge clk);
    idle_root();
    granted_total = 0;
    for (int c = 0; c < 6; c++) begin
      #1 granted_total += rsum();
      @(negedge clk);
    end
    check(granted_total == 3, $sformatf("3 permits left, granted %0d", granted_total));

    // --- 3: free 2 slots (first packet + one more): 2 more grants -------
    r_free = 2'd2;
    @(negedge clk);
    r_free = '0;
    granted_total = 0;
    for (int c = 0; c < 4; c++) begin
      #1 granted_total += rsum();
      @(negedge clk);
    end
    check(granted_total == 2, $sformatf("2 freed, granted %0d", granted_total));

    // --- 4: remaining 1 pending request served after one more free -----
    r_free = 2'd1;
    @(negedge clk);
    r_free = '0;
    #1 check(rsum() == 1, "freed permit granted in the next cycle");
    @(negedge clk);

    // Now all 4 permits are out. Free all and check round robin: one
    // request from each requester, 1 permit freed at a time.
    r_free = 2'd3;
    @(negedge clk);
    r_free = 2'd1;
    @(negedge clk);
    r_free = '0;
    // PC is 4; use 3 requests then free nothing: each gets exactly one.
    foreach (got[i]) got[i] = 0;
    r_req[0] = 1; r_req[1] = 1; r_req[2] = 1;
    @(negedge clk);
    idle_root();
    for (int c = 0; c < 3; c++) begin
      #1 foreach (got[i]) got[i] += int'(r_resp[i]);
      @(negedge clk);
    end
    check(got[0] == 1 && got[1] == 1 && got[2] == 1, "each requester served once");

    // Round robin with scarce permits: one permit left; three requesters
    // each ask 2; permits freed one by one; the grants must rotate.
    foreach (got[i]) got[i] = 0;
    rr_order.delete();
    r_req[0] = 2; r_req[1] = 2; r_req[2] = 2;
    @(negedge clk);
    idle_root();
    #1 foreach (got[i]) begin
      got[i] += int'(r_resp[i]);
      if (r_resp[i] != '0) rr_order.push_back(i);
    end
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      r_free = 2'd1;
      @(negedge clk);
      r_free = '0;
      #1 foreach (got[i]) begin
        got[i] += int'(r_resp[i]);
        if (r_resp[i] != '0) rr_order.push_back(i);
      end
    end
    check(got[0] == 2 && got[1] == 2 && got[2] == 2,
          $sformatf("round robin served %0d/%0d/%0d, expected 2/2/2", got[0], got[1], got[2]));
    // one permit at a time: the first three go to three different requesters
    check(rr_order.size() == 6 && rr_order[0] != rr_order[1] && rr_order[1] != rr_order[2]
          && rr_order[0] != rr_order[2], "grants rotate among waiting requesters");

    // --- inner block: upward request timing --------------------------------
    // NI (requester 1) asks: request goes up in the same cycle.
    @(negedge clk);
    i_req[1] = 2'd1;
    #1 check(i_preq == 2'd1, "NI request forwarded to parent in same cycle");
    @(negedge clk);
    i_req[1] = '0;
    #1 check(i_preq == '0, "NI request forwarded once");
    // Child asks 3: forwarded one cycle later.
    i_req[0] = 2'd3;
    #1 check(i_preq == '0, "child request not forwarded combinationally");
    @(negedge clk);
    i_req[0] = '0;
    #1 check(i_preq == 2'd3, "child request forwarded one cycle later");
    @(negedge clk);
    #1 check(i_preq == '0, "no repeated request");
    // Parent answers 2: granted in the following cycle.
    i_presp = 2'd2;
    @(negedge clk);
    i_presp = '0;
    #1 check(int'(i_resp[0]) + int'(i_resp[1]) == 2, "two permissions handed down");
    @(negedge clk);
    i_presp = 2'd2;
    @(negedge clk);
    i_presp = '0;
    #1 check(int'(i_resp[0]) + int'(i_resp[1]) == 2, "last two permissions handed down");
    @(negedge clk);
    #1 check(int'(i_resp[0]) + int'(i_resp[1]) == 0 && i_preq == '0, "inner block idle");

    // --- random phase at the root: permits conserved -----------------------
    // All 4 permits are out from the round-robin phase: free them first.
    r_free = 2'd2; @(negedge clk); r_free = 2'd2; @(negedge clk); r_free = '0;
    @(negedge clk);
    granted_total = 0; freed_total = 0; requested_total = 0;
    foreach (got[i]) begin got[i] = 0; pend[i] = 0; end
    for (int c = 0; c < 2000; c++) begin
      #1 granted_total += rsum();
      check(granted_total - freed_total <= 4, "never more than 4 packets reserved");
      foreach (r_req[i]) begin
        got[i] += int'(r_resp[i]);
        // a requester has at most 3 requests outstanding (its subtree size)
        r_req[i] = (requested_total < 600 && pend[i] - got[i] < 3)
                   ? OPIC_W'($urandom_range(0, 1)) : '0;
        requested_total += int'(r_req[i]);
        pend[i] += int'(r_req[i]);
      end
      if (granted_total > freed_total && $urandom_range(0, 3) == 0) begin
        r_free = 2'd1; freed_total++;
      end else r_free = '0;
      @(negedge clk);
    end
    idle_root();
    // drain
    for (int c = 0; c < 2000 && granted_total < requested_total; c++) begin
      #1 granted_total += rsum();
      if (granted_total > freed_total) begin r_free = 2'd1; freed_total++; end
      else r_free = '0;
      @(negedge clk);
    end
    check(granted_total == requested_total,
          $sformatf("all %0d requests granted (got %0d)", requested_total, granted_total));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
