// tb_opic_tree: self-checking test of the OPIC system.
//
// Two trees are checked. The default 4x4 chiplet forest (four boundaries,
// each serving the three other nodes of its quadrant directly) must answer a
// lone request of a non-boundary node in 2 cycles. The 8x8 example tree rooted
// at boundary node 2 (node 2 -> 0,1,3,9,10,11,18; 0 -> 8,16; 9 -> 17,25;
// 11 -> 19,27; 18 -> 26; 25 -> 24) must answer nodes one, two and three levels
// down in 2, 4 and 6 cycles. Then both are stressed: every node asks
// repeatedly, holds each permission for a random time and gives its slot back
// at its root; at no time may a root have more than 4 packets reserved, and
// every request must be served.
module tb_opic_tree;
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

  // ---- default 4x4 forest --------------------------------------------------
  localparam int unsigned NA = 16;
  localparam int unsigned ROOT_A [NA] =
    '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14};
  logic              a_req  [NA];
  logic              a_gnt  [NA];
  logic [OPIC_W-1:0] a_free [NA];
  opic_tree u_a (.clk(clk), .rst_n(rst_n), .ni_req_i(a_req), .ni_grant_o(a_gnt),
                 .root_free_i(a_free));

  // ---- 8x8 example tree of node 2 ------------------------------------------
  localparam int unsigned NB = 64;
  function automatic int unsigned fig_parent(int unsigned i);
    case (i)
      0, 1, 3, 9, 10, 11, 18: return 2;
      8, 16:                  return 0;
      17, 25:                 return 9;
      19, 27:                 return 11;
      26:                     return 18;
      24:                     return 25;
      default:                return i;   // not in this tree
    endcase
  endfunction
  typedef int unsigned parent_t [NB];
  function automatic parent_t fig_parents();
    parent_t p;
    for (int unsigned i = 0; i < NB; i++) p[i] = fig_parent(i);
    return p;
  endfunction
  localparam parent_t PARENT_B = fig_parents();

  logic              b_req  [NB];
  logic              b_gnt  [NB];
  logic [OPIC_W-1:0] b_free [NB];
  opic_tree #(.NODES(NB), .PARENT(PARENT_B)) u_b (
    .clk(clk), .rst_n(rst_n), .ni_req_i(b_req), .ni_grant_o(b_gnt), .root_free_i(b_free));

  function automatic int unsigned root_b(int unsigned i);
    int unsigned n = i;
    while (fig_parent(n) != n) n = fig_parent(n);
    return n;
  endfunction

  task automatic idle();
    foreach (a_req[i])  a_req[i]  = 1'b0;
    foreach (a_free[i]) a_free[i] = '0;
    foreach (b_req[i])  b_req[i]  = 1'b0;
    foreach (b_free[i]) b_free[i] = '0;
  endtask

  // Latency of a lone request from node n of tree B (or A), then give the
  // slot back.
  task automatic latency_b(int unsigned n, int expected);
    int lat = 0;
    bit seen = 0;
    @(negedge clk);
    b_req[n] = 1'b1;
    for (int c = 1; c <= 12 && !seen; c++) begin
      @(negedge clk);
      b_req[n] = 1'b0;
      #1 if (b_gnt[n]) begin seen = 1; lat = c; end
    end
    check(seen && lat == expected,
          $sformatf("8x8 tree: node %0d answered after %0d cycles, expected %0d", n, lat, expected));
    @(negedge clk);
    b_free[root_b(n)] = 2'd1;
    @(negedge clk);
    b_free[root_b(n)] = '0;
  endtask

  task automatic latency_a(int unsigned n, int expected);
    int lat = 0;
    bit seen = 0;
    @(negedge clk);
    a_req[n] = 1'b1;
    for (int c = 1; c <= 12 && !seen; c++) begin
      @(negedge clk);
      a_req[n] = 1'b0;
      #1 if (a_gnt[n]) begin seen = 1; lat = c; end
    end
    check(seen && lat == expected,
          $sformatf("4x4 chiplet: node %0d answered after %0d cycles, expected %0d", n, lat, expected));
    @(negedge clk);
    a_free[ROOT_A[n]] = 2'd1;
    @(negedge clk);
    a_free[ROOT_A[n]] = '0;
  endtask

  // ---- random stress state -------------------------------------------------
  int a_state [NA];   // 0 idle, 1 waiting, >1 holding for that many cycles
  int b_state [NB];
  int a_resv  [NA];   // reserved packets per root
  int b_resv  [NB];
  int a_req_n, a_gnt_n, b_req_n, b_gnt_n;
  bit b_in_tree [NB];

  initial begin
    rst_n = 1'b0;
    idle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // Latencies printed in the paper's 8x8 example.
    foreach (PARENT_B[i]) b_in_tree[i] = (root_b(i) == 2);
    latency_b(2, 1);                    // the boundary's own NI
    foreach (PARENT_B[i]) begin
      if (b_in_tree[i] && i != 2) begin
        int depth;
        int unsigned n;
        depth = 0;
        n = i;
        while (fig_parent(n) != n) begin n = fig_parent(n); depth++; end
        latency_b(i, 2 * depth);
      end
    end
    // 4x4 chiplet: every non-boundary node in 2 cycles.
    for (int unsigned i = 0; i < NA; i++)
      latency_a(i, (ROOT_A[i] == i) ? 1 : 2);

    // More requests than permits: 8 nodes of tree B at once, 4 permits.
    begin
      int ng;
      int lst [8];
      ng = 0;
      lst = '{8, 16, 24, 25, 26, 27, 1, 10};
      @(negedge clk);
      foreach (lst[k]) b_req[lst[k]] = 1'b1;
      @(negedge clk);
      foreach (lst[k]) b_req[lst[k]] = 1'b0;
      for (int c = 0; c < 20; c++) begin
        #1 foreach (lst[k]) ng += int'(b_gnt[lst[k]]);
        @(negedge clk);
      end
      check(ng == 4, $sformatf("4 permits, 8 requests: %0d granted", ng));
      b_free[2] = 2'd3;
      @(negedge clk);
      b_free[2] = 2'd1;
      @(negedge clk);
      b_free[2] = '0;
      for (int c = 0; c < 20; c++) begin
        #1 foreach (lst[k]) ng += int'(b_gnt[lst[k]]);
        @(negedge clk);
      end
      check(ng == 8, $sformatf("after 4 frees: %0d of 8 granted", ng));
      b_free[2] = 2'd3;
      @(negedge clk);
      b_free[2] = 2'd1;
      @(negedge clk);
      b_free[2] = '0;
    end

    // Random stress on both trees.
    foreach (a_state[i]) a_state[i] = 0;
    foreach (b_state[i]) b_state[i] = 0;
    foreach (a_resv[i])  a_resv[i] = 0;
    foreach (b_resv[i])  b_resv[i] = 0;
    a_req_n = 0; a_gnt_n = 0; b_req_n = 0; b_gnt_n = 0;
    for (int c = 0; c < 4000; c++) begin
      #1;
      idle();
      for (int i = 0; i < NA; i++) begin
        if (a_state[i] == 1 && a_gnt[i]) begin
          a_state[i] = 2 + $urandom_range(0, 20); a_gnt_n++; a_resv[ROOT_A[i]]++;
        end else if (a_state[i] > 2) a_state[i]--;
        else if (a_state[i] == 2) begin
          // give the slot back unless the root already returns one this cycle
          if (a_free[ROOT_A[i]] == '0) begin
            a_free[ROOT_A[i]] = 2'd1; a_resv[ROOT_A[i]]--; a_state[i] = 0;
          end
        end else if (a_state[i] == 0 && c < 3500 && $urandom_range(0, 7) == 0) begin
          a_req[i] = 1'b1; a_state[i] = 1; a_req_n++;
        end
      end
      for (int i = 0; i < NB; i++) begin
        if (!b_in_tree[i]) continue;
        if (b_state[i] == 1 && b_gnt[i]) begin
          b_state[i] = 2 + $urandom_range(0, 20); b_gnt_n++; b_resv[2]++;
        end else if (b_state[i] > 2) b_state[i]--;
        else if (b_state[i] == 2) begin
          if (b_free[2] == '0) begin
            b_free[2] = 2'd1; b_resv[2]--; b_state[i] = 0;
          end
        end else if (b_state[i] == 0 && c < 3500 && $urandom_range(0, 7) == 0) begin
          b_req[i] = 1'b1; b_state[i] = 1; b_req_n++;
        end
      end
      foreach (a_resv[i]) if (a_resv[i] > 4) check(0, $sformatf("root %0d over-reserved", i));
      if (b_resv[2] > 4) check(0, "8x8 root over-reserved");
      @(negedge clk);
    end
    check(a_req_n > 100 && a_gnt_n == a_req_n,
          $sformatf("4x4: %0d requests, %0d granted", a_req_n, a_gnt_n));
    check(b_req_n > 100 && b_gnt_n == b_req_n,
          $sformatf("8x8: %0d requests, %0d granted", b_req_n, b_gnt_n));

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
