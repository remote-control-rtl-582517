// opic_block: one Outbound Packet Injection Control (OPIC) block.
//
// Every chiplet router carries one OPIC block. The blocks of a chiplet form a
// tree whose root sits in a boundary router next to its rc_buffer. A packet
// whose destination lies outside the chiplet may only be injected once it
// holds a permission, and each permission stands for one whole-packet slot of
// the rc_buffer. The root's Permit Counter (PC) starts at the number of
// rc_buffer slots; an inner block's PC holds permissions received from its
// parent and not yet handed down.
//
// Structure (after the paper's block diagram): N requesters, namely the child
// OPIC blocks plus the local Network Interface (NI), each have a compute module
// (CM) with a register REG counting that requester's unserved requests. The CMs
// form a combinational ring. A round-robin counter S picks the CM that starts
// the ring in a cycle: it reads the PC, the others read the residue (PREV)
// left by the CM before them. Each CM grants min(REG, residue, 3), returns that
// count on its RESP line and passes on the rest. ADD folds this cycle's new
// REQs into REG. When the total of pending requests exceeds the PC plus the
// permissions already requested from the parent, the difference (at most 3 per
// cycle) is sent upwards on the parent REQ line.
//
// Interface: req_i/resp_o carry 2-bit counts per requester; requester N-1 is
// the local NI. parent_req_o/parent_resp_i are the 2-bit lines to the parent.
// At the root (IS_ROOT=1) parent_resp_i instead reports rc_buffer slots freed
// this cycle, and parent_req_o stays 0 since the root has no parent.
//
// Timing: a child's request is registered in REG one cycle after it is sent,
// and is granted in that same cycle if the PC allows; the RESP is registered
// into the child's PC at the next edge. So each tree level costs one cycle up
// and one cycle down, which gives the 2/4/6-cycle responses of the paper's
// 8x8 example. The local NI's request counts towards the upward request in
// the cycle it is raised, so a node's own request reaches its parent one cycle
// later, as in the paper's walk-through. REQ/RESP as counts, the exact
// deficit rule with a count of outstanding upward requests, and the counter
// widths are this design's choices.
module opic_block
  import rc_pkg::*;
#(
  parameter int unsigned N            = 3,  // requesters: children + local NI
  parameter bit          IS_ROOT      = 1'b0,
  parameter int unsigned ROOT_PERMITS = 4,  // rc_buffer packet slots (root only)
  parameter int unsigned CNT_W        = 6   // width of REG, PC and outstanding counters
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [OPIC_W-1:0]   req_i  [N],
  output logic [OPIC_W-1:0]   resp_o [N],
  output logic [OPIC_W-1:0]   parent_req_o,
  input  logic [OPIC_W-1:0]   parent_resp_i
);

  localparam int unsigned LOCAL = N - 1;
  localparam int unsigned SEL_W = (N > 1) ? $clog2(N) : 1;

  logic [CNT_W-1:0] reg_q [N];
  logic [CNT_W-1:0] reg_d [N];
  logic [CNT_W-1:0] pc_q, pc_d;
  logic [CNT_W-1:0] outst_q, outst_d;   // permissions requested from parent, not yet received
  logic [SEL_W-1:0] sel_q, sel_d;       // round-robin starting CM

  logic [CNT_W-1:0] grant [N];
  logic [CNT_W-1:0] ring_g [N];
  logic [CNT_W-1:0] residue;           // permissions left after the ring
  logic [OPIC_W-1:0] up_req;           // request to the parent (unused at the root)

  // Ring of compute modules: the CM picked by S reads the PC, each following
  // CM reads the residue (PREV) of the one before it.
  always_comb begin
    logic [CNT_W-1:0] g;
    residue = pc_q;
    for (int unsigned k = 0; k < N; k++) begin
      g = reg_q[(int'(sel_q) + k) % N];
      if (g > residue)           g = residue;
      if (g > CNT_W'(OPIC_MAX))  g = CNT_W'(OPIC_MAX);
      residue   = residue - g;
      ring_g[k] = g;              // grant of the k-th CM in ring order
    end
  end

  // Back from ring order to requester order.
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      grant[i]  = ring_g[(int'(i) + int'(N) - int'(sel_q)) % N];
      resp_o[i] = grant[i][OPIC_W-1:0];
    end
  end

  // REG update (ADD), permission counter update and request sender.
  always_comb begin
    logic [CNT_W+3:0]        total;
    logic signed [CNT_W+4:0] deficit;

    total = '0;
    for (int unsigned i = 0; i < N; i++) begin
      reg_d[i] = reg_q[i] - grant[i] + CNT_W'(req_i[i]);
      total    = total + (CNT_W+4)'(reg_q[i]);
    end
    total = total + (CNT_W+4)'(req_i[LOCAL]);

    pc_d = residue + CNT_W'(parent_resp_i);

    // Shortfall of permissions, sent up at most 3 per cycle.
    deficit = $signed({1'b0, total}) - $signed({5'b0, pc_q}) - $signed({5'b0, outst_q});
    if (deficit <= 0)                         up_req = '0;
    else if (deficit >= (CNT_W+5)'(OPIC_MAX)) up_req = OPIC_W'(OPIC_MAX);
    else                                      up_req = OPIC_W'(deficit);
    outst_d = IS_ROOT ? '0 : outst_q + CNT_W'(up_req) - CNT_W'(parent_resp_i);

    sel_d = (int'(sel_q) == N - 1) ? '0 : sel_q + 1'b1;
  end

  assign parent_req_o = IS_ROOT ? '0 : up_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) reg_q[i] <= '0;
      pc_q    <= IS_ROOT ? CNT_W'(ROOT_PERMITS) : '0;
      outst_q <= '0;
      sel_q   <= '0;
    end else begin
      for (int unsigned i = 0; i < N; i++) reg_q[i] <= reg_d[i];
      pc_q    <= pc_d;
      outst_q <= outst_d;
      sel_q   <= sel_d;
    end
  end

  // The root can never hold more permissions than there are rc_buffer slots,
  // and an inner block never receives more than it asked for.
  a_root_pc_bound: assert property (@(posedge clk) disable iff (!rst_n)
    IS_ROOT -> (pc_q <= CNT_W'(ROOT_PERMITS)));
  a_no_unasked_resp: assert property (@(posedge clk) disable iff (!rst_n)
    !IS_ROOT -> (CNT_W'(parent_resp_i) <= outst_q));

endmodule
