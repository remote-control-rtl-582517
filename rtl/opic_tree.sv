// opic_tree: the OPIC system of a chiplet, a forest of OPIC blocks.
//
// Each boundary router that owns an rc_buffer is the root of one tree; every
// other node of the chiplet hangs below exactly one root, and its outbound
// packets leave the chiplet through that root's rc_buffer. The shape is given
// by the PARENT table: PARENT[i] is the node whose OPIC block is node i's
// parent, and PARENT[i] == i marks a root. Every edge is a pair of 2-bit lines,
// REQ up and RESP down. A node's OPIC block has one compute module per child
// plus one for its own NI, so N = children + 1 as in the paper's figures.
//
// The default shape is the 4x4 chiplet used for the paper's main results: four
// boundary routers (R-1, R-2, R-13, R-14, numbered row by row), each serving
// the three other nodes of its 2x2 quadrant directly, so that each of them
// receives a response in 2 cycles. Deeper trees such as the paper's 8x8
// example are obtained by changing PARENT.
//
// Interface: ni_req_i[i] is a one-cycle pulse from node i's NI asking for one
// permission; ni_grant_o[i] is a one-cycle pulse handing it one. root_free_i[i]
// counts the rc_buffer slots freed this cycle at root i (ignored elsewhere).
module opic_tree
  import rc_pkg::*;
#(
  parameter int unsigned NODES        = 16,
  parameter int unsigned PARENT [NODES] =
    '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14},
  parameter int unsigned ROOT_PERMITS = 4,
  parameter int unsigned CNT_W        = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ni_req_i    [NODES],
  output logic              ni_grant_o  [NODES],
  input  logic [OPIC_W-1:0] root_free_i [NODES]
);

  // Number of children of node i.
  function automatic int unsigned n_children(int unsigned i);
    int unsigned n = 0;
    for (int unsigned j = 0; j < NODES; j++)
      if (j != i && PARENT[j] == i) n++;
    return n;
  endfunction

  // The r-th child of node i, in increasing node order.
  function automatic int unsigned child_of(int unsigned i, int unsigned r);
    int unsigned n = 0;
    for (int unsigned j = 0; j < NODES; j++)
      if (j != i && PARENT[j] == i) begin
        if (n == r) return j;
        n++;
      end
    return 0;
  endfunction

  logic [OPIC_W-1:0] up_req    [NODES];  // node i -> its parent
  logic [OPIC_W-1:0] down_resp [NODES];  // parent -> node i

  for (genvar i = 0; i < NODES; i++) begin : g_node
    localparam int unsigned NCH  = n_children(i);
    localparam bit          ROOT = (PARENT[i] == i);

    logic [OPIC_W-1:0] req  [NCH+1];
    logic [OPIC_W-1:0] resp [NCH+1];

    for (genvar c = 0; c < NCH; c++) begin : g_child
      assign req[c]                      = up_req[child_of(i, c)];
      assign down_resp[child_of(i, c)]   = resp[c];
    end
    assign req[NCH]      = {{(OPIC_W-1){1'b0}}, ni_req_i[i]};
    assign ni_grant_o[i] = |resp[NCH];

    if (ROOT) begin : g_root
      assign down_resp[i] = '0;  // a root has no parent
    end

    opic_block #(
      .N            (NCH + 1),
      .IS_ROOT      (ROOT),
      .ROOT_PERMITS (ROOT_PERMITS),
      .CNT_W        (CNT_W)
    ) u_opic (
      .clk           (clk),
      .rst_n         (rst_n),
      .req_i         (req),
      .resp_o        (resp),
      .parent_req_o  (up_req[i]),
      .parent_resp_i (ROOT ? root_free_i[i] : down_resp[i])
    );
  end

  // A node's NI holds at most one request at a time, so it is granted one
  // permission at a time.
  for (genvar i = 0; i < NODES; i++) begin : g_chk
    a_single_grant: assert property (@(posedge clk) disable iff (!rst_n)
      g_node[i].resp[n_children(i)] <= OPIC_W'(1));
  end

endmodule
