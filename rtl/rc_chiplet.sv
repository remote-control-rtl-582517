// rc_chiplet: the complete Remote Control (RC) logic of one chiplet.
//
// Remote Control keeps a modular, chiplet-based SoC free of deadlock without
// touching the routing of the chiplets or of the interposer. Every packet
// that leaves the chiplet must be stored whole in the rc_buffer of the
// boundary router it leaves by, and it may only be injected at its source
// once a slot in that rc_buffer has been reserved for it. Outbound packets can
// then never sit in the chiplet's VCs waiting for the interposer, which is the
// hold-and-wait that closes inter-chiplet deadlock cycles.
//
// This module joins, for one chiplet:
//   * an opic_tree: one OPIC block per node, wired as one tree per boundary
//     router (PARENT table), carrying reservation requests up and
//     permissions down over 2-bit lines;
//   * one ni_inject_ctrl per node: the NI injection queue, which holds an
//     outbound packet back until its permission arrives;
//   * per boundary router, an rc_buffer (RCB) and its rcva, which take the
//     outbound packets off the crossbar and send them to the interposer
//     router with credit-based flow control; each packet slot the RCB frees
//     is returned to its OPIC root as a new permission.
// The chiplet routers themselves (route compute, VC and switch allocation,
// crossbar) and the interposer router are not part of this module: their
// connections are ports. inj_* go to each router's local input port; rcb_*
// come from the crossbar output of each boundary router that faces the
// interposer, tagged with the router input VC they came from; link_* and
// credit_* go to and from the interposer router below each boundary.
//
// Defaults follow the paper's main configuration: a 4x4 chiplet with four
// boundary routers (R-1, R-2, R-13, R-14), each serving its 2x2 quadrant,
// rc_buffers of 4 packets, 8-flit packets, 2 VCs of 4 flits, 64-bit flits.
// The quadrant assignment of nodes to boundaries, the injection queue depth
// and the input-VC count (5 ports x 2 VCs) are this design's choices.
module rc_chiplet
  import rc_pkg::*;
#(
  parameter int unsigned NODES      = 16,
  parameter int unsigned NUM_BND    = 4,
  parameter int unsigned BND_NODE [NUM_BND] = '{1, 2, 13, 14},
  parameter int unsigned PARENT   [NODES]   =
    '{1, 1, 2, 2, 1, 1, 2, 2, 13, 13, 14, 14, 13, 13, 14, 14},
  parameter int unsigned RCB_PKTS   = 4,
  parameter int unsigned PKT_FLITS  = 8,
  parameter int unsigned NUM_SRC    = 10,
  parameter int unsigned NUM_VC     = 2,
  parameter int unsigned VC_DEPTH   = 4,
  parameter int unsigned QDEPTH     = 16,
  localparam int unsigned SRC_W     = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1,
  localparam int unsigned VC_W      = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CHIPLET_W-1:0] my_chiplet_i,
  // processing cores -> NI injection queues
  input  logic                 core_valid_i  [NODES],
  input  flit_t                core_flit_i   [NODES],
  output logic                 core_ready_o  [NODES],
  // NI -> chiplet router local input ports
  output logic                 inj_valid_o   [NODES],
  output flit_t                inj_flit_o    [NODES],
  input  logic                 inj_ready_i   [NODES],
  // boundary router crossbar output (interposer-facing port) -> RCB
  input  logic                 rcb_valid_i   [NUM_BND],
  input  flit_t                rcb_flit_i    [NUM_BND],
  input  logic [SRC_W-1:0]     rcb_src_i     [NUM_BND],
  // RCVA -> interposer routers
  output logic                 link_valid_o  [NUM_BND],
  output flit_t                link_flit_o   [NUM_BND],
  output logic [VC_W-1:0]      link_vc_o     [NUM_BND],
  input  logic                 credit_valid_i[NUM_BND],
  input  logic [VC_W-1:0]      credit_vc_i   [NUM_BND]
);

  localparam int unsigned SLOT_W = (RCB_PKTS > 1) ? $clog2(RCB_PKTS) : 1;

  logic              ni_req    [NODES];
  logic              ni_grant  [NODES];
  logic [OPIC_W-1:0] root_free [NODES];
  logic [OPIC_W-1:0] bnd_free  [NUM_BND];

  // Boundary index of a root node, NUM_BND if the node is not a boundary.
  function automatic int unsigned bnd_of(int unsigned n);
    for (int unsigned b = 0; b < NUM_BND; b++)
      if (BND_NODE[b] == n) return b;
    return NUM_BND;
  endfunction

  for (genvar n = 0; n < NODES; n++) begin : g_free
    if (bnd_of(n) < NUM_BND) begin : g_bnd
      assign root_free[n] = bnd_free[bnd_of(n)];
    end else begin : g_nb
      assign root_free[n] = '0;  // only roots take released slots
    end
  end

  opic_tree #(
    .NODES        (NODES),
    .PARENT       (PARENT),
    .ROOT_PERMITS (RCB_PKTS)
  ) u_opic (
    .clk         (clk),
    .rst_n       (rst_n),
    .ni_req_i    (ni_req),
    .ni_grant_o  (ni_grant),
    .root_free_i (root_free)
  );

  for (genvar n = 0; n < NODES; n++) begin : g_ni
    ni_inject_ctrl #(.QDEPTH(QDEPTH)) u_ni (
      .clk          (clk),
      .rst_n        (rst_n),
      .my_chiplet_i (my_chiplet_i),
      .core_valid_i (core_valid_i[n]),
      .core_flit_i  (core_flit_i[n]),
      .core_ready_o (core_ready_o[n]),
      .inj_valid_o  (inj_valid_o[n]),
      .inj_flit_o   (inj_flit_o[n]),
      .inj_ready_i  (inj_ready_i[n]),
      .opic_req_o   (ni_req[n]),
      .opic_grant_i (ni_grant[n])
    );
  end

  for (genvar b = 0; b < NUM_BND; b++) begin : g_bnd
    logic              order_valid, order_pop, rd_pop, rd_valid;
    logic [SLOT_W-1:0] order_slot, rd_slot;
    flit_t             rd_flit;

    rc_buffer #(
      .NUM_PKT   (RCB_PKTS),
      .PKT_FLITS (PKT_FLITS),
      .NUM_SRC   (NUM_SRC)
    ) u_rcb (
      .clk           (clk),
      .rst_n         (rst_n),
      .in_valid_i    (rcb_valid_i[b]),
      .in_flit_i     (rcb_flit_i[b]),
      .in_src_i      (rcb_src_i[b]),
      .order_valid_o (order_valid),
      .order_slot_o  (order_slot),
      .order_pop_i   (order_pop),
      .rd_slot_i     (rd_slot),
      .rd_pop_i      (rd_pop),
      .rd_valid_o    (rd_valid),
      .rd_flit_o     (rd_flit),
      .free_o        (bnd_free[b])
    );

    rcva #(
      .NUM_PKT  (RCB_PKTS),
      .NUM_VC   (NUM_VC),
      .VC_DEPTH (VC_DEPTH)
    ) u_rcva (
      .clk            (clk),
      .rst_n          (rst_n),
      .order_valid_i  (order_valid),
      .order_slot_i   (order_slot),
      .order_pop_o    (order_pop),
      .rd_slot_o      (rd_slot),
      .rd_pop_o       (rd_pop),
      .rd_valid_i     (rd_valid),
      .rd_flit_i      (rd_flit),
      .link_valid_o   (link_valid_o[b]),
      .link_flit_o    (link_flit_o[b]),
      .link_vc_o      (link_vc_o[b]),
      .credit_valid_i (credit_valid_i[b]),
      .credit_vc_i    (credit_vc_i[b])
    );

    // Each boundary router is the root of its own OPIC tree.
    if (PARENT[BND_NODE[b]] != BND_NODE[b]) begin : g_bad_cfg
      $error("rc_chiplet: boundary node %0d is not an OPIC root", BND_NODE[b]);
    end
  end

endmodule
