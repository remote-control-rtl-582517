// rcva: RC VC Allocation (RCVA) of a boundary router.
//
// Outbound packets in a boundary router skip the normal VC allocation stage:
// they win switch allocation, cross the crossbar into the RC buffer (RCB),
// and only then are given a VC of the downstream interposer router here, as
// the last stage of their pipeline. Because the link to the interposer is
// used by the RCB alone, this allocator deals with one port only.
//
// Operation: when no packet is being sent, or in the cycle the current
// packet's tail leaves, the allocator takes the oldest packet reserved in the
// RCB and gives it a free downstream VC, i.e. one that no packet owns and
// whose credits have all come back. From the next cycle on, one flit of that
// packet goes to the interposer per cycle whenever it is present in the RCB
// and the VC has a credit. Credits are counted per VC; the interposer router
// returns one credit per cycle at most.
//
// Interface: order_*/rd_* connect to rc_buffer; link_* is the flit channel
// to the interposer router with the VC number; credit_* is the credit return.
// Timing: allocation takes one cycle (the paper counts one cycle for RCVA);
// flits then stream at one per cycle with no gap between packets. The
// choice of the lowest free VC and the "all credits back" rule for reusing a
// VC are this design's own.
module rcva
  import rc_pkg::*;
#(
  parameter int unsigned NUM_PKT  = 4,  // RCB slots
  parameter int unsigned NUM_VC   = 2,  // VCs per interposer router input port
  parameter int unsigned VC_DEPTH = 4,  // flit buffers per downstream VC
  localparam int unsigned SLOT_W  = (NUM_PKT > 1) ? $clog2(NUM_PKT) : 1,
  localparam int unsigned VC_W    = (NUM_VC > 1) ? $clog2(NUM_VC) : 1,
  localparam int unsigned CRED_W  = $clog2(VC_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // oldest packet waiting in the RCB
  input  logic              order_valid_i,
  input  logic [SLOT_W-1:0] order_slot_i,
  output logic              order_pop_o,
  // RCB read port
  output logic [SLOT_W-1:0] rd_slot_o,
  output logic              rd_pop_o,
  input  logic              rd_valid_i,
  input  flit_t             rd_flit_i,
  // link to the downstream interposer router
  output logic              link_valid_o,
  output flit_t             link_flit_o,
  output logic [VC_W-1:0]   link_vc_o,
  // credits returned by the interposer router
  input  logic              credit_valid_i,
  input  logic [VC_W-1:0]   credit_vc_i
);

  logic              active_q;
  logic [SLOT_W-1:0] slot_q;
  logic [VC_W-1:0]   vc_q;
  logic [CRED_W-1:0] credits_q [NUM_VC];
  logic              owned_q   [NUM_VC];

  logic send, send_tail;
  assign rd_slot_o    = slot_q;
  assign send         = active_q && rd_valid_i && (credits_q[vc_q] != '0);
  assign send_tail    = send && is_tail(rd_flit_i);
  assign rd_pop_o     = send;
  assign link_valid_o = send;
  assign link_flit_o  = rd_flit_i;
  assign link_vc_o    = vc_q;

  // Free VC for the next packet: not owned, all credits home, and not the
  // VC whose tail is leaving right now.
  logic            vc_found;
  logic [VC_W-1:0] vc_pick;
  always_comb begin
    vc_found = 1'b0;
    vc_pick  = '0;
    for (int v = NUM_VC - 1; v >= 0; v--)
      if (!owned_q[v] && credits_q[v] == CRED_W'(VC_DEPTH))
        begin
          vc_found = 1'b1;
          vc_pick  = VC_W'(v);
        end
  end

  logic alloc;
  assign alloc       = (!active_q || send_tail) && order_valid_i && vc_found;
  assign order_pop_o = alloc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      slot_q   <= '0;
      vc_q     <= '0;
      for (int v = 0; v < NUM_VC; v++) begin
        credits_q[v] <= CRED_W'(VC_DEPTH);
        owned_q[v]   <= 1'b0;
      end
    end else begin
      for (int v = 0; v < NUM_VC; v++) begin
        credits_q[v] <= credits_q[v]
                      - CRED_W'(send && vc_q == VC_W'(v))
                      + CRED_W'(credit_valid_i && credit_vc_i == VC_W'(v));
      end
      if (send_tail) begin
        owned_q[vc_q] <= 1'b0;
        active_q      <= 1'b0;
      end
      if (alloc) begin
        owned_q[vc_pick] <= 1'b1;
        active_q         <= 1'b1;
        slot_q           <= order_slot_i;
        vc_q             <= vc_pick;
      end
    end
  end

  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
    credit_valid_i |-> (credits_q[credit_vc_i] < CRED_W'(VC_DEPTH)));
  a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
    (send && $past(alloc)) |-> is_head(rd_flit_i));

endmodule
