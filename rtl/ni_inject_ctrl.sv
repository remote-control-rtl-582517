// ni_inject_ctrl: injection side of a node's Network Interface under Remote
// Control.
//
// Flits from the processing core enter an injection queue. A packet whose
// destination chiplet is this chiplet (intra-chiplet traffic) is injected
// into the router without any check. A packet bound outside the chiplet
// (outbound) may only be injected once the node holds a permission from its
// local OPIC block, i.e. once a whole-packet slot is reserved in the
// rc_buffer of its boundary router. When an outbound head flit reaches the
// head of the queue without a permission, the NI raises a single request
// pulse towards the local OPIC block and waits; the permission pulse lets the
// packet go in the same cycle it arrives, or is kept until the router accepts
// the head flit. One permission is consumed per outbound packet. The queue is
// first-in first-out, so a waiting outbound packet also holds back the packets
// behind it, as in the paper's injection queue.
//
// Interface: core side push (valid/ready, one flit per cycle); router side
// flit_o/valid/ready towards the router's local input port; opic_req_o and
// opic_grant_i are one-cycle pulses to and from the local OPIC block.
// my_chiplet_i is this chiplet's id. The queue depth is this design's choice;
// the paper does not give it.
module ni_inject_ctrl
  import rc_pkg::*;
#(
  parameter int unsigned QDEPTH = 16  // injection queue depth in flits
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CHIPLET_W-1:0] my_chiplet_i,
  // from the processing core
  input  logic                 core_valid_i,
  input  flit_t                core_flit_i,
  output logic                 core_ready_o,
  // to the router's injection port
  output logic                 inj_valid_o,
  output flit_t                inj_flit_o,
  input  logic                 inj_ready_i,
  // to and from the local OPIC block
  output logic                 opic_req_o,
  input  logic                 opic_grant_i
);

  flit_t head;
  logic  q_empty, q_full, pop;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(QDEPTH)) u_injq (
    .clk     (clk),
    .rst_n   (rst_n),
    .push_i  (core_valid_i && !q_full),
    .wdata_i (core_flit_i),
    .pop_i   (pop),
    .rdata_o (head),
    .empty_o (q_empty),
    .full_o  (q_full),
    .count_o (q_count)
  );

  assign core_ready_o = !q_full;

  logic in_pkt_q;    // body of a packet whose head has been injected
  logic permit_q;    // permission held, not yet used
  logic req_sent_q;  // request raised, permission not yet received

  logic head_outbound, has_permit, may_send;

  assign head_outbound = !q_empty && !in_pkt_q && is_head(head)
                       && (head.dst_chiplet != my_chiplet_i);
  assign has_permit    = permit_q || opic_grant_i;
  assign may_send      = !q_empty && (in_pkt_q || !head_outbound || has_permit);

  assign inj_valid_o = may_send;
  assign inj_flit_o  = head;
  assign pop         = may_send && inj_ready_i;

  // can inject? -- no -- and a new request: send one request to the OPIC block
  assign opic_req_o  = head_outbound && !has_permit && !req_sent_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt_q   <= 1'b0;
      permit_q   <= 1'b0;
      req_sent_q <= 1'b0;
    end else begin
      if (pop) in_pkt_q <= !is_tail(head);
      if (opic_req_o)   req_sent_q <= 1'b1;
      if (opic_grant_i) req_sent_q <= 1'b0;
      if (pop && head_outbound) permit_q <= 1'b0;
      else if (opic_grant_i)    permit_q <= 1'b1;
    end
  end

  // A permission is only ever received in answer to a request.
  a_grant_was_requested: assert property (@(posedge clk) disable iff (!rst_n)
    opic_grant_i |-> req_sent_q);
  a_outbound_needs_permit: assert property (@(posedge clk) disable iff (!rst_n)
    (pop && head_outbound) |-> has_permit);

endmodule
