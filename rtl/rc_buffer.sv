// rc_buffer: the RC buffer (RCB) of a boundary router.
//
// Sits on the output side of the boundary router's crossbar, on the port that
// leads down to the interposer router. It is a set of NUM_PKT FIFOs, each deep
// enough for the longest packet (PKT_FLITS). Every outbound packet that leaves
// the chiplet through this router is stored here whole, whatever the state of
// the interposer router, so the packet always frees the chiplet's VCs in
// bounded time; this is what breaks the inter-chiplet deadlock cycle.
//
// When a head flit arrives, the RCB reserves a free FIFO for the whole packet
// and remembers, for the router input VC the flit came from (src_i), which
// FIFO its body and tail go to. Flits of different packets may therefore be
// interleaved at the crossbar output. A free FIFO is always available because
// the OPIC tree only lets as many outbound packets in flight as there are
// FIFOs; arriving with none free is asserted against. Reserved FIFOs are
// queued in head-arrival order for the RC VC allocator (rcva), which reads
// the oldest one. A FIFO is released when its tail flit leaves, and the
// release is reported on free_o to the OPIC root as one new permission.
//
// Timing: a flit written in cycle t is readable from t+1. free_o pulses in
// the cycle the tail is read. The FIFO count and depth follow the paper
// (4 packets, depth = packet length, 8 flits in the main synthetic runs); the
// per-input-VC packet map and the oldest-first order are this design's
// choices.
module rc_buffer
  import rc_pkg::*;
#(
  parameter int unsigned NUM_PKT   = 4,   // packets the RCB can hold
  parameter int unsigned PKT_FLITS = 8,   // FIFO depth = longest packet
  parameter int unsigned NUM_SRC   = 10,  // router input VCs (5 ports x 2 VCs)
  localparam int unsigned SLOT_W   = (NUM_PKT > 1) ? $clog2(NUM_PKT) : 1,
  localparam int unsigned SRC_W    = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the crossbar output
  input  logic              in_valid_i,
  input  flit_t             in_flit_i,
  input  logic [SRC_W-1:0]  in_src_i,
  // oldest reserved FIFO, for the RC VC allocator
  output logic              order_valid_o,
  output logic [SLOT_W-1:0] order_slot_o,
  input  logic              order_pop_i,
  // flit read port
  input  logic [SLOT_W-1:0] rd_slot_i,
  input  logic              rd_pop_i,
  output logic              rd_valid_o,
  output flit_t             rd_flit_o,
  // slots released this cycle, to the OPIC root's permit counter
  output logic [OPIC_W-1:0] free_o
);

  logic              busy_q   [NUM_PKT];
  logic [SLOT_W-1:0] map_q    [NUM_SRC];   // input VC -> FIFO of its packet
  logic              f_empty  [NUM_PKT];
  logic              f_full   [NUM_PKT];
  flit_t             f_rdata  [NUM_PKT];
  logic              f_push   [NUM_PKT];
  logic              f_pop    [NUM_PKT];

  // Lowest free FIFO for a new head flit.
  logic              have_free;
  logic [SLOT_W-1:0] free_slot;
  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    for (int i = NUM_PKT - 1; i >= 0; i--)
      if (!busy_q[i]) begin
        have_free = 1'b1;
        free_slot = SLOT_W'(i);
      end
  end

  logic              wr_head;
  logic [SLOT_W-1:0] wr_slot;
  assign wr_head = in_valid_i && is_head(in_flit_i);
  assign wr_slot = wr_head ? free_slot : map_q[in_src_i];

  for (genvar i = 0; i < NUM_PKT; i++) begin : g_fifo
    assign f_push[i] = in_valid_i && (wr_slot == SLOT_W'(i));
    assign f_pop[i]  = rd_pop_i && (rd_slot_i == SLOT_W'(i));
    sync_fifo #(.WIDTH(FLIT_W), .DEPTH(PKT_FLITS)) u_fifo (
      .clk     (clk),
      .rst_n   (rst_n),
      .push_i  (f_push[i]),
      .wdata_i (in_flit_i),
      .pop_i   (f_pop[i]),
      .rdata_o (f_rdata[i]),
      .empty_o (f_empty[i]),
      .full_o  (f_full[i]),
      .count_o ()
    );
  end

  assign rd_valid_o = !f_empty[rd_slot_i];
  assign rd_flit_o  = f_rdata[rd_slot_i];

  logic rd_tail;
  assign rd_tail = rd_pop_i && rd_valid_o && is_tail(rd_flit_o);
  assign free_o  = OPIC_W'(rd_tail);

  // Order in which packets were reserved.
  logic [SLOT_W-1:0] order_head;
  logic              order_empty, order_full;
  sync_fifo #(.WIDTH(SLOT_W), .DEPTH(NUM_PKT)) u_order (
    .clk     (clk),
    .rst_n   (rst_n),
    .push_i  (wr_head && have_free),
    .wdata_i (free_slot),
    .pop_i   (order_pop_i),
    .rdata_o (order_head),
    .empty_o (order_empty),
    .full_o  (order_full),
    .count_o ()
  );
  assign order_valid_o = !order_empty;
  assign order_slot_o  = order_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PKT; i++) busy_q[i] <= 1'b0;
      for (int s = 0; s < NUM_SRC; s++) map_q[s] <= '0;
    end else begin
      if (wr_head && have_free) begin
        busy_q[free_slot] <= 1'b1;
        map_q[in_src_i]   <= free_slot;
      end
      if (rd_tail) busy_q[rd_slot_i] <= 1'b0;
    end
  end

  // OPIC guarantees a free FIFO for every outbound head flit, and a FIFO
  // never has to hold more than one packet.
  a_slot_available: assert property (@(posedge clk) disable iff (!rst_n)
    wr_head |-> have_free);
  a_no_fifo_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid_i |-> !f_full[wr_slot]);
  a_order_room: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_head && have_free) |-> !order_full);

endmodule
