// sync_fifo: single-clock first-in first-out queue used for the NI injection
// queue and for the packet FIFOs of the RC buffer.
//
// DEPTH entries of WIDTH bits are held in a register array with read and
// write pointers one bit wider than the index, so that full and empty can be
// told apart. A push and a pop may happen in the same cycle; the head entry
// is visible on rdata_o whenever empty_o is low (first-word fall-through).
// Pushing when full or popping when empty is a protocol error and is
// asserted against.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr_q, rptr_q;

  function automatic logic [AW:0] incr(logic [AW:0] p);
    if (p[AW-1:0] == AW'(DEPTH - 1)) return {~p[AW], {AW{1'b0}}};
    return p + 1'b1;
  endfunction

  assign empty_o = (wptr_q == rptr_q);
  assign full_o  = (wptr_q[AW-1:0] == rptr_q[AW-1:0]) && (wptr_q[AW] != rptr_q[AW]);
  assign rdata_o = mem[rptr_q[AW-1:0]];
  always_comb begin
    if (wptr_q[AW] == rptr_q[AW])
      count_o = ($clog2(DEPTH+1))'(wptr_q[AW-1:0]) - ($clog2(DEPTH+1))'(rptr_q[AW-1:0]);
    else
      count_o = ($clog2(DEPTH+1))'(DEPTH) - ($clog2(DEPTH+1))'(rptr_q[AW-1:0])
              + ($clog2(DEPTH+1))'(wptr_q[AW-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr_q <= '0;
      rptr_q <= '0;
    end else begin
      if (push_i) wptr_q <= incr(wptr_q);
      if (pop_i)  rptr_q <= incr(rptr_q);
    end
  end

  always_ff @(posedge clk) begin
    if (push_i) mem[wptr_q[AW-1:0]] <= wdata_i;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_i  |-> !empty_o);

endmodule
