// tb_rc_buffer: self-checking test of the RC buffer.
//
// Up to 4 packets (the OPIC limit) are in flight at once, each from its own
// router input VC, with their flits interleaved at random on the input. A
// reader takes packets oldest first, as the RC VC allocator does, and pulls
// their flits at random times. Checks: every packet comes out whole and
// unmixed, in the order of head arrival; a flit written in one cycle is
// readable in the next; free_o reports exactly one release per packet, in the
// cycle its tail is read; and a slot is reused after release.
module tb_rc_buffer;
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

  localparam int NUM_PKT = 4, PKT_FLITS = 8, NUM_SRC = 10;

  logic        in_valid, order_valid, order_pop, rd_pop, rd_valid;
  flit_t       in_flit, rd_flit;
  logic [3:0]  in_src;
  logic [1:0]  order_slot, rd_slot, free;

  rc_buffer dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid_i(in_valid), .in_flit_i(in_flit), .in_src_i(in_src),
    .order_valid_o(order_valid), .order_slot_o(order_slot), .order_pop_i(order_pop),
    .rd_slot_i(rd_slot), .rd_pop_i(rd_pop), .rd_valid_o(rd_valid), .rd_flit_o(rd_flit),
    .free_o(free));

  // Writer state: per source, the flits still to send of its current packet.
  flit_t src_pkt [NUM_SRC][$];
  int    in_flight = 0;         // packets admitted and not yet released
  int    next_id = 0;
  int    head_order [$];        // packet ids in order of head arrival
  int    n_done = 0, n_free = 0;
  localparam int NPKT = 400;

  function automatic flit_t mk(int id, int f, int len);
    flit_t fl;
    fl.ftype       = (len == 1) ? FLIT_HEADTAIL : (f == 0) ? FLIT_HEAD
                   : (f == len - 1) ? FLIT_TAIL : FLIT_BODY;
    fl.dst_chiplet = CHIPLET_W'(id % 5);
    fl.dst_node    = NODE_W'(len);
    fl.payload     = PAYLOAD_W'({id[15:0], f[7:0]});
    return fl;
  endfunction

  // reader state
  bit   rd_active = 0;
  int   rd_id, rd_f, rd_len;

  always @(negedge clk) if (rst_n) begin
    int cands [$];
    cands.delete();
    // -------- writer: start a new packet if OPIC would allow it -----------
    if (in_flight < NUM_PKT && next_id < NPKT && $urandom_range(0, 2) == 0) begin
      int s;
      s = $urandom_range(0, NUM_SRC - 1);
      if (src_pkt[s].size() == 0) begin
        int len;
        len = $urandom_range(1, PKT_FLITS);
        for (int f = 0; f < len; f++) src_pkt[s].push_back(mk(next_id, f, len));
        next_id++;
        in_flight++;
      end
    end
    // pick one source with flits to send (interleaving packets)
    in_valid = 1'b0;
    for (int s = 0; s < NUM_SRC; s++) if (src_pkt[s].size() > 0) cands.push_back(s);
    if (cands.size() > 0 && $urandom_range(0, 3) != 0) begin
      int s;
      s = cands[$urandom_range(0, cands.size() - 1)];
      in_valid = 1'b1;
      in_src   = 4'(s);
      in_flit  = src_pkt[s].pop_front();
      if (is_head(in_flit)) head_order.push_back(int'(in_flit.payload[23:8]));
    end
    // -------- reader -------------------------------------------------------
    order_pop = 1'b0;
    rd_pop    = 1'b0;
    if (!rd_active && order_valid) begin
      order_pop = 1'b1;
      rd_slot   = order_slot;
      rd_active = 1;
      rd_f      = 0;
      rd_id     = head_order.pop_front();
    end else if (rd_active && rd_valid && $urandom_range(0, 2) != 0) begin
      rd_pop = 1'b1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (free != '0) begin
      n_free += int'(free);
      check(rd_pop && rd_valid && is_tail(rd_flit), "free only with a tail read");
    end
    if (rd_pop) begin
      check(rd_valid, "read from an empty FIFO");
      if (rd_f == 0) rd_len = int'(rd_flit.dst_node);
      check(rd_flit == mk(rd_id, rd_f, rd_len),
            $sformatf("packet %0d flit %0d wrong or out of order", rd_id, rd_f));
      rd_f++;
      if (is_tail(rd_flit)) begin
        check(rd_f == rd_len, "packet length");
        check(free == 2'd1, "free_o pulses with tail");
        rd_active = 0;
        n_done++;
        in_flight--;
      end
    end
  end

  // Directed: a flit written in cycle t is readable in t+1.
  initial begin
    rst_n     = 1'b0;
    in_valid  = 1'b0;
    in_flit   = '0;
    in_src    = '0;
    order_pop = 1'b0;
    rd_pop    = 1'b0;
    rd_slot   = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (n_done == NPKT);
    repeat (5) @(posedge clk);
    check(n_free == NPKT, $sformatf("%0d releases for %0d packets", n_free, NPKT));
    check(!order_valid, "nothing left queued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Latency: watch the first head flit.
  initial begin
    @(posedge rst_n);
    @(posedge clk iff (in_valid && is_head(in_flit)));
    #1 check(order_valid, "reserved packet visible the cycle after its head is written");
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
