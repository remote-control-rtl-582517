// tb_rcva: self-checking test of the RC VC allocator.
//
// The RC buffer is modelled by the testbench: packets are queued oldest first
// and their flits become readable over time. The downstream interposer router
// is modelled as two 4-flit VC buffers that drain at random and send a credit
// back for every flit they forward. Checks: packets leave in order, whole, one
// VC per packet; a head only goes to a VC whose buffer is empty and owned by
// no other packet; no VC buffer overflows; and, with all flits present and the
// interposer draining at full speed, three 4-flit packets leave in 13 cycles
// (one allocation cycle, then one flit per cycle with no gap between packets).
module tb_rcva;
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

  localparam int NUM_VC = 2, VC_DEPTH = 4;

  logic       order_valid, order_pop, rd_pop, rd_valid, link_valid, credit_valid;
  logic [1:0] order_slot, rd_slot;
  flit_t      rd_flit, link_flit;
  logic       link_vc, credit_vc;

  rcva dut (
    .clk(clk), .rst_n(rst_n),
    .order_valid_i(order_valid), .order_slot_i(order_slot), .order_pop_o(order_pop),
    .rd_slot_o(rd_slot), .rd_pop_o(rd_pop), .rd_valid_i(rd_valid), .rd_flit_i(rd_flit),
    .link_valid_o(link_valid), .link_flit_o(link_flit), .link_vc_o(link_vc),
    .credit_valid_i(credit_valid), .credit_vc_i(credit_vc));

  // ---- RCB model ---------------------------------------------------------
  int    order_q [$];          // slots in arrival order
  flit_t slot_q  [4][$];       // flits readable per slot
  flit_t pending [4][$];       // flits not yet arrived per slot
  bit    slot_busy [4];
  int    slot_id [4];

  // Outputs of the model, driven a little after every falling edge, once
  // the model's state for the coming rising edge is settled.
  always @(negedge clk) begin
    #2;
    order_valid = order_q.size() > 0;
    order_slot  = 2'(order_valid ? order_q[0] : 0);
    rd_valid    = slot_q[rd_slot].size() > 0;
    rd_flit     = rd_valid ? slot_q[rd_slot][0] : '0;
  end

  function automatic flit_t mk(int id, int f, int len);
    flit_t fl;
    fl.ftype       = (len == 1) ? FLIT_HEADTAIL : (f == 0) ? FLIT_HEAD
                   : (f == len - 1) ? FLIT_TAIL : FLIT_BODY;
    fl.dst_chiplet = '0;
    fl.dst_node    = NODE_W'(len);
    fl.payload     = PAYLOAD_W'({id[15:0], f[7:0]});
    return fl;
  endfunction

  // ---- interposer model ----------------------------------------------------
  int  vc_occ [NUM_VC];
  int  vc_owner [NUM_VC];      // packet id currently on the VC, -1 none
  int  credit_fifo [$];        // VC numbers of credits to return
  bit  fast_drain;             // directed phase: drain every cycle
  int  exp_id = 0, cur_f = 0, cur_len = 0, cur_vc = -1;
  int  n_rx = 0, n_pkts_rx = 0;
  int  next_id = 0;

  // Credits: one per cycle, from the FIFO.
  always @(negedge clk) begin
    credit_valid = 1'b0;
    credit_vc    = 1'b0;
    if (rst_n && credit_fifo.size() > 0 && (fast_drain || $urandom_range(0, 1))) begin
      credit_valid = 1'b1;
      credit_vc    = 1'(credit_fifo.pop_front());
    end
  end

  always @(posedge clk) if (rst_n) begin
    // downstream drain: forward one flit of a non-empty VC
    for (int v = 0; v < NUM_VC; v++)
      if (vc_occ[v] > 0 && (fast_drain || $urandom_range(0, 2) == 0)) begin
        vc_occ[v]--;
        credit_fifo.push_back(v);
        break;
      end
    if (link_valid) begin
      int v;
      v = int'(link_vc);
      n_rx++;
      if (is_head(link_flit)) begin
        check(cur_vc < 0, "head before previous tail");
        check(vc_owner[v] < 0 && vc_occ[v] == 0, "head sent to a busy VC");
        cur_vc = v; cur_f = 0; cur_len = int'(link_flit.dst_node);
        vc_owner[v] = exp_id;
      end
      check(v == cur_vc, "flit changed VC inside a packet");
      check(link_flit == mk(exp_id, cur_f, cur_len),
            $sformatf("packet %0d flit %0d wrong", exp_id, cur_f));
      vc_occ[v]++;
      check(vc_occ[v] <= VC_DEPTH, "downstream VC buffer overflow");
      cur_f++;
      if (is_tail(link_flit)) begin
        vc_owner[v] = -1;
        cur_vc = -1;
        exp_id++;
        n_pkts_rx++;
      end
    end
    if (order_pop) void'(order_q.pop_front());
    if (rd_pop) begin
      check(rd_valid, "pop of an empty slot");
      void'(slot_q[rd_slot].pop_front());
    end
  end

  // Packet source: put a packet in a free slot.
  task automatic add_packet(int len, bit all_now);
    int s;
    s = -1;
    for (int i = 0; i < 4; i++) if (!slot_busy[i] && s < 0) s = i;
    slot_busy[s] = 1;
    slot_id[s]   = next_id;
    for (int f = 0; f < len; f++) begin
      if (all_now || f == 0) slot_q[s].push_back(mk(next_id, f, len));
      else pending[s].push_back(mk(next_id, f, len));
    end
    order_q.push_back(s);
    next_id++;
  endtask

  // Free a slot once its packet has fully left, trickle pending flits in.
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 4; i++) begin
      if (pending[i].size() > 0 && $urandom_range(0, 1)) slot_q[i].push_back(pending[i].pop_front());
      if (slot_busy[i] && slot_q[i].size() == 0 && pending[i].size() == 0
          && (order_q.size() == 0 || !(i inside {order_q})) && !(dut.active_q && int'(dut.slot_q) == i))
        slot_busy[i] = 0;
    end
  end

  int t0, t1;
  initial begin
    rst_n = 1'b0;
    fast_drain = 1'b1;
    foreach (vc_occ[v]) begin vc_occ[v] = 0; vc_owner[v] = -1; end
    foreach (slot_busy[i]) slot_busy[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // Directed rate check: three 4-flit packets, all flits present.
    @(negedge clk);
    add_packet(4, 1); add_packet(4, 1); add_packet(4, 1);
    t0 = $time;
    wait (n_pkts_rx == 3);
    t1 = $time;
    check((t1 - t0 + 5) / 10 == 13, $sformatf("3x4 flits took %0d cycles, expected 13", (t1 - t0 + 5) / 10));
    repeat (10) @(posedge clk);

    // Random phase.
    fast_drain = 1'b0;
    for (int c = 0; c < 20000 && next_id < 500; c++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        int nb;
        nb = 0;
        for (int i = 0; i < 4; i++) nb += int'(slot_busy[i]);
        if (nb < 4) add_packet($urandom_range(1, 8), 0);
      end
    end
    wait (n_pkts_rx == next_id);
    check(n_pkts_rx == 500, $sformatf("%0d packets delivered", n_pkts_rx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
