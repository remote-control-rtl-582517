// rc_pkg: types and constants shared by the Remote Control (RC) deadlock
// avoidance logic of a chiplet.
//
// A flit is 64 bits wide, as in the evaluated network. Its first two bits say
// where it sits in its packet (head, body, tail, or a single-flit packet).
// Head flits carry the destination chiplet and node; the remaining bits are
// payload. The split of the 64 bits into fields is this design's own choice;
// only the total width follows the paper.
//
// OPIC request and response lines are 2 bits wide, as in the paper: each
// carries a count of 0..3 new requests (upwards) or new permissions
// (downwards) per cycle.
package rc_pkg;

  localparam int unsigned FLIT_W     = 64;  // flit and channel width
  localparam int unsigned OPIC_W     = 2;   // width of one OPIC REQ/RESP line
  localparam int unsigned OPIC_MAX   = (1 << OPIC_W) - 1;
  localparam int unsigned CHIPLET_W  = 4;   // destination chiplet id width
  localparam int unsigned NODE_W     = 6;   // destination node id width (up to 8x8)
  localparam int unsigned PAYLOAD_W  = FLIT_W - 2 - CHIPLET_W - NODE_W;

  typedef enum logic [1:0] {
    FLIT_BODY     = 2'b00,
    FLIT_HEAD     = 2'b01,
    FLIT_TAIL     = 2'b10,
    FLIT_HEADTAIL = 2'b11
  } flit_type_e;

  typedef struct packed {
    flit_type_e             ftype;
    logic [CHIPLET_W-1:0]   dst_chiplet;
    logic [NODE_W-1:0]      dst_node;
    logic [PAYLOAD_W-1:0]   payload;
  } flit_t;

  function automatic logic is_head(flit_t f);
    return f.ftype[0];
  endfunction

  function automatic logic is_tail(flit_t f);
    return f.ftype[1];
  endfunction

endpackage
