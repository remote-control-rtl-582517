// rc_soc: Remote Control logic of the whole modular SoC.
//
// The system is a set of chiplets on an active interposer: NUM_GPU GPU
// chiplets, each a GPU_DIM x GPU_DIM mesh with four boundary routers, and one
// CPU chiplet, a CPU_DIM x CPU_DIM mesh with four boundary routers. Every
// boundary router sits above an interposer router. This module holds one
// rc_chiplet per chiplet, each with its own chiplet id, so that every chiplet
// polices its own outbound traffic and no cycle of waiting can close through
// the interposer.
//
// How it works: each chiplet is independent, as Remote Control needs no
// exchange of information between chiplets. The boundary routers and OPIC
// trees of a chiplet follow from its size (row-major node numbers):
//   2x2: all four nodes are boundaries, each its own one-block tree, so a
//        node's own NI reserves slots in its own router's rc_buffer;
//   4x4: boundaries 1, 2, 13, 14, each serving the three other nodes of its
//        2x2 quadrant directly (grant in 2 cycles);
//   8x8: boundaries 2, 5, 58, 61; the tree of node 2 is the printed example
//        (2 -> 0,1,3,9,10,11,18; 0 -> 8,16; 9 -> 17,25; 11 -> 19,27;
//        18 -> 26; 25 -> 24), the other three are its mirror images, so each
//        quadrant has a three-level tree (grants in 2, 4 or 6 cycles).
//
// Interface: all ports are flat arrays over the whole system. Node g is node
// (g mod G) of GPU chiplet (g div G), G = GPU_DIM^2, for g < G*NUM_GPU, and
// node g - G*NUM_GPU of the CPU chiplet after that. Boundary port j is
// boundary (j mod 4) of chiplet (j div 4), the CPU chiplet last. Chiplet ids
// are 0..NUM_GPU-1 for the GPU chiplets and NUM_GPU for the CPU chiplet; a
// flit whose dst_chiplet differs from its source's id is outbound. The
// chiplet routers, the interposer routers and the memory system attach
// through these ports (see rc_chiplet for the meaning of each group). Timing
// is that of rc_chiplet.
//
// The defaults are the paper's main configuration: four 4x4 GPU chiplets and
// one 2x2 CPU chiplet (68 nodes), rc_buffers of 4 packets, 8-flit packets,
// 2 VCs of 4 flits. NUM_GPU = 8 gives the 132-node system of 4x4 chiplets,
// GPU_DIM = 8 with CPU_DIM = 2 or 4 the systems of 8x8 chiplets. The quadrant
// trees of the 4x4 chiplet, the mirrored trees of the 8x8 chiplet and the
// numbering of nodes, ports and chiplet ids are this design's choices.
module rc_soc
  import rc_pkg::*;
#(
  parameter int unsigned NUM_GPU   = 4,   // GPU chiplets
  parameter int unsigned GPU_DIM   = 4,   // GPU chiplet mesh side: 4 or 8
  parameter int unsigned CPU_DIM   = 2,   // CPU chiplet mesh side: 2, 4 or 8
  parameter int unsigned RCB_PKTS  = 4,
  parameter int unsigned PKT_FLITS = 8,
  parameter int unsigned NUM_SRC   = 10,
  parameter int unsigned NUM_VC    = 2,
  parameter int unsigned VC_DEPTH  = 4,
  parameter int unsigned QDEPTH    = 16,
  localparam int unsigned GPU_NODES = GPU_DIM * GPU_DIM,
  localparam int unsigned CPU_NODES = CPU_DIM * CPU_DIM,
  localparam int unsigned BND_PER   = 4,   // boundaries per chiplet, GPU and CPU alike
  localparam int unsigned NODES_ALL = NUM_GPU * GPU_NODES + CPU_NODES,
  localparam int unsigned BND_ALL   = (NUM_GPU + 1) * BND_PER,
  localparam int unsigned SRC_W     = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1,
  localparam int unsigned VC_W      = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             core_valid_i  [NODES_ALL],
  input  flit_t            core_flit_i   [NODES_ALL],
  output logic             core_ready_o  [NODES_ALL],
  output logic             inj_valid_o   [NODES_ALL],
  output flit_t            inj_flit_o    [NODES_ALL],
  input  logic             inj_ready_i   [NODES_ALL],
  input  logic             rcb_valid_i   [BND_ALL],
  input  flit_t            rcb_flit_i    [BND_ALL],
  input  logic [SRC_W-1:0] rcb_src_i     [BND_ALL],
  output logic             link_valid_o  [BND_ALL],
  output flit_t            link_flit_o   [BND_ALL],
  output logic [VC_W-1:0]  link_vc_o     [BND_ALL],
  input  logic             credit_valid_i[BND_ALL],
  input  logic [VC_W-1:0]  credit_vc_i   [BND_ALL]
);

  // Boundary b of a DIM x DIM chiplet.
  function automatic int unsigned bnd_node(int unsigned dim, int unsigned b);
    case (dim)
      2:       return b;
      4:       return (b == 0) ? 1 : (b == 1) ? 2 : (b == 2) ? 13 : 14;
      default: return (b == 0) ? 2 : (b == 1) ? 5 : (b == 2) ? 58 : 61;
    endcase
  endfunction

  // OPIC parent in the top-left quadrant of an 8x8 chiplet (printed tree).
  function automatic int unsigned q8_parent(int unsigned i);
    case (i)
      0, 1, 3, 9, 10, 11, 18: return 2;
      8, 16:                  return 0;
      17, 25:                 return 9;
      19, 27:                 return 11;
      26:                     return 18;
      24:                     return 25;
      default:                return i;
    endcase
  endfunction

  // OPIC parent of node i in a DIM x DIM chiplet.
  function automatic int unsigned parent_of(int unsigned dim, int unsigned i);
    int unsigned r, c, h, p, pr, pc;
    r = i / dim;
    c = i % dim;
    h = dim / 2;
    case (dim)
      2:       return i;
      4:       return ((r < h) ? 0 : 3) * 4 + ((c < h) ? 1 : 2);
      default: begin
        // mirror into the top-left quadrant, look up, mirror back
        p  = q8_parent(((r < h) ? r : dim - 1 - r) * dim + ((c < h) ? c : dim - 1 - c));
        pr = p / dim;
        pc = p % dim;
        return ((r < h) ? pr : dim - 1 - pr) * dim + ((c < h) ? pc : dim - 1 - pc);
      end
    endcase
  endfunction

  typedef int unsigned bnd_t  [BND_PER];
  typedef int unsigned gpar_t [GPU_NODES];
  typedef int unsigned cpar_t [CPU_NODES];
  function automatic bnd_t bnd_table(int unsigned dim);
    bnd_t t;
    for (int unsigned b = 0; b < BND_PER; b++) t[b] = bnd_node(dim, b);
    return t;
  endfunction
  function automatic gpar_t gpu_parents();
    gpar_t t;
    for (int unsigned i = 0; i < GPU_NODES; i++) t[i] = parent_of(GPU_DIM, i);
    return t;
  endfunction
  function automatic cpar_t cpu_parents();
    cpar_t t;
    for (int unsigned i = 0; i < CPU_NODES; i++) t[i] = parent_of(CPU_DIM, i);
    return t;
  endfunction

  localparam bnd_t  GPU_BND    = bnd_table(GPU_DIM);
  localparam gpar_t GPU_PARENT = gpu_parents();
  localparam bnd_t  CPU_BND    = bnd_table(CPU_DIM);
  localparam cpar_t CPU_PARENT = cpu_parents();

  // One chiplet: NN nodes from global node N0, four boundaries from global
  // boundary port B0.
  for (genvar k = 0; k <= NUM_GPU; k++) begin : g_chiplet
    localparam bit          IS_GPU = (k < NUM_GPU);
    localparam int unsigned NN     = IS_GPU ? GPU_NODES : CPU_NODES;
    localparam int unsigned N0     = k * GPU_NODES;
    localparam int unsigned B0     = k * BND_PER;

    logic             core_valid [NN];
    flit_t            core_flit  [NN];
    logic             core_ready [NN];
    logic             inj_valid  [NN];
    flit_t            inj_flit   [NN];
    logic             inj_ready  [NN];
    logic             rcb_valid  [BND_PER];
    flit_t            rcb_flit   [BND_PER];
    logic [SRC_W-1:0] rcb_src    [BND_PER];
    logic             link_valid [BND_PER];
    flit_t            link_flit  [BND_PER];
    logic [VC_W-1:0]  link_vc    [BND_PER];
    logic             cr_valid   [BND_PER];
    logic [VC_W-1:0]  cr_vc      [BND_PER];

    for (genvar n = 0; n < NN; n++) begin : g_node
      assign core_valid[n]       = core_valid_i[N0 + n];
      assign core_flit[n]        = core_flit_i[N0 + n];
      assign core_ready_o[N0 + n] = core_ready[n];
      assign inj_valid_o[N0 + n]  = inj_valid[n];
      assign inj_flit_o[N0 + n]   = inj_flit[n];
      assign inj_ready[n]        = inj_ready_i[N0 + n];
    end
    for (genvar b = 0; b < BND_PER; b++) begin : g_port
      assign rcb_valid[b]         = rcb_valid_i[B0 + b];
      assign rcb_flit[b]          = rcb_flit_i[B0 + b];
      assign rcb_src[b]           = rcb_src_i[B0 + b];
      assign link_valid_o[B0 + b] = link_valid[b];
      assign link_flit_o[B0 + b]  = link_flit[b];
      assign link_vc_o[B0 + b]    = link_vc[b];
      assign cr_valid[b]          = credit_valid_i[B0 + b];
      assign cr_vc[b]             = credit_vc_i[B0 + b];
    end

    if (IS_GPU) begin : g_gpu
      rc_chiplet #(
        .NODES     (GPU_NODES),
        .NUM_BND   (BND_PER),
        .BND_NODE  (GPU_BND),
        .PARENT    (GPU_PARENT),
        .RCB_PKTS  (RCB_PKTS),
        .PKT_FLITS (PKT_FLITS),
        .NUM_SRC   (NUM_SRC),
        .NUM_VC    (NUM_VC),
        .VC_DEPTH  (VC_DEPTH),
        .QDEPTH    (QDEPTH)
      ) u_chiplet (
        .clk            (clk),
        .rst_n          (rst_n),
        .my_chiplet_i   (CHIPLET_W'(k)),
        .core_valid_i   (core_valid),
        .core_flit_i    (core_flit),
        .core_ready_o   (core_ready),
        .inj_valid_o    (inj_valid),
        .inj_flit_o     (inj_flit),
        .inj_ready_i    (inj_ready),
        .rcb_valid_i    (rcb_valid),
        .rcb_flit_i     (rcb_flit),
        .rcb_src_i      (rcb_src),
        .link_valid_o   (link_valid),
        .link_flit_o    (link_flit),
        .link_vc_o      (link_vc),
        .credit_valid_i (cr_valid),
        .credit_vc_i    (cr_vc)
      );
    end else begin : g_cpu
      // in the default 2x2 CPU chiplet every node is a boundary and its own
      // OPIC root
      rc_chiplet #(
        .NODES     (CPU_NODES),
        .NUM_BND   (BND_PER),
        .BND_NODE  (CPU_BND),
        .PARENT    (CPU_PARENT),
        .RCB_PKTS  (RCB_PKTS),
        .PKT_FLITS (PKT_FLITS),
        .NUM_SRC   (NUM_SRC),
        .NUM_VC    (NUM_VC),
        .VC_DEPTH  (VC_DEPTH),
        .QDEPTH    (QDEPTH)
      ) u_chiplet (
        .clk            (clk),
        .rst_n          (rst_n),
        .my_chiplet_i   (CHIPLET_W'(k)),
        .core_valid_i   (core_valid),
        .core_flit_i    (core_flit),
        .core_ready_o   (core_ready),
        .inj_valid_o    (inj_valid),
        .inj_flit_o     (inj_flit),
        .inj_ready_i    (inj_ready),
        .rcb_valid_i    (rcb_valid),
        .rcb_flit_i     (rcb_flit),
        .rcb_src_i      (rcb_src),
        .link_valid_o   (link_valid),
        .link_flit_o    (link_flit),
        .link_vc_o      (link_vc),
        .credit_valid_i (cr_valid),
        .credit_vc_i    (cr_vc)
      );
    end
  end

endmodule
