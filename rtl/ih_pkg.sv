// ih_pkg: types and constants shared by the cluster-isolation hardware of the
// secure multicore.
//
// The multicore is a square 2-D mesh of tiles (core, private cache, shared-cache
// slice, router). The 64 used tiles are arranged 8 x 8; tile id = y*MESH_X + x,
// row 0 at the top next to memory controllers MC0 and MC1, the last row at the
// bottom next to MC2 and MC3. Every tile, memory controller and DRAM region
// belongs to exactly one of two clusters: secure or insecure. The core count
// (64) and the four controllers follow the prototype the design was evaluated
// on; the 8 x 8 arrangement, the address widths, the page and line sizes and
// the packet format are this design's own choices.
package ih_pkg;

  localparam int unsigned MESH_X    = 8;
  localparam int unsigned MESH_Y    = 8;
  localparam int unsigned NUM_TILES = MESH_X * MESH_Y;
  localparam int unsigned XW        = $clog2(MESH_X);
  localparam int unsigned YW        = $clog2(MESH_Y);
  localparam int unsigned TW        = $clog2(NUM_TILES);

  localparam int unsigned NUM_MC      = 4;   // memory controllers MC0..MC3
  localparam int unsigned NUM_REGIONS = 4;   // physically isolated DRAM regions
  localparam int unsigned RW          = $clog2(NUM_REGIONS);

  localparam int unsigned PADDR_W    = 40;   // physical address bits
  localparam int unsigned WORD_W     = 64;   // core data word
  localparam int unsigned LINE_BYTES = 64;   // cache line
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned PAGE_BITS  = 16;   // 64 KB pages

  // Cluster a resource belongs to.
  typedef enum logic {CL_INSECURE = 1'b0, CL_SECURE = 1'b1} cluster_e;

  // Mesh port numbering of a router.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0, P_NORTH = 3'd1, P_SOUTH = 3'd2, P_EAST = 3'd3, P_WEST = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // Single-flit network packet.
  typedef struct packed {
    logic [XW-1:0]     dst_x;
    logic [YW-1:0]     dst_y;
    logic [XW-1:0]     src_x;
    logic [YW-1:0]     src_y;
    logic              yx_first;  // 1: route Y then X; 0: X then Y
    logic              ipc;       // interaction traffic, allowed to cross clusters
    cluster_e          src_cl;    // cluster of the sending tile
    logic [WORD_W-1:0] payload;
  } flit_t;

  // Memory request from a core (into the access check and the L1).
  typedef struct packed {
    logic [PADDR_W-1:0] addr;
    logic               we;
    logic [WORD_W-1:0]  wdata;
    logic               spec;     // issued on an unresolved (speculative) path
  } core_req_t;

  // Line-granular memory request (L1 refill / write-back, L2 miss to a controller).
  typedef struct packed {
    logic [PADDR_W-1:0] addr;
    logic               we;
    logic [LINE_W-1:0]  wdata;
    cluster_e           cl;       // cluster that issued the request
  } mem_req_t;

  function automatic logic [RW-1:0] region_of(input logic [PADDR_W-1:0] a);
    return a[PADDR_W-1 -: RW];
  endfunction

endpackage
