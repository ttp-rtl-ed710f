// ttp_pkg: types and constants shared by the Tree Traversal Prefetcher (TTP)
// RT-unit front end.
//
// The state encoding S0..S3 and the per-state prefetch counts 0/1/2/16 follow
// the pop-streak state machine of the design; the BFS prefetch distance N = 4 is
// the value the design settles on for BFS. The 32-byte sector size is the cache
// sector size the prefetch requests are split into. The 32-bit node address and
// the 64-byte node size are this implementation's own choices (the source design
// gives neither). The ray property field, origin and direction as three 32-bit
// components each (192 bits), follows the design's ray buffer; the 16-bit ray ID
// is this implementation's own width.
package ttp_pkg;

  // Node (byte) address held in the traversal stacks.
  localparam int unsigned ADDR_W = 32;
  typedef logic [ADDR_W-1:0] addr_t;

  // Cache sector size: larger node requests are split into sectors of this size.
  localparam int unsigned SECTOR_BYTES = 32;
  // Data of one sector as returned by the L1.
  typedef logic [SECTOR_BYTES*8-1:0] sector_data_t;
  // BVH node size in bytes (own choice).
  localparam int unsigned NODE_BYTES = 64;

  // Prefetch distance per FSM state (pop-streak intensity "1-2-16").
  localparam int unsigned K_S1 = 1;
  localparam int unsigned K_S2 = 2;
  localparam int unsigned K_S3 = 16;
  // BFS prefetch distance N.
  localparam int unsigned BFS_N = 4;

  // Traversal order of a stack: LIFO for depth-first, FIFO for breadth-first.
  typedef enum logic {
    TRAV_DFS = 1'b0,
    TRAV_BFS = 1'b1
  } trav_mode_e;

  // Pop-streak state: S0 after a push, S1/S2/S3 after 1/2/3+ consecutive pops.
  typedef enum logic [1:0] {
    ST_S0 = 2'd0,
    ST_S1 = 2'd1,
    ST_S2 = 2'd2,
    ST_S3 = 2'd3
  } ttp_state_e;

  // Kind of a request leaving the RT unit.
  typedef enum logic {
    REQ_DEMAND   = 1'b0,
    REQ_PREFETCH = 1'b1
  } req_kind_e;

  // Per-thread ray record kept in the warp buffer next to the traversal stack.
  localparam int unsigned RAY_ID_W = 16;
  typedef logic [RAY_ID_W-1:0] ray_id_t;
  typedef struct packed {
    logic [2:0][31:0] origin;     // x, y, z
    logic [2:0][31:0] direction;  // x, y, z
  } ray_props_t;

  // Width of the warp tag carried with a request (enough for 256 warps).
  localparam int unsigned WARP_TAG_W = 8;

  // A node or sector read request. The lane mask of a demand request travels
  // next to it, since its width is a module parameter.
  typedef struct packed {
    addr_t                 addr;
    req_kind_e             kind;
    logic [WARP_TAG_W-1:0] warp;
  } mem_req_t;

endpackage
