// ttp_rt_unit: the memory front end of a ray-tracing (RT) unit with the Tree
// Traversal Prefetcher (TTP).
//
// Every thread traversing the BVH keeps the addresses of the nodes it still has
// to visit on a traversal stack. The RT unit serves one warp per cycle: the
// thread at the front pops its next node and the node is read from memory,
// merged with every thread of the warp that wants the same node. TTP adds one
// small engine per thread that reads ahead on the same stack: after consecutive
// pops (the ray climbing back up the tree) the addresses already on the stack
// are exactly the nodes that will be read next, so they are prefetched without
// any address prediction. In breadth-first mode the stack is a queue and the N
// entries behind the head are prefetched after every pop.
//
// Structure (left to right):
//   warp_buffer          stacks, ray records, ray status, TTP FSM and
//                        pointer per thread
//   rt_warp_scheduler    round-robin choice of the warp served this cycle
//   demand path          demand_coalescer (inside warp_buffer) ->
//                        memory_access_queue -> sector_splitter
//   prefetch path        prefetch of the selected warp -> sector_splitter
//   prefetch_arbiter     demand sectors first, prefetch sectors in idle cycles
//   L1 port              one 32-byte sector request per cycle
//   response_fifo        demand sectors returned by the L1, in arrival order,
//                        waiting for the operation units
//
// Interfaces:
//   mode         DFS (LIFO stacks, FSM-driven distance) or BFS (FIFO queues,
//                fixed distance N); change only while every stack is empty.
//   upd_*        from the operation units (not part of this RTL): push a child
//                node address onto a thread's stack and/or mark the thread as
//                waiting for its next node; one update per cycle.
//   ray_wr_*     a ray entering the unit (from the SM's trace instruction):
//                writes the thread's ray ID and ray properties.
//   ray_rd_*     read of one thread's ray record by the operation units.
//   l1_*         sector requests to the L1 data cache (valid/ready), with kind
//                demand/prefetch, warp tag and, for demand, the lane mask of the
//                threads whose node it is.
//   l1_resp_*    demand sectors returned by the L1 (valid/ready), with the
//                request, lane mask and 32 bytes of data; they enter the
//                response FIFO. Prefetched sectors only fill the cache and are
//                not returned.
//   op_*         head of the response FIFO, to the operation units (not part
//                of this RTL), which test the node and then drive upd_*.
//   warp_done    every thread of the warp waits on an empty stack.
//
// Timing: a thread marked waiting can be popped in the next cycle; a popped
// node reaches the queue at the next edge, the splitter one cycle later and the
// L1 port one cycle after that, so the first sector of an uncontended demand
// read appears on l1_* three cycles after the pop, its sectors on consecutive
// cycles. A prefetch appears two cycles after it is taken from the stack.
//
// The split into warp buffer, warp scheduler, memory scheduler, memory access
// queue and a prefetcher beside it, the response FIFO, the per-thread FSM and
// pointer, demand priority and 32-byte sectoring follow the design. Queue and
// FIFO depths, stack depth, round-robin orders, node size, the response format
// and the update interface are this implementation's own choices.
//
// Lint notes: the prefetching lane and its FSM state, the splitters' last-sector
// flags, the queue levels and the arbiter's priority flag are internal status
// that nothing inside this block needs; they are kept as named nets for
// observation (the testbenches count events on them) rather than brought out as
// ports.
module ttp_rt_unit
  import ttp_pkg::*;
#(
  parameter int unsigned NUM_WARPS     = 4,
  parameter int unsigned WARP_SIZE     = 32,
  parameter int unsigned STACK_DEPTH   = 128,
  parameter int unsigned K1            = K_S1,
  parameter int unsigned K2            = K_S2,
  parameter int unsigned K3            = K_S3,
  parameter int unsigned N_BFS         = BFS_N,
  parameter int unsigned ARB_THRESHOLD = 0,
  parameter int unsigned MAQ_DEPTH     = 8,
  parameter int unsigned RESP_DEPTH    = 8,
  parameter int unsigned WW            = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  parameter int unsigned LW            = (WARP_SIZE > 1) ? $clog2(WARP_SIZE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  trav_mode_e           mode,
  // from the operation units
  input  logic                 upd_valid,
  input  logic [WW-1:0]        upd_warp,
  input  logic [LW-1:0]        upd_lane,
  input  logic                 upd_push,
  input  addr_t                upd_push_addr,
  input  logic                 upd_ready,
  // ray records: written when a ray enters, read by the operation units
  input  logic                 ray_wr_valid,
  input  logic [WW-1:0]        ray_wr_warp,
  input  logic [LW-1:0]        ray_wr_lane,
  input  ray_id_t              ray_wr_id,
  input  ray_props_t           ray_wr_props,
  input  logic [WW-1:0]        ray_rd_warp,
  input  logic [LW-1:0]        ray_rd_lane,
  output logic                 ray_rd_valid,
  output ray_id_t              ray_rd_id,
  output ray_props_t           ray_rd_props,
  // to the L1 data cache
  output logic                 l1_valid,
  output mem_req_t             l1_req,
  output logic [WARP_SIZE-1:0] l1_mask,
  input  logic                 l1_ready,
  // memory responses from the L1
  input  logic                 l1_resp_valid,
  input  mem_req_t             l1_resp_req,
  input  logic [WARP_SIZE-1:0] l1_resp_mask,
  input  sector_data_t         l1_resp_data,
  output logic                 l1_resp_ready,
  // to the operation units
  output logic                 op_valid,
  output mem_req_t             op_req,
  output logic [WARP_SIZE-1:0] op_mask,
  output sector_data_t         op_data,
  input  logic                 op_ready,
  // status
  output logic [NUM_WARPS-1:0] warp_done,
  output logic                 stack_full
);

  // ---------------- warp buffer and scheduler ----------------------------------
  logic                 sel_valid;
  logic [WW-1:0]        sel_warp;
  logic [NUM_WARPS-1:0] has_demand, has_prefetch;
  logic                 wb_dem_valid, wb_pf_valid;
  addr_t                wb_dem_addr, wb_pf_addr;
  logic [WARP_SIZE-1:0] wb_dem_mask;
  logic [LW-1:0]        wb_pf_lane;
  ttp_state_e           wb_pf_state;
  logic                 dem_take, pf_take;

  logic                 maq_in_ready;
  logic                 pfs_in_ready;

  warp_buffer #(
    .NUM_WARPS(NUM_WARPS), .WARP_SIZE(WARP_SIZE), .DEPTH(STACK_DEPTH),
    .K1(K1), .K2(K2), .K3(K3), .N_BFS(N_BFS)
  ) u_warp_buffer (
    .clk, .rst_n, .mode,
    .upd_valid, .upd_warp, .upd_lane, .upd_push, .upd_push_addr, .upd_ready,
    .ray_wr_valid, .ray_wr_warp, .ray_wr_lane, .ray_wr_id, .ray_wr_props,
    .ray_rd_warp, .ray_rd_lane, .ray_rd_valid, .ray_rd_id, .ray_rd_props,
    .sel_warp     (sel_warp),
    .dem_valid    (wb_dem_valid),
    .dem_addr     (wb_dem_addr),
    .dem_mask     (wb_dem_mask),
    .dem_take     (dem_take),
    .pf_valid     (wb_pf_valid),
    .pf_addr      (wb_pf_addr),
    .pf_lane      (wb_pf_lane),
    .pf_state     (wb_pf_state),
    .pf_take      (pf_take),
    .has_demand   (has_demand),
    .has_prefetch (has_prefetch),
    .done         (warp_done),
    .any_full     (stack_full)
  );

  rt_warp_scheduler #(.NUM_WARPS(NUM_WARPS), .WW(WW)) u_sched (
    .clk, .rst_n,
    .has_demand    (has_demand),
    .has_prefetch  (has_prefetch),
    .demand_room   (maq_in_ready),
    .prefetch_room (pfs_in_ready),
    .advance       (dem_take || pf_take),
    .sel_valid     (sel_valid),
    .sel_warp      (sel_warp)
  );

  assign dem_take = sel_valid && wb_dem_valid && maq_in_ready;
  assign pf_take  = sel_valid && wb_pf_valid && pfs_in_ready;

  // ---------------- demand path --------------------------------------------------
  mem_req_t             dem_node_req;
  mem_req_t             maq_out_req;
  logic [WARP_SIZE-1:0] maq_out_mask;
  logic                 maq_out_valid, dms_in_ready;
  logic                 dms_valid, dms_ready, dms_last;
  mem_req_t             dms_req;
  logic [WARP_SIZE-1:0] dms_mask;
  logic [$clog2(MAQ_DEPTH+1)-1:0] maq_level;

  always_comb begin
    dem_node_req      = '0;
    dem_node_req.addr = wb_dem_addr;
    dem_node_req.kind = REQ_DEMAND;
    dem_node_req.warp = WARP_TAG_W'(sel_warp);
  end

  memory_access_queue #(.LANES(WARP_SIZE), .DEPTH(MAQ_DEPTH)) u_maq (
    .clk, .rst_n,
    .in_valid  (dem_take),
    .in_req    (dem_node_req),
    .in_mask   (wb_dem_mask),
    .in_ready  (maq_in_ready),
    .out_valid (maq_out_valid),
    .out_req   (maq_out_req),
    .out_mask  (maq_out_mask),
    .out_ready (dms_in_ready),
    .level     (maq_level)
  );

  sector_splitter #(.LANES(WARP_SIZE)) u_dem_split (
    .clk, .rst_n,
    .in_valid  (maq_out_valid),
    .in_req    (maq_out_req),
    .in_mask   (maq_out_mask),
    .in_ready  (dms_in_ready),
    .out_valid (dms_valid),
    .out_req   (dms_req),
    .out_mask  (dms_mask),
    .out_last  (dms_last),
    .out_ready (dms_ready)
  );

  // ---------------- prefetch path ------------------------------------------------
  mem_req_t             pf_node_req;
  logic                 pfs_valid, pfs_ready, pfs_last;
  mem_req_t             pfs_req;
  logic [WARP_SIZE-1:0] pfs_mask;

  always_comb begin
    pf_node_req      = '0;
    pf_node_req.addr = wb_pf_addr;
    pf_node_req.kind = REQ_PREFETCH;
    pf_node_req.warp = WARP_TAG_W'(sel_warp);
  end

  sector_splitter #(.LANES(WARP_SIZE)) u_pf_split (
    .clk, .rst_n,
    .in_valid  (pf_take),
    .in_req    (pf_node_req),
    .in_mask   ('0),
    .in_ready  (pfs_in_ready),
    .out_valid (pfs_valid),
    .out_req   (pfs_req),
    .out_mask  (pfs_mask),
    .out_last  (pfs_last),
    .out_ready (pfs_ready)
  );

  // ---------------- arbitration at the L1 port ------------------------------------
  logic pf_priority;

  prefetch_arbiter #(.LANES(WARP_SIZE), .THRESHOLD(ARB_THRESHOLD)) u_arb (
    .clk, .rst_n,
    .dem_valid   (dms_valid),
    .dem_req     (dms_req),
    .dem_mask    (dms_mask),
    .dem_ready   (dms_ready),
    .pf_valid    (pfs_valid),
    .pf_req      (pfs_req),
    .pf_ready    (pfs_ready),
    .out_valid   (l1_valid),
    .out_req     (l1_req),
    .out_mask    (l1_mask),
    .out_ready   (l1_ready),
    .pf_priority (pf_priority)
  );

  // ---------------- responses to the operation units --------------------------------
  logic [$clog2(RESP_DEPTH+1)-1:0] resp_level;

  response_fifo #(.LANES(WARP_SIZE), .DEPTH(RESP_DEPTH)) u_resp_fifo (
    .clk, .rst_n,
    .in_valid  (l1_resp_valid),
    .in_req    (l1_resp_req),
    .in_mask   (l1_resp_mask),
    .in_data   (l1_resp_data),
    .in_ready  (l1_resp_ready),
    .out_valid (op_valid),
    .out_req   (op_req),
    .out_mask  (op_mask),
    .out_data  (op_data),
    .out_ready (op_ready),
    .level     (resp_level)
  );

endmodule
