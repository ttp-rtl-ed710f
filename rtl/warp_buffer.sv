// warp_buffer: the per-thread traversal state of every warp in the RT unit,
// with TTP added.
//
// For each of NUM_WARPS x WARP_SIZE threads it holds a traversal_stack, the
// thread's ray status (one bit: waiting for its next node) and a
// ttp_thread_prefetcher (the 2-bit FSM plus the prefetch pointer). For the one
// warp chosen by the RT warp scheduler it offers two requests:
//   * a demand read: demand_coalescer picks the lowest waiting thread with a
//     non-empty stack and merges every waiting thread of that warp whose next
//     node is the same; dem_take pops all of them and clears their waiting bit;
//   * a prefetch: a round-robin choice among the warp's threads whose prefetcher
//     asks for one; the address is read from that thread's stack at the
//     pointer's position; pf_take moves that thread's pointer on.
// Per-warp summaries (has_demand, has_prefetch, done) feed the scheduler.
//
// Each thread also has a ray record: ray ID and ray properties (origin and
// direction). ray_wr_* writes it when a ray enters the unit with the trace
// instruction; ray_rd_* reads one thread's record combinationally for the
// operation units, which test the fetched node against that ray. ray_rd_valid
// is low for a thread that has had no ray written since reset, and the data
// read out is then zero.
//
// The update port is driven by the operation units after a node has been
// tested: upd_push writes a child address onto the thread's stack, upd_ready
// marks the thread as waiting for its next node (both may come in one cycle;
// the push lands first). One update per cycle for the whole buffer.
//
// Timing: all outputs are combinational from registered state and the select
// inputs; pops, pushes and pointer moves take effect at the clock edge. A thread
// is popped only while it is waiting, and pushed only while it is not, so push
// and pop never meet in one stack (asserted in traversal_stack).
//
// Holding the stacks, the ray ID, the ray properties and the FSM field per
// thread follows the design. Stack depth, the one-bit ray status, the ID width,
// the single update port and the separate ray write and read ports are this
// implementation's own choices.
module warp_buffer
  import ttp_pkg::*;
#(
  parameter int unsigned NUM_WARPS = 4,
  parameter int unsigned WARP_SIZE = 32,
  parameter int unsigned DEPTH     = 128,
  parameter int unsigned K1        = K_S1,
  parameter int unsigned K2        = K_S2,
  parameter int unsigned K3        = K_S3,
  parameter int unsigned N_BFS     = BFS_N,
  parameter int unsigned WW        = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  parameter int unsigned LW        = (WARP_SIZE > 1) ? $clog2(WARP_SIZE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  trav_mode_e           mode,
  // update port from the operation units
  input  logic                 upd_valid,
  input  logic [WW-1:0]        upd_warp,
  input  logic [LW-1:0]        upd_lane,
  input  logic                 upd_push,
  input  addr_t                upd_push_addr,
  input  logic                 upd_ready,
  // ray record write (ray entering the unit) and read (for the operation units)
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
  // selected warp
  input  logic [WW-1:0]        sel_warp,
  // demand request of the selected warp
  output logic                 dem_valid,
  output addr_t                dem_addr,
  output logic [WARP_SIZE-1:0] dem_mask,
  input  logic                 dem_take,
  // prefetch request of the selected warp
  output logic                 pf_valid,
  output addr_t                pf_addr,
  output logic [LW-1:0]        pf_lane,
  output ttp_state_e           pf_state,
  input  logic                 pf_take,
  // per-warp summaries
  output logic [NUM_WARPS-1:0] has_demand,
  output logic [NUM_WARPS-1:0] has_prefetch,
  output logic [NUM_WARPS-1:0] done,
  output logic                 any_full
);

  localparam int unsigned IW = $clog2(DEPTH);

  addr_t         tops     [NUM_WARPS][WARP_SIZE];
  addr_t         rd_addr  [NUM_WARPS][WARP_SIZE];
  logic [IW-1:0] pf_pos   [NUM_WARPS][WARP_SIZE];
  ttp_state_e    state    [NUM_WARPS][WARP_SIZE];
  logic [NUM_WARPS-1:0][WARP_SIZE-1:0] waiting_q, empty, full, pf_req, eligible;
  logic [NUM_WARPS-1:0][WARP_SIZE-1:0] push_v, pop_v, ack_v;
  logic [NUM_WARPS-1:0]                pf_any;
  logic [LW-1:0]                       pf_grant_idx [NUM_WARPS];

  // ray records: the data is a plain memory, its valid bits are reset
  ray_id_t                             ray_id_mem    [NUM_WARPS][WARP_SIZE];
  ray_props_t                          ray_props_mem [NUM_WARPS][WARP_SIZE];
  logic [NUM_WARPS-1:0][WARP_SIZE-1:0] ray_valid_q;

  always_ff @(posedge clk) begin
    if (ray_wr_valid) begin
      ray_id_mem[ray_wr_warp][ray_wr_lane]    <= ray_wr_id;
      ray_props_mem[ray_wr_warp][ray_wr_lane] <= ray_wr_props;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ray_valid_q <= '0;
    end else if (ray_wr_valid) begin
      ray_valid_q[ray_wr_warp][ray_wr_lane] <= 1'b1;
    end
  end

  assign ray_rd_valid = ray_valid_q[ray_rd_warp][ray_rd_lane];
  assign ray_rd_id    = ray_rd_valid ? ray_id_mem[ray_rd_warp][ray_rd_lane]    : '0;
  assign ray_rd_props = ray_rd_valid ? ray_props_mem[ray_rd_warp][ray_rd_lane] : '0;

  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_warp
    for (genvar l = 0; l < WARP_SIZE; l++) begin : g_lane
      logic [IW:0] count;

      assign push_v[w][l] = upd_valid && upd_push && (upd_warp == WW'(w)) && (upd_lane == LW'(l));
      assign pop_v[w][l]  = dem_take && (sel_warp == WW'(w)) && dem_mask[l];
      assign ack_v[w][l]  = pf_take && (sel_warp == WW'(w)) && (pf_lane == LW'(l));
      assign eligible[w][l] = waiting_q[w][l] && !empty[w][l];

      traversal_stack #(.DEPTH(DEPTH)) u_stack (
        .clk, .rst_n, .mode,
        .push      (push_v[w][l]),
        .push_addr (upd_push_addr),
        .pop       (pop_v[w][l]),
        .top_addr  (tops[w][l]),
        .count     (count),
        .empty     (empty[w][l]),
        .full      (full[w][l]),
        .rd_pos    (pf_pos[w][l]),
        .rd_addr   (rd_addr[w][l])
      );

      ttp_thread_prefetcher #(
        .DEPTH(DEPTH), .K1(K1), .K2(K2), .K3(K3), .N_BFS(N_BFS)
      ) u_pf (
        .clk, .rst_n, .mode,
        .push     (push_v[w][l]),
        .pop      (pop_v[w][l]),
        .count    (count),
        .state    (state[w][l]),
        .pf_valid (pf_req[w][l]),
        .pf_pos   (pf_pos[w][l]),
        .pf_ack   (ack_v[w][l])
      );

      always_ff @(posedge clk) begin
        if (!rst_n) begin
          waiting_q[w][l] <= 1'b0;
        end else if (upd_valid && upd_ready && upd_warp == WW'(w) && upd_lane == LW'(l)) begin
          waiting_q[w][l] <= 1'b1;
        end else if (pop_v[w][l]) begin
          waiting_q[w][l] <= 1'b0;
        end
      end
    end

    rr_arbiter #(.N(WARP_SIZE), .IW(LW)) u_lane_rr (
      .clk, .rst_n,
      .req       (pf_req[w]),
      .advance   (pf_take && sel_warp == WW'(w)),
      .grant     (pf_any[w]),
      .grant_idx (pf_grant_idx[w])
    );

    assign has_demand[w]   = |eligible[w];
    assign has_prefetch[w] = pf_any[w];
    // a warp is done when every thread waits on an empty stack
    assign done[w]         = &(waiting_q[w] & empty[w]);
  end

  assign any_full = |full;

  demand_coalescer #(.LANES(WARP_SIZE)) u_coalesce (
    .eligible  (eligible[sel_warp]),
    .tops      (tops[sel_warp]),
    .valid     (dem_valid),
    .addr      (dem_addr),
    .lane_mask (dem_mask)
  );

  assign pf_valid = pf_any[sel_warp];
  assign pf_lane  = pf_grant_idx[sel_warp];
  assign pf_addr  = rd_addr[sel_warp][pf_lane];
  assign pf_state = state[sel_warp][pf_lane];

  a_push_not_waiting: assert property (@(posedge clk) disable iff (!rst_n)
      (upd_valid && upd_push) |-> !waiting_q[upd_warp][upd_lane])
    else $error("warp_buffer: push to a thread that is already waiting for a node");
  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n)
      (!dem_take || dem_valid) && (!pf_take || pf_valid))
    else $error("warp_buffer: take without a request");

endmodule
