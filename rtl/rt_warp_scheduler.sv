// rt_warp_scheduler: picks the warp of the warp buffer that is served this
// cycle.
//
// A warp can be served when it has a demand read and the memory access queue
// has room, or when it has a prefetch and the prefetch path is free. Among
// those warps the choice is round-robin, and the priority moves past the chosen
// warp whenever it actually issues something (advance), so a warp that keeps
// requesting cannot starve the others. Prefetches are only sent from the warp
// the scheduler has selected, as in the design.
//
// Interface: sel_valid/sel_warp are combinational from the request summaries
// and the registered priority pointer; the pointer updates at the clock edge.
// Round-robin order is this implementation's own choice (the design only says a
// warp is selected each cycle).
module rt_warp_scheduler #(
  parameter int unsigned NUM_WARPS = 4,
  parameter int unsigned WW        = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_WARPS-1:0] has_demand,
  input  logic [NUM_WARPS-1:0] has_prefetch,
  input  logic                 demand_room,
  input  logic                 prefetch_room,
  input  logic                 advance,
  output logic                 sel_valid,
  output logic [WW-1:0]        sel_warp
);

  logic [NUM_WARPS-1:0] can_issue;

  assign can_issue = (demand_room ? has_demand : '0) | (prefetch_room ? has_prefetch : '0);

  rr_arbiter #(.N(NUM_WARPS), .IW(WW)) u_rr (
    .clk, .rst_n,
    .req       (can_issue),
    .advance   (advance),
    .grant     (sel_valid),
    .grant_idx (sel_warp)
  );

endmodule
