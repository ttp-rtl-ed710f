// prefetch_arbiter: shares the RT unit's port to the L1 data cache between
// demand sectors and prefetch sectors.
//
// Default policy (THRESHOLD = 0): a demand sector always wins; a prefetch sector
// is sent only in a cycle with no demand sector waiting. With THRESHOLD > 0 the
// arbiter counts the cycles since the last prefetch was sent; once THRESHOLD
// cycles have passed, a waiting prefetch wins over demand for one sector. The
// design evaluates thresholds of 25, 50 and 100 cycles as alternatives to
// plain demand priority, which is its default and this block's default.
//
// Interface: valid/ready on both inputs and on the output; the output payload is
// a mem_req_t plus the demand lane mask (zero for prefetches). The choice is
// combinational; only the cycle counter is registered (saturating, reset to 0).
// A 16-bit counter is this implementation's own choice. With the default
// THRESHOLD = 0 the pf_priority output is constant 0 and the counter is unused
// logic that synthesis removes.
module prefetch_arbiter
  import ttp_pkg::*;
#(
  parameter int unsigned LANES     = 32,
  parameter int unsigned THRESHOLD = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             dem_valid,
  input  mem_req_t         dem_req,
  input  logic [LANES-1:0] dem_mask,
  output logic             dem_ready,
  input  logic             pf_valid,
  input  mem_req_t         pf_req,
  output logic             pf_ready,
  output logic             out_valid,
  output mem_req_t         out_req,
  output logic [LANES-1:0] out_mask,
  input  logic             out_ready,
  output logic             pf_priority
);

  logic [15:0] since_pf_q;
  logic        pick_pf;

  assign pf_priority = (THRESHOLD != 0) && (since_pf_q >= 16'(THRESHOLD));
  assign pick_pf     = pf_valid && (!dem_valid || pf_priority);

  assign out_valid = dem_valid || pf_valid;
  assign out_req   = pick_pf ? pf_req : dem_req;
  assign out_mask  = pick_pf ? '0 : dem_mask;
  assign dem_ready = out_ready && !pick_pf;
  assign pf_ready  = out_ready && pick_pf;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      since_pf_q <= '0;
    end else if (pf_valid && pf_ready) begin
      since_pf_q <= '0;
    end else if (since_pf_q != '1) begin
      since_pf_q <= since_pf_q + 1'b1;
    end
  end

  a_kind: assert property (@(posedge clk) disable iff (!rst_n)
      (!pf_valid || pf_req.kind == REQ_PREFETCH) && (!dem_valid || dem_req.kind == REQ_DEMAND))
    else $error("prefetch_arbiter: request on the wrong input");

endmodule
