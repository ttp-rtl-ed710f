// response_fifo: the RT unit's FIFO of memory responses waiting for the
// operation units.
//
// Demand sectors returned by the L1 data cache are written in arrival order,
// each with its request (sector address, kind, warp tag), the mask of the
// threads whose node it belongs to and the 32-byte sector data. The operation
// units (intersection and transform units) take them from the head in the same
// order. A circular buffer of DEPTH entries with read and write pointers and a
// count; a write and a read may happen in the same cycle, also when full.
//
// Interface: in_valid/in_ready from the L1 side, out_valid/out_ready towards
// the operation units; out_* shows the oldest entry (combinational from
// registers), an accepted write is visible one cycle later. in_ready low is the
// back-pressure that holds the L1 response. Reset (synchronous, active low)
// empties the FIFO.
//
// A response FIFO between the memory hierarchy and the operation units follows
// the design. Its depth (8), the entry format (one sector per entry) and the
// rule that only demand sectors are returned (a prefetch only fills the cache)
// are this implementation's own choices; the last one is asserted.
module response_fifo
  import ttp_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  mem_req_t         in_req,
  input  logic [LANES-1:0] in_mask,
  input  sector_data_t     in_data,
  output logic             in_ready,
  output logic             out_valid,
  output mem_req_t         out_req,
  output logic [LANES-1:0] out_mask,
  output sector_data_t     out_data,
  input  logic             out_ready,
  output logic [AW:0]      level
);

  mem_req_t         req_mem  [DEPTH];
  logic [LANES-1:0] mask_mem [DEPTH];
  sector_data_t     data_mem [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;
  logic [AW:0]      cnt_q;
  logic             do_wr, do_rd;

  assign out_valid = (cnt_q != '0);
  assign in_ready  = (cnt_q != (AW+1)'(DEPTH)) || out_ready;
  assign do_rd     = out_valid && out_ready;
  assign do_wr     = in_valid && in_ready;
  assign out_req   = req_mem[rd_q];
  assign out_mask  = mask_mem[rd_q];
  assign out_data  = data_mem[rd_q];
  assign level     = cnt_q;

  always_ff @(posedge clk) begin
    if (do_wr) begin
      req_mem[wr_q]  <= in_req;
      mask_mem[wr_q] <= in_mask;
      data_mem[wr_q] <= in_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_wr) wr_q <= (int'(wr_q) == int'(DEPTH) - 1) ? '0 : wr_q + 1'b1;
      if (do_rd) rd_q <= (int'(rd_q) == int'(DEPTH) - 1) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_demand_only: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> in_req.kind == REQ_DEMAND)
    else $error("response_fifo: a prefetch response was returned");

endmodule
