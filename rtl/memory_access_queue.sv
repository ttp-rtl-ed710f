// memory_access_queue: the RT unit's FIFO of demand node reads waiting to be
// sent to the memory hierarchy.
//
// The memory scheduler inserts coalesced demand reads (address, warp and the
// mask of threads that asked for the node); they leave in order towards the L1
// data cache through the sector splitter. A circular buffer of DEPTH entries
// with read and write pointers and a count; a write and a read may happen in
// the same cycle, also when full.
//
// Interface: in_valid/in_ready, out_valid/out_ready; out_* shows the oldest
// entry (combinational from registers), an accepted write is visible one cycle
// later. Reset (synchronous, active low) empties the queue. The queue itself
// follows the design; its depth (8) is this implementation's own choice.
module memory_access_queue
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
  output logic             in_ready,
  output logic             out_valid,
  output mem_req_t         out_req,
  output logic [LANES-1:0] out_mask,
  input  logic             out_ready,
  output logic [AW:0]      level
);

  mem_req_t         req_mem  [DEPTH];
  logic [LANES-1:0] mask_mem [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;
  logic [AW:0]      cnt_q;
  logic             do_wr, do_rd;

  assign out_valid = (cnt_q != '0);
  assign in_ready  = (cnt_q != (AW+1)'(DEPTH)) || out_ready;
  assign do_rd     = out_valid && out_ready;
  assign do_wr     = in_valid && in_ready;
  assign out_req   = req_mem[rd_q];
  assign out_mask  = mask_mem[rd_q];
  assign level     = cnt_q;

  always_ff @(posedge clk) begin
    if (do_wr) begin
      req_mem[wr_q]  <= in_req;
      mask_mem[wr_q] <= in_mask;
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

endmodule
