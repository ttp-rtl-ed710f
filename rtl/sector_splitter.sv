// sector_splitter: turns one node read into SECTOR_BYTES-sized sector reads.
//
// The cache works on 32-byte sectors, so a node of NODE_BYTES bytes is read as
// NODE_BYTES/SECTOR_BYTES sector requests, sent one per cycle, for demand reads
// and prefetches alike. A node request is accepted when the splitter is idle or
// is handing out its last sector in the same cycle; the sector addresses are the
// node address plus 0, 32, 64, ... The lane mask and the rest of the request are
// copied to every sector.
//
// Interface: valid/ready in and out. out_last marks the last sector of a node.
// The node is held in a register, so the first sector leaves one cycle after the
// node is accepted, and the sectors of back-to-back nodes follow without gaps.
// Splitting into 32-byte chunks one per cycle follows the design; the 64-byte
// node size is this implementation's own choice.
module sector_splitter
  import ttp_pkg::*;
#(
  parameter int unsigned LANES        = 32,
  parameter int unsigned NODE_SIZE    = NODE_BYTES,
  parameter int unsigned SECTOR_SIZE  = SECTOR_BYTES,
  parameter int unsigned NSEC         = (NODE_SIZE + SECTOR_SIZE - 1) / SECTOR_SIZE,
  parameter int unsigned SW           = (NSEC > 1) ? $clog2(NSEC) : 1
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
  output logic             out_last,
  input  logic             out_ready
);

  logic             busy_q;
  mem_req_t         req_q;
  logic [LANES-1:0] mask_q;
  logic [SW-1:0]    sec_q;

  assign out_valid = busy_q;
  assign out_last  = (int'(sec_q) == int'(NSEC) - 1);
  assign in_ready  = !busy_q || (out_ready && out_last);
  assign out_mask  = mask_q;

  always_comb begin
    out_req      = req_q;
    out_req.addr = req_q.addr + addr_t'(int'(sec_q) * int'(SECTOR_SIZE));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      sec_q  <= '0;
      req_q  <= '0;
      mask_q <= '0;
    end else if (in_valid && in_ready) begin
      busy_q <= 1'b1;
      sec_q  <= '0;
      req_q  <= in_req;
      mask_q <= in_mask;
    end else if (busy_q && out_ready) begin
      if (out_last) busy_q <= 1'b0;
      else          sec_q  <= sec_q + 1'b1;
    end
  end

endmodule
