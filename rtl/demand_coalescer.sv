// demand_coalescer: chooses the next demand read of a warp and merges the
// threads that want the same node.
//
// Every thread of the selected warp that is waiting for its next node and has
// a non-empty traversal stack is a candidate (eligible[i]). The lowest-numbered
// candidate leads; its next node address (tops[i]) becomes the request, and every
// candidate whose next address is identical joins it in lane_mask, so the node
// is read once for all of them and all of them pop it.
//
// Purely combinational: valid, addr and lane_mask follow the inputs in the same
// cycle. Merging duplicate requests of one warp follows the design; choosing the
// lowest-numbered thread as leader is this implementation's own choice.
module demand_coalescer
  import ttp_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic [LANES-1:0] eligible,
  input  addr_t            tops [LANES],
  output logic             valid,
  output addr_t            addr,
  output logic [LANES-1:0] lane_mask
);

  always_comb begin
    valid = 1'b0;
    addr  = '0;
    for (int i = LANES - 1; i >= 0; i--) begin
      if (eligible[i]) begin
        valid = 1'b1;
        addr  = tops[i];
      end
    end
    for (int i = 0; i < LANES; i++) begin
      lane_mask[i] = eligible[i] && (tops[i] == addr);
    end
  end

endmodule
