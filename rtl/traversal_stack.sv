// traversal_stack: one thread's store of BVH node addresses still to visit.
//
// In depth-first mode it is a LIFO stack (push and pop at the top); in
// breadth-first mode the same storage is a FIFO queue (push at the tail, pop
// at the head). Storage is a circular array of DEPTH addresses with a head
// index and an entry count; a push always writes slot head+count, a DFS pop
// removes slot head+count-1 and a BFS pop removes slot head. The next node to
// be read (the top in DFS, the head in BFS) is always visible on top_addr.
//
// A second, combinational read port serves the prefetcher: rd_pos counts from
// the oldest end of the store, so in DFS rd_pos = 0 is the bottom entry and
// rd_pos = count-1 the top (the "0 .. T" numbering of the prefetch pointer),
// and in BFS rd_pos = 0 is the head and rd_pos = d the entry d places behind it.
//
// Timing: push and pop take effect at the clock edge; top_addr, count and the
// rd_pos read are combinational from the registered state. At most one of push
// and pop per cycle; no push when full, no pop when empty, and the mode may only
// change while the store is empty (all asserted). Reset (synchronous, active
// low) empties the store; the contents are not cleared.
//
// The LIFO/FIFO behaviour follows the design; DEPTH (128 entries, enough for
// the (6-1)*18+1 = 91 entries a 6-wide DFS of an 18-level tree can hold) and the
// circular organisation are this implementation's own choices.
module traversal_stack
  import ttp_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned IW    = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  trav_mode_e mode,
  input  logic       push,
  input  addr_t      push_addr,
  input  logic       pop,
  output addr_t      top_addr,
  output logic [IW:0] count,
  output logic       empty,
  output logic       full,
  input  logic [IW-1:0] rd_pos,
  output addr_t      rd_addr
);

  addr_t          mem [DEPTH];
  logic [IW-1:0]  head_q;
  logic [IW:0]    count_q;
  logic [IW-1:0]  tail_slot;   // first free slot
  logic [IW-1:0]  top_slot;    // newest entry

  assign tail_slot = head_q + IW'(count_q);
  assign top_slot  = tail_slot - IW'(1);
  assign empty     = (count_q == '0);
  assign full      = (count_q == (IW+1)'(DEPTH));
  assign count     = count_q;

  assign top_addr = mem[(mode == TRAV_DFS) ? top_slot : head_q];
  assign rd_addr  = mem[head_q + rd_pos];

  always_ff @(posedge clk) begin
    if (push && !full) mem[tail_slot] <= push_addr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q  <= '0;
      count_q <= '0;
    end else if (push && !full) begin
      count_q <= count_q + 1'b1;
    end else if (pop && !empty) begin
      count_q <= count_q - 1'b1;
      if (mode == TRAV_BFS) head_q <= head_q + 1'b1;
    end
  end

  a_one_op:   assert property (@(posedge clk) disable iff (!rst_n) !(push && pop))
    else $error("traversal_stack: push and pop in the same cycle");
  a_no_ovf:   assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("traversal_stack: push while full");
  a_no_udf:   assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("traversal_stack: pop while empty");
  a_mode_chg: assert property (@(posedge clk) disable iff (!rst_n)
                               (mode != $past(mode)) |-> $past(empty))
    else $error("traversal_stack: mode changed while not empty");

endmodule
