// ttp_thread_prefetcher: the per-thread prefetch engine of TTP.
//
// Depth-first mode. The engine watches the push and pop strobes of its thread's
// traversal stack. A ttp_fsm turns the pop streak into a prefetch distance k
// (0, 1, 2 or 16), so the window of entries that may be prefetched is the k
// entries below the top T, down to (but not including) position T-k. A
// pointer register ptr walks down through that window:
//   * on a push, the multiplexer loads ptr with the new top T;
//   * on a prefetch (pf_ack), the -1 unit moves ptr to the next entry down;
//   * prefetching is requested while ptr != T-k (the comparator).
// The pointer is only reloaded by a push, so consecutive pops never prefetch
// the same entry twice. Positions count from the bottom of the stack (0) and a
// value of -1 means "below the bottom"; T-k is clamped to -1.
//
// Walking the pop-streak example (stack B H K L N O P, P on top, ptr at P):
// pop P -> S1, k = 1, O is prefetched; pop O -> S2, k = 2, N and L are
// prefetched; pop N -> S3, k = 16, K, H and B are prefetched.
//
// Breadth-first mode. The distance is fixed at N (default 4). On every pop the
// window becomes the first min(N, entries left) entries from the head; a counter
// "ahead" of entries already prefetched from the head walks through it, and it
// drops by one with every pop, since the head entry leaves the queue.
//
// Interface: push/pop are the stack strobes (one per cycle), count the stack's
// registered entry count. pf_valid/pf_pos request the prefetch of the stack
// entry at pf_pos (numbered as traversal_stack's rd_pos); pf_ack accepts it and
// moves the pointer at the next clock edge. All state updates on the clock edge.
//
// Own choices where the design is silent: when a pop leaves the pointer above
// the new top, the pointer is clamped to the new top (otherwise the popped entry
// would be prefetched, in the same cycle as its own demand read); the BFS
// window is latched at each pop and does not grow with later pushes; a pf_ack
// in the same cycle as a push is dropped by the push reload.
module ttp_thread_prefetcher
  import ttp_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned K1    = K_S1,
  parameter int unsigned K2    = K_S2,
  parameter int unsigned K3    = K_S3,
  parameter int unsigned N_BFS = BFS_N,
  parameter int unsigned IW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  trav_mode_e    mode,
  input  logic          push,
  input  logic          pop,
  input  logic [IW:0]   count,
  output ttp_state_e    state,
  output logic          pf_valid,
  output logic [IW-1:0] pf_pos,
  input  logic          pf_ack
);

  // Signed positions wide enough for T - K3 and for DEPTH.
  localparam int unsigned PW = IW + 7;
  typedef logic signed [PW-1:0] pos_t;

  localparam int unsigned KW = $clog2(K3 + 1);
  logic [KW-1:0] k;

  ttp_fsm #(.K1(K1), .K2(K2), .K3(K3), .KW(KW)) u_fsm (
    .clk, .rst_n, .push, .pop, .state, .k
  );

  // ---------------- DFS: pointer, multiplexer, decrementer, comparator -------
  pos_t ptr_q, ptr_d;
  pos_t top_t;      // T: position of the current top (-1 when empty)
  pos_t limit;      // T-k, clamped at -1
  pos_t t_after;    // T after this cycle's push or pop
  pos_t ptr_dec;    // output of the -1 unit

  assign top_t   = pos_t'(count) - pos_t'(1);
  always_comb begin
    limit = top_t - pos_t'(k);
    if (limit < pos_t'(-1)) limit = pos_t'(-1);
  end
  assign t_after = push ? top_t + pos_t'(1) : (pop ? top_t - pos_t'(1) : top_t);
  assign ptr_dec = ptr_q - pos_t'(1);

  logic dfs_send;
  assign dfs_send = (ptr_q != limit);

  always_comb begin
    ptr_d = (pf_ack && mode == TRAV_DFS) ? ptr_dec : ptr_q;
    if (push) begin
      ptr_d = t_after;                    // mux input 1: reload with T
    end else if (pop && ptr_d > t_after) begin
      ptr_d = t_after;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr_q <= pos_t'(-1);
    else        ptr_q <= ptr_d;
  end

  // ---------------- BFS: fixed distance N from the head ----------------------
  logic [IW:0] ahead_q, ahead_d;   // entries from the head already prefetched
  logic [IW:0] lim_q, lim_d;       // window size latched at the last pop
  logic [IW:0] left_after_pop;

  assign left_after_pop = (count == '0) ? '0 : count - 1'b1;

  always_comb begin
    ahead_d = ahead_q;
    lim_d   = lim_q;
    if (pf_ack && mode == TRAV_BFS) ahead_d = ahead_q + 1'b1;
    if (pop) begin
      ahead_d = (ahead_d == '0) ? '0 : ahead_d - 1'b1;
      lim_d   = (left_after_pop < (IW+1)'(N_BFS)) ? left_after_pop : (IW+1)'(N_BFS);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ahead_q <= '0;
      lim_q   <= '0;
    end else begin
      ahead_q <= ahead_d;
      lim_q   <= lim_d;
    end
  end

  // ---------------- Request ----------------------------------------------------
  always_comb begin
    if (mode == TRAV_DFS) begin
      pf_valid = dfs_send;
      pf_pos   = IW'(ptr_q);
    end else begin
      pf_valid = (ahead_q < lim_q);
      pf_pos   = IW'(ahead_q);
    end
  end

  a_ack_valid: assert property (@(posedge clk) disable iff (!rst_n) pf_ack |-> pf_valid)
    else $error("ttp_thread_prefetcher: pf_ack without pf_valid");
  a_ptr_in_stack: assert property (@(posedge clk) disable iff (!rst_n)
                                   (mode == TRAV_DFS && pf_valid) |-> (ptr_q >= 0 && ptr_q <= top_t))
    else $error("ttp_thread_prefetcher: pointer outside the stack");

endmodule
