// tb_ttp_thread_prefetcher: self-checking test of the per-thread prefetch
// engine, driven by a reference stack kept in the bench.
//
// 1. The pop-streak example: the stack holds B H K L N O P (P on top, pushed
//    last). Popping P must prefetch exactly O; popping O exactly N then L;
//    popping N exactly K, H, B, one prefetch per cycle with pf_ack held high.
// 2. Random DFS traffic. The bench tracks which stack entries were prefetched
//    since the last push and checks: no entry twice, every prefetch inside
//    the window of the k entries below the top, and, once the engine is quiet,
//    that every entry of the window was prefetched (k = 0/1/2/16 for a streak of
//    0/1/2/3+ pops, as in the state machine).
// 3. Random BFS traffic with N = 4: after each pop the first min(4, entries)
//    entries from the head must be prefetched, each entry at most once in its
//    life in the queue.
module tb_ttp_thread_prefetcher;
  import ttp_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0, pf_ack = 1'b0;
  trav_mode_e mode = TRAV_DFS;
  logic [6:0] count;
  ttp_state_e state;
  logic pf_valid;
  logic [5:0] pf_pos;
  int checks = 0, failures = 0;

  // reference: entry ids from the oldest (index 0) to the newest
  int ids [$];
  int next_id = 0;
  bit pf_done [int];   // id -> prefetched (DFS: since the last push)
  int streak = 0;
  int bfs_lim = 0;
  int log_q [$];       // ids prefetched in order (for the example)

  ttp_thread_prefetcher #(.DEPTH(DEPTH)) dut (.*);

  assign count = 7'(ids.size());

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int kval(int s);
    return (s == 0) ? 0 : (s == 1) ? 1 : (s == 2) ? 2 : 16;
  endfunction

  // one clock with the given operation; pf_ack follows ack_pct
  task automatic step(bit do_push, bit do_pop, int ack_pct);
    int id;
    @(negedge clk);
    push = do_push; pop = do_pop;
    pf_ack = pf_valid && ($urandom_range(0, 99) < ack_pct);
    if (pf_ack) begin
      // the entry prefetched this cycle
      checks++;
      if (int'(pf_pos) >= ids.size()) begin
        failures++;
        $display("prefetch beyond the stack: pos %0d size %0d", pf_pos, ids.size());
      end else begin
        id = ids[pf_pos];
        log_q.push_back(id);
        if (pf_done.exists(id)) begin
          failures++;
          $display("entry %0d prefetched twice", id);
        end
        pf_done[id] = 1;
        if (mode == TRAV_DFS) begin
          checks++;
          if (!(int'(pf_pos) > ids.size() - 1 - kval(streak))) begin
            failures++;
            $display("prefetch outside window: pos %0d top %0d k %0d", pf_pos, ids.size()-1, kval(streak));
          end
        end else begin
          checks++;
          if (int'(pf_pos) >= bfs_lim) failures++;
        end
      end
    end
    @(posedge clk);
    #1;
    if (do_push) begin
      ids.push_back(next_id++);
      if (mode == TRAV_DFS) pf_done.delete();
      streak = 0;
    end
    if (do_pop) begin
      if (mode == TRAV_DFS) begin
        void'(ids.pop_back());
      end else begin
        void'(ids.pop_front());
        bfs_lim = (ids.size() < 4) ? ids.size() : 4;
      end
      if (streak < 3) streak++;
    end
    #1;
    push = 1'b0; pop = 1'b0; pf_ack = 1'b0;
  endtask

  // let the engine drain with ack always high, then check the window is covered
  task automatic quiesce_check();
    int lo, hi;
    for (int i = 0; i < 20; i++) step(0, 0, 100);
    checks++;
    if (pf_valid) begin failures++; $display("engine not quiet"); end
    if (mode == TRAV_DFS) begin
      hi = ids.size() - 1;
      lo = hi - kval(streak) + 1;
      if (lo < 0) lo = 0;
    end else begin
      lo = 0;
      hi = bfs_lim - 1;
    end
    for (int p = lo; p <= hi; p++) begin
      checks++;
      if (!pf_done.exists(ids[p])) begin
        failures++;
        $display("window entry at pos %0d not prefetched (streak %0d)", p, streak);
      end
    end
  endtask

  initial begin
    int nm;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1. example: B H K L N O P (ids 0..6) ----
    for (int i = 0; i < 7; i++) step(1, 0, 100);
    for (int i = 0; i < 4; i++) step(0, 0, 100);
    checks++; if (log_q.size() != 0) failures++;
    step(0, 1, 100);                       // pop P
    for (int i = 0; i < 4; i++) step(0, 0, 100);
    checks++; if (log_q.size() != 1 || log_q[0] != 5) begin failures++; $display("after pop P: %p", log_q); end
    log_q.delete();
    step(0, 1, 100);                       // pop O
    // N and L must come out on two consecutive cycles
    for (int i = 0; i < 4; i++) step(0, 0, 100);
    checks++; if (log_q.size() != 2 || log_q[0] != 4 || log_q[1] != 3) begin failures++; $display("after pop O: %p", log_q); end
    log_q.delete();
    step(0, 1, 100);                       // pop N
    for (int i = 0; i < 6; i++) step(0, 0, 100);
    checks++; if (log_q.size() != 3 || log_q[0] != 2 || log_q[1] != 1 || log_q[2] != 0) begin failures++; $display("after pop N: %p", log_q); end
    while (ids.size() > 0) step(0, 1, 100);
    quiesce_check();

    // ---- 2. random DFS ----
    for (int n = 0; n < 400; n++) begin
      nm = $urandom_range(1, 6);
      for (int i = 0; i < nm && ids.size() < DEPTH; i++) step(1, 0, 60);
      nm = $urandom_range(1, 8);
      for (int i = 0; i < nm && ids.size() > 0; i++) begin
        step(0, 1, 60);
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 5)) step(0, 0, 60);
      end
      if (n % 5 == 0) quiesce_check();
    end
    while (ids.size() > 0) step(0, 1, 50);
    quiesce_check();

    // ---- 3. random BFS ----
    @(negedge clk) mode = TRAV_BFS;
    pf_done.delete();
    bfs_lim = 0;
    for (int n = 0; n < 400; n++) begin
      nm = $urandom_range(1, 6);
      for (int i = 0; i < nm && ids.size() < DEPTH; i++) step(1, 0, 60);
      nm = $urandom_range(1, 5);
      for (int i = 0; i < nm && ids.size() > 0; i++) begin
        step(0, 1, 60);
        if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 4)) step(0, 0, 60);
      end
      if (n % 5 == 0) quiesce_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
