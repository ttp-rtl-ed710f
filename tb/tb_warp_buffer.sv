// tb_warp_buffer: self-checking test of the warp buffer at 2 warps x 4 threads
// with 16-entry stacks.
//
// 1. The pop-streak example on one thread: the stack is filled with
//    B H K L N O P; each demand take pops the top, and the prefetch requests
//    that follow must be O after popping P, then N and L, then K, H and B.
// 2. Random traffic: pushes of addresses from a small set (so merges happen),
//    ready marks, random warp selection and random takes. Reference stacks in
//    the bench give the expected demand address and merge mask, the per-warp
//    has_demand and done flags; every prefetch address must be on the stack of
//    the thread it is reported for.
// 3. Alongside the random traffic, ray records are written to random threads
//    and one random thread's record is read every cycle; it must match a
//    reference copy (and read as invalid and zero before the first write).
module tb_warp_buffer;
  import ttp_pkg::*;

  localparam int NW = 2, WS = 4, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  trav_mode_e mode = TRAV_DFS;
  logic upd_valid = 1'b0, upd_push = 1'b0, upd_ready = 1'b0;
  logic [0:0] upd_warp = '0, sel_warp = '0;
  logic [1:0] upd_lane = '0, pf_lane;
  addr_t upd_push_addr = '0, dem_addr, pf_addr;
  logic dem_valid, dem_take = 1'b0, pf_valid, pf_take = 1'b0;
  logic [WS-1:0] dem_mask;
  ttp_state_e pf_state;
  logic [NW-1:0] has_demand, has_prefetch, done;
  logic any_full;
  logic ray_wr_valid = 1'b0, ray_rd_valid;
  logic [0:0] ray_wr_warp = '0, ray_rd_warp = '0;
  logic [1:0] ray_wr_lane = '0, ray_rd_lane = '0;
  ray_id_t ray_wr_id = '0, ray_rd_id;
  ray_props_t ray_wr_props = '0, ray_rd_props;
  bit ray_v [NW*WS];
  ray_id_t ray_id_ref [NW*WS];
  ray_props_t ray_props_ref [NW*WS];
  int ray_reads = 0;
  int checks = 0, failures = 0, merges = 0, pfs = 0;

  addr_t st [NW*WS][$];
  bit    waiting [NW*WS];

  warp_buffer #(.NUM_WARPS(NW), .WARP_SIZE(WS), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_inputs();
    upd_valid = 0; upd_push = 0; upd_ready = 0; dem_take = 0; pf_take = 0;
    ray_wr_valid = 0;
  endtask

  task automatic do_update(int w, int l, bit p, addr_t a, bit r);
    @(negedge clk);
    idle_inputs();
    upd_valid = 1; upd_warp = 1'(w); upd_lane = 2'(l); upd_push = p; upd_push_addr = a; upd_ready = r;
    @(posedge clk); #1;
    if (p) st[w*WS+l].push_back(a);
    if (r) waiting[w*WS+l] = 1;
    idle_inputs();
  endtask

  // take whatever prefetch warp w offers, return its address (or 0)
  task automatic take_pf(int w, output addr_t a, output bit ok);
    @(negedge clk);
    idle_inputs();
    sel_warp = 1'(w);
    #1;
    ok = pf_valid;
    a = pf_addr;
    pf_take = pf_valid;
    @(posedge clk); #1;
    idle_inputs();
  endtask

  task automatic take_demand(int w);
    logic [WS-1:0] m;
    @(negedge clk);
    idle_inputs();
    sel_warp = 1'(w);
    #1;
    dem_take = dem_valid;
    m = dem_mask;
    @(posedge clk); #1;
    for (int l = 0; l < WS; l++) if (m[l] && dem_take) begin
      void'(st[w*WS+l].pop_back());
      waiting[w*WS+l] = 0;
    end
    idle_inputs();
  endtask

  task automatic expect_pf(addr_t exp_list [$]);
    addr_t a;
    bit ok;
    foreach (exp_list[i]) begin
      take_pf(0, a, ok);
      checks++;
      if (!ok || a != exp_list[i]) begin
        failures++;
        $display("example: prefetch %0d got %0d/%h, expected %h", i, ok, a, exp_list[i]);
      end
    end
    take_pf(0, a, ok);
    checks++;
    if (ok) begin failures++; $display("example: extra prefetch %h", a); end
  endtask

  initial begin
    addr_t a;
    bit ok;
    foreach (waiting[i]) begin waiting[i] = 0; ray_v[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1. example, thread 0 of warp 0: B=1 H=2 K=3 L=4 N=5 O=6 P=7 ----
    for (int i = 1; i <= 7; i++) do_update(0, 0, 1, addr_t'(i * 64), 0);
    do_update(0, 0, 0, 0, 1);
    take_demand(0);                          // pop P
    expect_pf('{addr_t'(6 * 64)});           // O
    do_update(0, 0, 0, 0, 1);
    take_demand(0);                          // pop O
    expect_pf('{addr_t'(5 * 64), addr_t'(4 * 64)});  // N, L
    do_update(0, 0, 0, 0, 1);
    take_demand(0);                          // pop N
    expect_pf('{addr_t'(3 * 64), addr_t'(2 * 64), addr_t'(1 * 64)});  // K, H, B
    while (st[0].size() != 0) begin
      do_update(0, 0, 0, 0, 1);
      take_demand(0);
    end
    do_update(0, 0, 0, 0, 1);

    // ---- 2. random traffic ----
    for (int t = 0; t < 6000; t++) begin
      int w, l, tid, leader;
      logic [WS-1:0] exp_mask;
      @(negedge clk);
      idle_inputs();
      w = $urandom_range(0, NW - 1);
      sel_warp = 1'(w);
      // one update to a random non-waiting thread
      l = $urandom_range(0, WS - 1);
      tid = w * WS + l;
      if (!waiting[tid]) begin
        upd_valid = 1; upd_warp = 1'(w); upd_lane = 2'(l);
        upd_push = (st[tid].size() < DEPTH - 1) && ($urandom_range(0, 99) < 70);
        upd_push_addr = addr_t'($urandom_range(1, 4) * 64);
        upd_ready = !upd_push || ($urandom_range(0, 3) == 0);
      end
      // ray record traffic
      if ($urandom_range(0, 99) < 20) begin
        ray_wr_valid = 1;
        ray_wr_warp = 1'($urandom_range(0, NW - 1));
        ray_wr_lane = 2'($urandom_range(0, WS - 1));
        ray_wr_id = ray_id_t'($urandom);
        for (int c = 0; c < 3; c++) begin
          ray_wr_props.origin[c] = $urandom;
          ray_wr_props.direction[c] = $urandom;
        end
      end
      ray_rd_warp = 1'($urandom_range(0, NW - 1));
      ray_rd_lane = 2'($urandom_range(0, WS - 1));
      #1;
      begin
        int r;
        r = ray_rd_warp * WS + ray_rd_lane;
        checks++;
        if (ray_rd_valid != ray_v[r] ||
            ray_rd_id != (ray_v[r] ? ray_id_ref[r] : '0) ||
            ray_rd_props != (ray_v[r] ? ray_props_ref[r] : '0)) begin
          failures++;
          if (failures < 10) $display("t=%0d ray record of thread %0d mismatch", t, r);
        end
        if (ray_v[r]) ray_reads++;
      end
      // reference view of the selected warp
      leader = -1;
      for (int j = 0; j < WS; j++)
        if (leader < 0 && waiting[w*WS+j] && st[w*WS+j].size() != 0) leader = j;
      exp_mask = '0;
      if (leader >= 0)
        for (int j = 0; j < WS; j++)
          exp_mask[j] = waiting[w*WS+j] && st[w*WS+j].size() != 0 &&
                        st[w*WS+j][$] == st[w*WS+leader][$];
      for (int v = 0; v < NW; v++) begin
        bit hd, dn;
        hd = 0; dn = 1;
        for (int j = 0; j < WS; j++) begin
          if (waiting[v*WS+j] && st[v*WS+j].size() != 0) hd = 1;
          if (!(waiting[v*WS+j] && st[v*WS+j].size() == 0)) dn = 0;
        end
        checks++;
        if (has_demand[v] != hd || done[v] != dn) begin
          failures++;
          if (failures < 10) $display("t=%0d warp %0d has_demand %0d done %0d expected %0d %0d", t, v, has_demand[v], done[v], hd, dn);
        end
      end
      checks++;
      if (dem_valid != (leader >= 0) ||
          (leader >= 0 && (dem_addr != st[w*WS+leader][$] || dem_mask != exp_mask))) begin
        failures++;
        if (failures < 10) $display("t=%0d demand mismatch", t);
      end
      if (pf_valid) begin
        bit found;
        found = 0;
        foreach (st[w*WS+pf_lane][j]) if (st[w*WS+pf_lane][j] == pf_addr) found = 1;
        checks++;
        if (!found) begin failures++; $display("t=%0d prefetch %h not on the stack", t, pf_addr); end
      end
      // a pushed thread is not waiting, so it cannot be in dem_mask this cycle
      dem_take = dem_valid && ($urandom_range(0, 99) < 50);
      pf_take  = pf_valid && ($urandom_range(0, 99) < 70);
      if (dem_take && $countones(dem_mask) > 1) merges++;
      exp_mask = dem_take ? dem_mask : '0;
      if (pf_take) pfs++;
      @(posedge clk); #1;
      if (upd_valid && upd_push) st[tid].push_back(upd_push_addr);
      if (ray_wr_valid) begin
        ray_v[ray_wr_warp*WS+ray_wr_lane] = 1;
        ray_id_ref[ray_wr_warp*WS+ray_wr_lane] = ray_wr_id;
        ray_props_ref[ray_wr_warp*WS+ray_wr_lane] = ray_wr_props;
      end
      if (upd_valid && upd_ready) waiting[tid] = 1;
      if (dem_take)
        for (int j = 0; j < WS; j++) if (exp_mask[j]) begin
          void'(st[w*WS+j].pop_back());
          waiting[w*WS+j] = 0;
        end
      idle_inputs();
    end
    checks += 2;
    if (merges == 0) failures++;
    if (pfs == 0) failures++;
    checks++;
    if (ray_reads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
