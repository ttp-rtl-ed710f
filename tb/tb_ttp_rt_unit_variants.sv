// tb_ttp_rt_unit_variants: the end-to-end test of tb_ttp_rt_unit, run on the
// RT-unit front end configured with the alternatives the design was also
// evaluated with: prefetch priority after 25 idle cycles (ARB_THRESHOLD = 25),
// the 1-2-8 prefetch intensity (K3 = 8) and a BFS distance of N = 2. The same
// scene, models and checks are used (every thread reads its reference DFS/BFS
// node sequence, demand sectors on consecutive cycles unless a prefetch sector
// has priority, no prefetch of a node the warp never reads, ray records read
// back unchanged, responses in order with their data, a full response FIFO).
// In addition the threshold must have let a prefetch sector
// go ahead of a waiting demand sector at least once.
module tb_ttp_rt_unit_variants;
  import ttp_pkg::*;

  localparam int NW = 4, WS = 32;
  localparam int LEVELS = 4;              // leaves at level 4 -> 1555 nodes
  localparam int HIT_PCT = 40;
  localparam int LAT = 30;                // memory + intersection latency
  localparam addr_t BASE = 32'h1000_0000;
  localparam int LEAF_FIRST = 259;        // first node id of level 4 (1+6+36+216)

  logic clk = 1'b0, rst_n = 1'b0;
  trav_mode_e mode = TRAV_DFS;
  logic upd_valid = 1'b0, upd_push = 1'b0, upd_ready = 1'b0;
  logic [1:0] upd_warp = '0;
  logic [4:0] upd_lane = '0;
  addr_t upd_push_addr = '0;
  logic l1_valid, l1_ready = 1'b0;
  mem_req_t l1_req;
  logic [WS-1:0] l1_mask;
  logic [NW-1:0] warp_done;
  logic stack_full;
  logic ray_wr_valid = 1'b0, ray_rd_valid;
  logic l1_resp_valid = 1'b0, l1_resp_ready, op_valid, op_ready = 1'b0;
  mem_req_t l1_resp_req = '0, op_req;
  logic [WS-1:0] l1_resp_mask = '0, op_mask;
  sector_data_t l1_resp_data = '0, op_data;
  logic [1:0] ray_wr_warp = '0, ray_rd_warp = '0;
  logic [4:0] ray_wr_lane = '0, ray_rd_lane = '0;
  ray_id_t ray_wr_id = '0, ray_rd_id;
  ray_props_t ray_wr_props = '0, ray_rd_props;

  ttp_rt_unit #(.K3(8), .N_BFS(2), .ARB_THRESHOLD(25)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scene model ----------------
  function automatic bit hit(int ray, int child);
    int unsigned h;
    int grp;
    grp = (ray / WS == NW - 1) ? ray : ray / 4;   // last warp: every ray on its own
    h = (grp * 32'h9E3779B1) ^ (child * 32'h85EBCA77);
    h = h ^ (h >> 15);
    h = h * 32'hC2B2AE3D;
    h = h ^ (h >> 13);
    return (h % 100) < HIT_PCT;
  endfunction

  function automatic addr_t node_addr(int n);
    return BASE + addr_t'(n) * 64;
  endfunction

  // ray record of thread t in run number r (0: DFS, 1: BFS)
  function automatic ray_id_t ray_id_of(int t, int r);
    return ray_id_t'(t + 1000 * r);
  endfunction

  function automatic ray_props_t ray_props_of(int t, int r);
    ray_props_t p;
    for (int c = 0; c < 3; c++) begin
      p.origin[c]    = 32'(t * 32'h01000193 + c * 7 + r);
      p.direction[c] = 32'(t * 32'h9E3779B1 ^ (c + 3 * r));
    end
    return p;
  endfunction

  int run_no = 0;
  int n_ray_rd = 0;

  typedef int int_q_t [$];

  function automatic int_q_t ref_order(int ray, bit bfs);
    int_q_t st, out;
    int n;
    st.push_back(0);
    while (st.size() != 0) begin
      n = bfs ? st.pop_front() : st.pop_back();
      out.push_back(n);
      if (n < LEAF_FIRST)
        for (int c = 1; c <= 6; c++) if (hit(ray, 6 * n + c)) st.push_back(6 * n + c);
    end
    return out;
  endfunction

  int_q_t exp_seq [NW*WS];
  int     got_cnt [NW*WS];

  // ---------------- operation-unit model: update queue ----------------
  typedef struct { int warp; int lane; bit push; int node; bit ready; } upd_t;
  upd_t upd_q [$];
  // L1 model: every accepted demand sector comes back LAT cycles later, in order
  typedef struct { longint t; mem_req_t req; logic [WS-1:0] mask; } resp_t;
  resp_t resp_q [$];

  function automatic sector_data_t sector_data_of(addr_t a);
    sector_data_t d;
    for (int w = 0; w < SECTOR_BYTES / 4; w++) d[w*32 +: 32] = (a * 32'h2545F491) ^ 32'(w * 32'h01010101);
    return d;
  endfunction

  // ---------------- statistics ----------------
  int n_merged = 0, n_pf_s [4] = '{0, 0, 0, 0}, n_pf_held = 0, n_maq_full = 0;
  int n_backpressure = 0, n_bfs_pf = 0, n_pf = 0, n_dem = 0;
  int pf_pending [int];          // (warp<<24 | node) -> prefetched, not yet read since
  bit demanded [int];            // (warp<<24 | node) -> read by a demand in this run
  int n_late = 0;
  int n_resp_full = 0;
  bit op_second = 0;
  int n_pf_first = 0;
  bit dem_first_prev = 0;
  int dem_prev_node = -1;

  // L1 port, memory latency and demand checks
  always @(posedge clk) begin
    if (rst_n) begin
      if (l1_valid && !l1_ready) n_backpressure++;
      if (upd_valid) begin
        int tid;
        tid = int'(upd_warp) * WS + int'(upd_lane);
        checks++;
        n_ray_rd++;
        if (!ray_rd_valid || ray_rd_id != ray_id_of(tid, run_no) ||
            ray_rd_props != ray_props_of(tid, run_no)) begin
          failures++;
          if (failures < 10) $display("ray record of thread %0d wrong at %0d", tid, cyc);
        end
      end
      if (dut.pfs_valid && dut.dms_valid && l1_ready) n_pf_held++;
      if (dut.pfs_valid && dut.dms_valid && l1_ready && dut.pf_priority) n_pf_first++;
      if ((|dut.has_demand) && !dut.maq_in_ready) n_maq_full++;
      if (dut.pf_take) begin
        n_pf_s[dut.wb_pf_state]++;
        if (mode == TRAV_BFS) n_bfs_pf++;
      end
      // one sector per cycle: the second sector of a demand node follows its first
      // (unless the threshold has just given a prefetch sector the port)
      if (dem_first_prev && l1_ready && !(dut.pf_priority && dut.pfs_valid)) begin
        checks++;
        if (!(l1_valid && l1_req.kind == REQ_DEMAND && l1_req.addr[5] &&
              int'((l1_req.addr - BASE) >> 6) == dem_prev_node)) begin
          failures++;
          $display("demand sectors not on consecutive cycles at %0d", cyc);
        end
      end
      dem_first_prev = 0;
      if (l1_valid && l1_ready) begin
        int node, key;
        node = int'((l1_req.addr - BASE) >> 6);
        key = (int'(l1_req.warp) << 24) | node;
        if (l1_req.kind == REQ_DEMAND) begin
          begin
            resp_t r;
            r.t = cyc + LAT; r.req = l1_req; r.mask = l1_mask;
            resp_q.push_back(r);
          end
          if (!l1_req.addr[5]) begin
            dem_first_prev = 1;
            dem_prev_node = node;
          end else begin
            n_dem++;
            if ($countones(l1_mask) > 1) n_merged++;
            if (pf_pending.exists(key)) pf_pending.delete(key);
            demanded[key] = 1;
            for (int l = 0; l < WS; l++) if (l1_mask[l]) begin
              int tid;
              tid = int'(l1_req.warp) * WS + l;
              checks++;
              if (got_cnt[tid] >= exp_seq[tid].size() || exp_seq[tid][got_cnt[tid]] != node) begin
                failures++;
                if (failures < 10) $display("thread %0d read node %0d, expected %0d (step %0d)",
                    tid, node, (got_cnt[tid] < exp_seq[tid].size()) ? exp_seq[tid][got_cnt[tid]] : -1, got_cnt[tid]);
              end
              got_cnt[tid]++;
            end
          end
        end else if (!l1_req.addr[5]) begin
          n_pf++;
          if (pf_pending.exists(key)) pf_pending[key]++;
          else pf_pending[key] = 1;
          if (demanded.exists(key)) n_late++;
        end
      end
      // memory responses enter the response FIFO
      if (l1_resp_valid && !l1_resp_ready) n_resp_full++;
      if (l1_resp_valid && l1_resp_ready) void'(resp_q.pop_front());
      // the operation units take sectors from the response FIFO; a node is
      // tested once its second sector has arrived
      if (op_valid && op_ready) begin
        int rnode, rwarp;
        rnode = int'((op_req.addr - BASE) >> 6);
        rwarp = int'(op_req.warp);
        checks++;
        if (op_req.kind != REQ_DEMAND || op_data != sector_data_of(op_req.addr) ||
            op_req.addr[5] != op_second) begin
          failures++;
          if (failures < 10) $display("response of node %0d wrong at %0d", rnode, cyc);
        end
        op_second = !op_second;
        if (op_req.addr[5])
          for (int l = 0; l < WS; l++) if (op_mask[l]) begin
            int ray;
            ray = rwarp * WS + l;
            if (rnode < LEAF_FIRST)
              for (int c = 1; c <= 6; c++)
                if (hit(ray, 6 * rnode + c)) upd_q.push_back('{rwarp, l, 1'b1, 6 * rnode + c, 1'b0});
            upd_q.push_back('{rwarp, l, 1'b0, 0, 1'b1});
          end
      end
    end
  end

  // update driver: one update per cycle
  always @(negedge clk) begin
    upd_valid <= 1'b0;
    if (rst_n && upd_q.size() != 0) begin
      upd_t u;
      u = upd_q.pop_front();
      upd_valid     <= 1'b1;
      upd_warp      <= 2'(u.warp);
      upd_lane      <= 5'(u.lane);
      upd_push      <= u.push;
      upd_push_addr <= node_addr(u.node);
      upd_ready     <= u.ready;
      ray_rd_warp   <= 2'(u.warp);
      ray_rd_lane   <= 5'(u.lane);
    end
    // random back-pressure, plus a 60-cycle L1 stall every 1500 cycles
    l1_ready <= ($urandom_range(0, 99) < 85) && !((cyc % 1500) < 60);
    // the L1 returns the oldest due sector; the operation units are sometimes busy
    l1_resp_valid <= 1'b0;
    if (rst_n && resp_q.size() != 0 && resp_q[0].t <= cyc + 1) begin
      l1_resp_valid <= 1'b1;
      l1_resp_req   <= resp_q[0].req;
      l1_resp_mask  <= resp_q[0].mask;
      l1_resp_data  <= sector_data_of(resp_q[0].req.addr);
    end
    op_ready <= ($urandom_range(0, 99) < 90) && !((cyc % 1100) < 30);
  end

  task automatic run(trav_mode_e m);
    longint t0;
    @(negedge clk);
    rst_n = 1'b0;
    mode = m;
    upd_q.delete(); resp_q.delete(); pf_pending.delete(); demanded.delete();
    op_second = 0;
    for (int t = 0; t < NW * WS; t++) begin
      exp_seq[t] = ref_order(t, m == TRAV_BFS);
      got_cnt[t] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rays enter the unit: one ray record written per cycle
    for (int t = 0; t < NW * WS; t++) begin
      ray_wr_valid = 1'b1;
      ray_wr_warp  = 2'(t / WS);
      ray_wr_lane  = 5'(t % WS);
      ray_wr_id    = ray_id_of(t, run_no);
      ray_wr_props = ray_props_of(t, run_no);
      @(negedge clk);
    end
    ray_wr_valid = 1'b0;
    // every ray hits the root: push it and mark the thread ready
    for (int t = 0; t < NW * WS; t++) begin
      upd_q.push_back('{t / WS, t % WS, 1'b1, 0, 1'b0});
      upd_q.push_back('{t / WS, t % WS, 1'b0, 0, 1'b1});
    end
    t0 = cyc;
    @(negedge clk);
    while (!(&warp_done && upd_q.size() == 0 && resp_q.size() == 0 && !op_valid)) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("%s traversal: %0d cycles, %0d demand nodes, %0d prefetches (%0d after their demand)",
             (m == TRAV_DFS) ? "DFS" : "BFS", cyc - t0, n_dem, n_pf, n_late);
    for (int t = 0; t < NW * WS; t++) begin
      checks++;
      if (got_cnt[t] != exp_seq[t].size()) begin
        failures++;
        if (failures < 10) $display("thread %0d read %0d nodes, expected %0d", t, got_cnt[t], exp_seq[t].size());
      end
    end
    // a prefetch may leave after the demand read it anticipated (demand sectors go
    // first), but it must always be a node the warp reads in this traversal
    foreach (pf_pending[key]) begin
      checks++;
      if (!demanded.exists(key)) begin
        failures++;
        $display("prefetched node %0d of warp %0d never read", key & 32'hFFFFFF, key >> 24);
      end
    end
    checks++;
    if (stack_full) failures++;
    run_no++;
  endtask

  initial begin
    run(TRAV_DFS);
    $display("merged %0d, prefetch S1 %0d S2 %0d S3 %0d, prefetch held %0d, queue full %0d, backpressure %0d",
             n_merged, n_pf_s[1], n_pf_s[2], n_pf_s[3], n_pf_held, n_maq_full, n_backpressure);
    run(TRAV_BFS);
    $display("BFS prefetches %0d, prefetch sectors sent ahead of demand %0d", n_bfs_pf, n_pf_first);
    checks += 10;
    if (n_resp_full == 0)    begin failures++; $display("response FIFO never full"); end
    if (n_pf_first == 0)     begin failures++; $display("threshold never gave a prefetch priority"); end
    if (n_merged == 0)       begin failures++; $display("no merged demand read"); end
    if (n_pf_s[1] == 0)      begin failures++; $display("no S1 prefetch"); end
    if (n_pf_s[2] == 0)      begin failures++; $display("no S2 prefetch"); end
    if (n_pf_s[3] == 0)      begin failures++; $display("no S3 prefetch"); end
    if (n_pf_held == 0)      begin failures++; $display("prefetch never held back"); end
    if (n_maq_full == 0)     begin failures++; $display("queue never full"); end
    if (n_backpressure == 0) begin failures++; $display("no back-pressure"); end
    if (n_bfs_pf == 0)       begin failures++; $display("no BFS prefetch"); end
    $display("response FIFO full %0d cycles", n_resp_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
