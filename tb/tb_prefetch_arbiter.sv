// tb_prefetch_arbiter: two arbiters, one with the default demand priority and
// one with a 5-cycle threshold, see the same random demand and prefetch
// traffic and random L1 back-pressure. Expected grants are worked out in the
// bench: demand wins unless it is absent or, for the threshold arbiter, at
// least 5 cycles have passed since its last prefetch was accepted.
module tb_prefetch_arbiter;
  import ttp_pkg::*;

  localparam int L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic dem_valid = 1'b0, pf_valid = 1'b0, out_ready = 1'b0;
  mem_req_t dem_req, pf_req;
  logic [L-1:0] dem_mask = '0;
  logic dr0, pr0, ov0, pp0, dr1, pr1, ov1, pp1;
  mem_req_t or0, or1;
  logic [L-1:0] om0, om1;
  int checks = 0, failures = 0, since1 = 0, pf_prio_wins = 0, stalls = 0;

  prefetch_arbiter #(.LANES(L)) u0 (
    .clk, .rst_n, .dem_valid, .dem_req, .dem_mask, .dem_ready(dr0), .pf_valid, .pf_req,
    .pf_ready(pr0), .out_valid(ov0), .out_req(or0), .out_mask(om0), .out_ready, .pf_priority(pp0));
  prefetch_arbiter #(.LANES(L), .THRESHOLD(5)) u1 (
    .clk, .rst_n, .dem_valid, .dem_req, .dem_mask, .dem_ready(dr1), .pf_valid, .pf_req,
    .pf_ready(pr1), .out_valid(ov1), .out_req(or1), .out_mask(om1), .out_ready, .pf_priority(pp1));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dem_req = '0; pf_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      bit e0_pf, e1_pf;
      @(negedge clk);
      dem_valid = ($urandom_range(0, 99) < 70);
      pf_valid  = ($urandom_range(0, 99) < 60);
      out_ready = ($urandom_range(0, 99) < 80);
      dem_req = '{addr: addr_t'($urandom()), kind: REQ_DEMAND, warp: 8'($urandom())};
      pf_req  = '{addr: addr_t'($urandom()), kind: REQ_PREFETCH, warp: 8'($urandom())};
      dem_mask = L'($urandom());
      #1;
      e0_pf = pf_valid && !dem_valid;
      e1_pf = pf_valid && (!dem_valid || since1 >= 5);
      checks++;
      if (ov0 != (dem_valid || pf_valid) || dr0 != (out_ready && !e0_pf) || pr0 != (out_ready && e0_pf)) failures++;
      checks++;
      if (ov0 && (or0 != (e0_pf ? pf_req : dem_req) || om0 != (e0_pf ? '0 : dem_mask))) failures++;
      checks++;
      if (dr1 != (out_ready && !e1_pf) || pr1 != (out_ready && e1_pf)) begin
        failures++;
        if (failures < 10) $display("t=%0d thr arb: since %0d dr %0d pr %0d", t, since1, dr1, pr1);
      end
      if (e1_pf && dem_valid && out_ready) pf_prio_wins++;
      if (pf_valid && dem_valid && out_ready) stalls++;
      @(posedge clk);
      if (pf_valid && out_ready && e1_pf) since1 = 0;
      else since1++;
    end
    checks += 2;
    if (pf_prio_wins == 0) failures++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
