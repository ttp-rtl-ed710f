// tb_rt_warp_scheduler: random request summaries and room flags are applied;
// the bench keeps its own round-robin pointer and checks every cycle that the
// chosen warp is the first servable warp at or after it, that no warp is chosen
// when none is servable, and that each warp requesting without pause is served
// at least once in every NUM_WARPS grants.
module tb_rt_warp_scheduler;
  localparam int NW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NW-1:0] has_demand = '0, has_prefetch = '0;
  logic demand_room = 1'b0, prefetch_room = 1'b0, advance = 1'b0;
  logic sel_valid;
  logic [1:0] sel_warp;
  int checks = 0, failures = 0;
  int ptr = 0;
  int since [NW];

  rt_warp_scheduler #(.NUM_WARPS(NW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (since[i]) since[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      logic [NW-1:0] can;
      int exp_w;
      @(negedge clk);
      has_demand    = (t > 2500) ? '1 : NW'($urandom());
      has_prefetch  = NW'($urandom());
      demand_room   = (t > 2500) || ($urandom_range(0, 3) != 0);
      prefetch_room = ($urandom_range(0, 1) != 0);
      #1;
      advance = sel_valid && ($urandom_range(0, 4) != 0);
      can = (demand_room ? has_demand : '0) | (prefetch_room ? has_prefetch : '0);
      exp_w = -1;
      for (int j = 0; j < NW; j++) if (exp_w < 0 && can[(ptr + j) % NW]) exp_w = (ptr + j) % NW;
      checks++;
      if (sel_valid != (exp_w >= 0) || (exp_w >= 0 && int'(sel_warp) != exp_w)) begin
        failures++;
        if (failures < 10) $display("t=%0d sel %0d/%0d expected %0d", t, sel_valid, sel_warp, exp_w);
      end
      @(posedge clk);
      if (advance && exp_w >= 0) begin
        ptr = (exp_w + 1) % NW;
        // fairness: with every warp always requesting demand, each one is served in NW grants
        if (t > 2500 && demand_room) begin
          for (int w = 0; w < NW; w++) since[w] = (w == exp_w) ? 0 : since[w] + 1;
          foreach (since[w]) begin
            checks++;
            if (since[w] >= NW) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
