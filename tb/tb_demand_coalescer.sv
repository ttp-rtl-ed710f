// tb_demand_coalescer: random eligibility masks and top-of-stack addresses
// drawn from a small set (so duplicates are common) are applied; the expected
// leader address and merge mask are computed by a separate loop in the bench.
module tb_demand_coalescer;
  import ttp_pkg::*;

  localparam int LANES = 32;
  logic [LANES-1:0] eligible;
  addr_t tops [LANES];
  logic valid;
  addr_t addr;
  logic [LANES-1:0] lane_mask;
  int checks = 0, failures = 0, merged = 0;

  demand_coalescer #(.LANES(LANES)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int leader;
      logic [LANES-1:0] exp_mask;
      eligible = (t % 50 == 0) ? '0 : LANES'($urandom()) & LANES'($urandom());
      foreach (tops[i]) tops[i] = 32'h1000 + 32'($urandom_range(0, 5)) * 64;
      #1;
      leader = -1;
      for (int i = 0; i < LANES; i++) if (leader < 0 && eligible[i]) leader = i;
      exp_mask = '0;
      if (leader >= 0)
        for (int i = 0; i < LANES; i++) exp_mask[i] = eligible[i] && tops[i] == tops[leader];
      checks++;
      if (valid != (leader >= 0)) failures++;
      if (leader >= 0) begin
        checks++;
        if (addr != tops[leader] || lane_mask != exp_mask) begin
          failures++;
          if (failures < 10) $display("t=%0d addr %h mask %h exp %h %h", t, addr, lane_mask, tops[leader], exp_mask);
        end
        if ($countones(exp_mask) > 1) merged++;
      end else begin
        checks++;
        if (lane_mask != '0) failures++;
      end
    end
    checks++;
    if (merged == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
